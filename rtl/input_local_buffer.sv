// input_local_buffer: the Input Local Buffer in front of one row of PEs.
//
// It holds one row of b x b token blocks (b token rows, up to MAX_CW words of
// P_PE columns each), copied from the global feature buffer before a row
// group is computed.  Writes arrive as row slices (one token row, P_PE
// consecutive columns); the PEs need column slices (P_PE token rows at one
// column).  The buffer therefore has P_PE lanes: lane r stores token rows
// r, r+P_PE, ... of the block row, so a column slice is one word read from
// every lane followed by a lane-wise pick of the column inside the word.
//
// There are P_C read ports, one per PE column of the CHM: PE columns work on
// different weight columns whose headers select different input blocks, and
// the paper's choice of p_c = 2 is tied to the two ports of an FPGA block
// RAM.  A read port takes (ti, col): the slice X[ti*P_PE + r][col],
// r = 0..P_PE-1, appears on rd_data one cycle later.  Lane organisation and
// one-cycle read latency are this design's choices.
module input_local_buffer
  import vit_pkg::*;
#(
  parameter int B      = 16,   // block size b
  parameter int MAX_CW = 192,  // words (of P_PE columns) per token row
  parameter int P_C    = 2,    // read ports
  localparam int TI    = B / P_PE,
  localparam int DEPTH = TI * MAX_CW,
  localparam int CW_W  = $clog2(MAX_CW),
  localparam int COL_W = $clog2(MAX_CW * P_PE),
  localparam int TI_W  = (TI > 1) ? $clog2(TI) : 1,
  localparam int RB_W  = $clog2(B)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [RB_W-1:0]   wr_row,   // token row inside the block row
  input  logic [CW_W-1:0]   wr_cw,    // column word
  input  vec_t              wr_data,
  input  logic [P_C-1:0]    rd_en,
  input  logic [TI_W-1:0]   rd_ti  [P_C],
  input  logic [COL_W-1:0]  rd_col [P_C],
  output vec_t              rd_data [P_C]
);

  localparam int LANE_W = $clog2(P_PE);

  vec_t lane_mem [P_PE][DEPTH];
  vec_t rd_word  [P_C][P_PE];
  logic [LANE_W-1:0] rd_sel [P_C];

  always_ff @(posedge clk) begin
    if (wr_en)
      lane_mem[wr_row[LANE_W-1:0]][(int'(wr_row) >> LANE_W) * MAX_CW + int'(wr_cw)] <= wr_data;
    for (int p = 0; p < P_C; p++)
      if (rd_en[p]) begin
        for (int l = 0; l < P_PE; l++)
          rd_word[p][l] <= lane_mem[l][int'(rd_ti[p]) * MAX_CW + (int'(rd_col[p]) >> LANE_W)];
        rd_sel[p] <= rd_col[p][LANE_W-1:0];
      end
  end

  always_comb
    for (int p = 0; p < P_C; p++)
      for (int l = 0; l < P_PE; l++)
        rd_data[p][l] = rd_word[p][l][rd_sel[p]];

endmodule
