// column_buffer_bank: one bank of the Column Buffer (CB), serving one CHM.
//
// The bank has P_C sub-banks, one per PE column of its CHM.  A sub-bank
// holds one column of b x b weight blocks in the sparse format of the
// design: a header with the number of retained blocks (len) and the row
// index of each retained block, followed by the retained blocks only, in
// column order.  Dense weights use the same storage with len and indices
// covering every block.  GAMMA is the largest number of blocks in a column.
//
// Block data is stored row by row: word ((e*b + k)*TI + tj) of a sub-bank is
// row k, columns tj*P_PE.. of the e-th retained block.  A read port takes
// (e, k, tj) and returns that word one cycle later; this is exactly the
// weight row slice a PE consumes per beat.  The header is kept in registers
// and read combinationally so the column controller can turn an entry number
// into an input-block address in the same cycle.  Loading (from off-chip
// memory) goes through the write ports, one word or header entry per cycle.
module column_buffer_bank
  import vit_pkg::*;
#(
  parameter int B     = 16,
  parameter int GAMMA = 96,
  parameter int P_C   = 2,
  localparam int TI     = B / P_PE,
  localparam int DEPTH  = GAMMA * B * TI,
  localparam int ADDR_W = $clog2(DEPTH),
  localparam int E_W    = $clog2(GAMMA + 1),
  localparam int SUB_W  = (P_C > 1) ? $clog2(P_C) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load side
  input  logic              wr_en,
  input  logic [SUB_W-1:0]  wr_sub,
  input  logic [ADDR_W-1:0] wr_addr,
  input  vec_t              wr_data,
  input  logic              hdr_wr_en,
  input  logic [SUB_W-1:0]  hdr_wr_sub,
  input  logic [E_W-1:0]    hdr_wr_entry,  // entry number, or GAMMA to write len
  input  logic [E_W-1:0]    hdr_wr_value,
  // compute side
  output logic [E_W-1:0]    hdr_len [P_C],
  output logic [E_W-1:0]    hdr_idx [P_C][GAMMA],
  input  logic [P_C-1:0]    rd_en,
  input  logic [ADDR_W-1:0] rd_addr [P_C],
  output vec_t              rd_data [P_C]
);

  vec_t mem [P_C][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_sub][wr_addr] <= wr_data;
    for (int p = 0; p < P_C; p++)
      if (rd_en[p]) rd_data[p] <= mem[p][rd_addr[p]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < P_C; p++) begin
        hdr_len[p] <= '0;
        for (int e = 0; e < GAMMA; e++) hdr_idx[p][e] <= '0;
      end
    end else if (hdr_wr_en) begin
      if (int'(hdr_wr_entry) == GAMMA) hdr_len[hdr_wr_sub] <= hdr_wr_value;
      else hdr_idx[hdr_wr_sub][hdr_wr_entry] <= hdr_wr_value;
    end
  end

  a_len_range: assert property (@(posedge clk) disable iff (!rst_n)
    (hdr_wr_en && int'(hdr_wr_entry) == GAMMA) |-> int'(hdr_wr_value) <= GAMMA);

endmodule
