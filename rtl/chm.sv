// chm: Computing Head Module, one head's slice of the compute array.
//
// A CHM is a P_T x P_C grid of PEs.  PE(m, n) computes the output block in
// token block row m of the current row group and weight block column n of
// the current column group.  PEs in one row share a token block row, held in
// that row's input local buffer; PEs in one column share a weight column,
// held in sub-bank n of the CHM's column-buffer bank, together with its
// header.
//
// Each PE column has its own controller.  For every P_PE x P_PE output tile
// (ti, tj) it walks the column's retained blocks e = 0..len-1 and the b
// positions k inside a block.  In SBMM mode the block's row index comes from
// the header (idx = hdr_idx[e]), so every PE of the column fetches input
// block X[m, idx] from its own buffer through port n: the header is shared
// by the column, as in the paper.  In dense mode (DBMM/DHBMM) idx = e and
// len = n_inblk.  A beat reads one column slice from every input buffer of
// the column's port and one weight row slice; the data reach the PEs one
// cycle later.  A tile therefore takes b*len cycles, a block
// (b/P_PE)^2 * b * len cycles.  A column without retained blocks still
// produces a zero tile per tile position (one beat with the weight forced to
// zero).
//
// Stall: the beat that closes a tile is held while a PE of that column still
// has the previous tile in its output register (or a closing beat of it is
// still in the input pipeline); output registers are drained
// by the caller through out_pop.  busy falls when all controllers are idle,
// nothing is in flight and every output register is empty.
module chm
  import vit_pkg::*;
#(
  parameter int B      = 16,
  parameter int P_T    = 12,
  parameter int P_C    = 2,
  parameter int GAMMA  = 96,
  parameter int MAX_CW = 192,
  localparam int TI     = B / P_PE,
  localparam int TI_W   = (TI > 1) ? $clog2(TI) : 1,
  localparam int TAG_W  = 2 * TI_W,
  localparam int E_W    = $clog2(GAMMA + 1),
  localparam int SUB_W  = (P_C > 1) ? $clog2(P_C) : 1,
  localparam int CB_AW  = $clog2(GAMMA * B * TI),
  localparam int CW_W   = $clog2(MAX_CW),
  localparam int COL_W  = $clog2(MAX_CW * P_PE),
  localparam int RB_W   = $clog2(B)
) (
  input  logic              clk,
  input  logic              rst_n,
  // input local buffer load (all rows in parallel)
  input  logic [P_T-1:0]    ilb_wr_en,
  input  logic [RB_W-1:0]   ilb_wr_row,
  input  logic [CW_W-1:0]   ilb_wr_cw,
  input  vec_t              ilb_wr_data [P_T],
  // column buffer load
  input  logic              cb_wr_en,
  input  logic [SUB_W-1:0]  cb_wr_sub,
  input  logic [CB_AW-1:0]  cb_wr_addr,
  input  vec_t              cb_wr_data,
  input  logic              cb_hdr_wr_en,
  input  logic [SUB_W-1:0]  cb_hdr_wr_sub,
  input  logic [E_W-1:0]    cb_hdr_wr_entry,
  input  logic [E_W-1:0]    cb_hdr_wr_value,
  // control
  input  logic              start,
  input  logic              dense,
  input  logic [E_W-1:0]    n_inblk,
  input  logic [P_T-1:0]    row_valid,
  input  logic [P_C-1:0]    col_valid,
  output logic              busy,
  output logic              stall,     // a PE column holds its closing beat
  // tile outputs
  output logic              out_full [P_T][P_C],
  output logic [TAG_W-1:0]  out_tag  [P_T][P_C],
  output logic [$clog2(P_PE)-1:0] out_row [P_T][P_C],
  output vec_t              out_word [P_T][P_C],
  input  logic              out_pop  [P_T][P_C]
);

  // ---------------- buffers ----------------
  logic [P_C-1:0]   ilb_rd_en;
  logic [TI_W-1:0]  ilb_rd_ti  [P_C];
  logic [COL_W-1:0] ilb_rd_col [P_C];
  vec_t             ilb_rd_data [P_T][P_C];

  for (genvar m = 0; m < P_T; m++) begin : g_ilb
    vec_t rdd [P_C];
    input_local_buffer #(.B(B), .MAX_CW(MAX_CW), .P_C(P_C)) u_ilb (
      .clk, .wr_en(ilb_wr_en[m]), .wr_row(ilb_wr_row), .wr_cw(ilb_wr_cw),
      .wr_data(ilb_wr_data[m]), .rd_en(ilb_rd_en), .rd_ti(ilb_rd_ti),
      .rd_col(ilb_rd_col), .rd_data(rdd));
    for (genvar n = 0; n < P_C; n++) begin : g_c
      assign ilb_rd_data[m][n] = rdd[n];
    end
  end

  logic [E_W-1:0]   hdr_len [P_C];
  logic [E_W-1:0]   hdr_idx [P_C][GAMMA];
  logic [P_C-1:0]   cb_rd_en;
  logic [CB_AW-1:0] cb_rd_addr [P_C];
  vec_t             cb_rd_data [P_C];

  column_buffer_bank #(.B(B), .GAMMA(GAMMA), .P_C(P_C)) u_cb (
    .clk, .rst_n,
    .wr_en(cb_wr_en), .wr_sub(cb_wr_sub), .wr_addr(cb_wr_addr), .wr_data(cb_wr_data),
    .hdr_wr_en(cb_hdr_wr_en), .hdr_wr_sub(cb_hdr_wr_sub),
    .hdr_wr_entry(cb_hdr_wr_entry), .hdr_wr_value(cb_hdr_wr_value),
    .hdr_len, .hdr_idx, .rd_en(cb_rd_en), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data));

  // ---------------- per-column controllers ----------------
  logic [P_C-1:0] run;
  logic [P_C-1:0] v1, first1, last1, zero1;
  logic [TAG_W-1:0] tag1 [P_C];
  logic [P_C-1:0] col_stall;

  assign stall = (col_stall & run) != '0;

  for (genvar n = 0; n < P_C; n++) begin : g_ctl
    logic [TI_W-1:0] ti, tj;
    logic [E_W-1:0]  e;
    logic [RB_W-1:0] k;
    logic [E_W-1:0]  len, idx;
    logic            zero, is_first, is_last, last_tile;

    assign len      = dense ? n_inblk : hdr_len[n];
    assign zero     = (len == '0);
    assign idx      = dense ? e : hdr_idx[n][e];
    assign is_first = (e == '0) && (k == '0);
    assign is_last  = zero || ((e == len - 1'b1) && (k == RB_W'(B - 1)));
    assign last_tile = (int'(ti) == TI - 1) && (int'(tj) == TI - 1);

    always_comb begin
      col_stall[n] = 1'b0;
      for (int m = 0; m < P_T; m++)
        if (row_valid[m] && out_full[m][n] && !(out_pop[m][n] && int'(out_row[m][n]) == P_PE - 1))
          col_stall[n] = 1'b1;
      // a closing beat still in the input pipeline counts as a full register
      if (v1[n] && last1[n]) col_stall[n] = 1'b1;
      col_stall[n] = col_stall[n] && is_last;
    end

    assign ilb_rd_en[n]  = run[n] && !col_stall[n];
    assign ilb_rd_ti[n]  = ti;
    assign ilb_rd_col[n] = COL_W'(int'(idx) * B + int'(k));
    assign cb_rd_en[n]   = run[n] && !col_stall[n];
    assign cb_rd_addr[n] = CB_AW'((int'(e) * B + int'(k)) * TI + int'(tj));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        run[n] <= 1'b0;
        ti <= '0; tj <= '0; e <= '0; k <= '0;
        v1[n] <= 1'b0; first1[n] <= 1'b0; last1[n] <= 1'b0; zero1[n] <= 1'b0;
        tag1[n] <= '0;
      end else begin
        v1[n] <= 1'b0;
        if (start) begin
          run[n] <= col_valid[n];
          ti <= '0; tj <= '0; e <= '0; k <= '0;
        end else if (run[n] && !col_stall[n]) begin
          v1[n]     <= 1'b1;
          first1[n] <= is_first;
          last1[n]  <= is_last;
          zero1[n]  <= zero;
          tag1[n]   <= {ti, tj};
          if (is_last) begin
            e <= '0; k <= '0;
            if (int'(tj) == TI - 1) begin
              tj <= '0;
              ti <= ti + 1'b1;
            end else tj <= tj + 1'b1;
            if (last_tile) run[n] <= 1'b0;
          end else if (k == RB_W'(B - 1)) begin
            k <= '0;
            e <= e + 1'b1;
          end else k <= k + 1'b1;
        end
      end
    end
  end

  // ---------------- PE array ----------------
  for (genvar m = 0; m < P_T; m++) begin : g_row
    for (genvar n = 0; n < P_C; n++) begin : g_col
      pe #(.TAG_W(TAG_W)) u_pe (
        .clk, .rst_n,
        .in_valid(v1[n] && row_valid[m]), .in_first(first1[n]), .in_last(last1[n]),
        .in_zero(zero1[n]), .in_tag(tag1[n]),
        .x_vec(ilb_rd_data[m][n]), .w_vec(cb_rd_data[n]),
        .out_full(out_full[m][n]), .out_tag(out_tag[m][n]), .out_row(out_row[m][n]),
        .out_word(out_word[m][n]), .out_pop(out_pop[m][n]));
    end
  end

  always_comb begin
    busy = (run != '0) || (v1 != '0);
    for (int m = 0; m < P_T; m++)
      for (int n = 0; n < P_C; n++)
        if (out_full[m][n]) busy = 1'b1;
  end

endmodule
