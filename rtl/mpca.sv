// mpca: Multi-level Parallelism Compute Array.
//
// P_H Computing Head Modules, each a P_T x P_C grid of PEs with P_PE x P_PE
// MAC units, execute one block-wise matrix product Y = X * W with the loop
// nest of the paper's SBMM/DBMM algorithm:
//
//   for i in 0 .. ceil(H/P_H)-1           head group: CHM j computes head j+i*P_H
//     for k in 0 .. ceil(CPB/P_C)-1       column group: PE column n -> column n+k*P_C
//       (weights of the group are loaded into the column buffer)
//       for l in 0 .. ceil(M1b/P_T)-1     row group: PE row m -> block row m+l*P_T
//         (token block rows are copied from the GFB into the input local buffers)
//         all PEs compute their output block, results drain into the RB
//
// CPB is the number of b-wide output column blocks per head (D'/b), M1b the
// number of token block rows and M2b (n_inblk) the number of input blocks per
// row.  In SBMM each PE column follows the header of its weight column, in
// DBMM it uses every input block, and in DHBMM every CHM additionally takes
// its own column slice of the input (x_head_stride), as Q_h does for Q_h K_h^T.
//
// Weight loading is requested from outside (wload_req with the head group and
// column group, answered by wload_done after the CB write ports have been
// used); off-chip memory is not part of this module.  Loading the input
// local buffers takes b * M2b*b/P_PE cycles per row group (all P_T buffers in
// parallel, all CHMs at once except in DHBMM, where CHMs load one after the
// other).  The compute phase of a row group takes (b/P_PE)^2 * b * len
// cycles for a weight column with len retained blocks, plus a few cycles of
// pipeline and draining.  Loads and compute are not overlapped in this
// design.  Result tiles leave the PEs row by row; RB bank m takes one word
// per cycle from the PEs of row m of all CHMs (fixed priority), and a PE
// column stalls if it finishes a tile before its previous one has drained.
// cyc_load / cyc_comp count cycles spent in each phase, cyc_stall the
// compute cycles in which at least one PE column is stalled.
module mpca
  import vit_pkg::*;
#(
  parameter int B       = 16,
  parameter int P_H     = 4,
  parameter int P_T     = 12,
  parameter int P_C     = 2,
  parameter int GAMMA   = 96,
  parameter int MAX_CW  = 192,   // ILB words per row (input width)
  parameter int MAX_TOK = 208,
  parameter int FB_CW   = 256,   // words per row of GFB / RB
  localparam int TI     = B / P_PE,
  localparam int TI_W   = (TI > 1) ? $clog2(TI) : 1,
  localparam int TAG_W  = 2 * TI_W,
  localparam int E_W    = $clog2(GAMMA + 1),
  localparam int SUB_W  = (P_C > 1) ? $clog2(P_C) : 1,
  localparam int CHM_W  = (P_H > 1) ? $clog2(P_H) : 1,
  localparam int CB_AW  = $clog2(GAMMA * B * TI),
  localparam int CW_W   = $clog2(MAX_CW),
  localparam int RB_W   = $clog2(B),
  localparam int FB_AW  = $clog2(((MAX_TOK / B + P_T - 1) / P_T) * B * FB_CW)
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  mm_mode_e          mode,
  input  logic [7:0]        n_rowblk,      // M1 / b
  input  logic [E_W-1:0]    n_inblk,       // M2 / b
  input  logic [7:0]        n_heads,       // H
  input  logic [7:0]        cpb,           // output column blocks per head
  input  logic [15:0]       x_cw_base,
  input  logic [15:0]       x_head_stride,
  input  logic [15:0]       r_cw_base,
  input  logic [15:0]       r_head_stride,
  output logic              busy,
  output logic [31:0]       cyc_load,
  output logic [31:0]       cyc_comp,
  output logic [31:0]       cyc_stall,
  // weight loading
  output logic              wload_req,
  output logic [7:0]        wload_hgrp,
  output logic [7:0]        wload_cgrp,
  input  logic              wload_done,
  input  logic              cb_wr_en,
  input  logic [CHM_W-1:0]  cb_wr_chm,
  input  logic [SUB_W-1:0]  cb_wr_sub,
  input  logic [CB_AW-1:0]  cb_wr_addr,
  input  vec_t              cb_wr_data,
  input  logic              cb_hdr_wr_en,
  input  logic [CHM_W-1:0]  cb_hdr_wr_chm,
  input  logic [SUB_W-1:0]  cb_hdr_wr_sub,
  input  logic [E_W-1:0]    cb_hdr_wr_entry,
  input  logic [E_W-1:0]    cb_hdr_wr_value,
  // global feature buffer read ports
  output logic [P_T-1:0]    gfb_rd_en,
  output logic [FB_AW-1:0]  gfb_rd_addr [P_T],
  input  vec_t              gfb_rd_data [P_T],
  // result buffer write ports
  output logic [P_T-1:0]    rb_wr_en,
  output logic [FB_AW-1:0]  rb_wr_addr [P_T],
  output vec_t              rb_wr_data [P_T]
);

  typedef enum logic [2:0] {S_IDLE, S_WREQ, S_LOAD, S_LWAIT, S_COMP, S_CWAIT} state_e;
  state_e state;

  logic [7:0]  i_grp, k_grp, l_grp;
  logic [CHM_W-1:0] ld_chm;          // CHM being loaded (DHBMM)
  logic [RB_W-1:0]  ld_row;
  logic [CW_W-1:0]  ld_cw;
  logic [CW_W:0]    in_cw;            // words per input row
  logic        head_wise;

  assign head_wise = (mode == MM_DHBMM);
  assign in_cw     = (CW_W + 1)'(int'(n_inblk) * TI);

  // ---------------- validity of PE rows / columns / CHMs ----------------
  logic [P_T-1:0] row_valid;
  logic [P_C-1:0] col_valid [P_H];
  logic [P_H-1:0] chm_busy;
  logic [P_H-1:0] chm_stall;

  always_comb begin
    for (int m = 0; m < P_T; m++)
      row_valid[m] = (int'(l_grp) * P_T + m) < int'(n_rowblk);
    for (int j = 0; j < P_H; j++)
      for (int n = 0; n < P_C; n++)
        col_valid[j][n] = ((int'(i_grp) * P_H + j) < int'(n_heads)) &&
                          ((int'(k_grp) * P_C + n) < int'(cpb));
  end

  // ---------------- input local buffer load pipeline ----------------
  logic             ld_v;
  logic [RB_W-1:0]  ld_row1;
  logic [CW_W-1:0]  ld_cw1;
  logic [P_H-1:0]   ld_mask1;

  always_comb begin
    int base;
    base = int'(x_cw_base) + (head_wise ? (int'(i_grp) * P_H + int'(ld_chm)) * int'(x_head_stride) : 0);
    for (int m = 0; m < P_T; m++) begin
      gfb_rd_en[m]   = (state == S_LOAD) && row_valid[m];
      gfb_rd_addr[m] = FB_AW'(fb_addr((int'(l_grp) * P_T + m) * B + int'(ld_row),
                                      base + int'(ld_cw), B, P_T, FB_CW));
    end
  end

  // ---------------- CHMs ----------------
  logic             chm_start;
  logic             out_full [P_H][P_T][P_C];
  logic [TAG_W-1:0] out_tag  [P_H][P_T][P_C];
  logic [$clog2(P_PE)-1:0] out_row [P_H][P_T][P_C];
  vec_t             out_word [P_H][P_T][P_C];
  logic             out_pop  [P_H][P_T][P_C];

  for (genvar j = 0; j < P_H; j++) begin : g_chm
    logic             of [P_T][P_C];
    logic [TAG_W-1:0] ot [P_T][P_C];
    logic [$clog2(P_PE)-1:0] orow [P_T][P_C];
    vec_t             ow [P_T][P_C];
    logic             op [P_T][P_C];
    logic [P_T-1:0]   ilb_we;
    always_comb begin
      for (int m = 0; m < P_T; m++) begin
        ilb_we[m] = ld_v && ld_mask1[j] && row_valid[m];
        for (int n = 0; n < P_C; n++) begin
          out_full[j][m][n] = of[m][n];
          out_tag[j][m][n]  = ot[m][n];
          out_row[j][m][n]  = orow[m][n];
          out_word[j][m][n] = ow[m][n];
          op[m][n]          = out_pop[j][m][n];
        end
      end
    end
    chm #(.B(B), .P_T(P_T), .P_C(P_C), .GAMMA(GAMMA), .MAX_CW(MAX_CW)) u_chm (
      .clk, .rst_n,
      .ilb_wr_en(ilb_we), .ilb_wr_row(ld_row1), .ilb_wr_cw(ld_cw1), .ilb_wr_data(gfb_rd_data),
      .cb_wr_en(cb_wr_en && int'(cb_wr_chm) == j), .cb_wr_sub, .cb_wr_addr, .cb_wr_data,
      .cb_hdr_wr_en(cb_hdr_wr_en && int'(cb_hdr_wr_chm) == j), .cb_hdr_wr_sub,
      .cb_hdr_wr_entry, .cb_hdr_wr_value,
      .start(chm_start), .dense(mode != MM_SBMM), .n_inblk,
      .row_valid, .col_valid(col_valid[j]), .busy(chm_busy[j]), .stall(chm_stall[j]),
      .out_full(of), .out_tag(ot), .out_row(orow), .out_word(ow), .out_pop(op));
  end

  // ---------------- result drain: RB bank m serves PE row m of every CHM ----------------
  always_comb begin
    for (int j = 0; j < P_H; j++)
      for (int m = 0; m < P_T; m++)
        for (int n = 0; n < P_C; n++)
          out_pop[j][m][n] = 1'b0;
    for (int m = 0; m < P_T; m++) begin
      logic found;
      int sj, sn, ti, tj, row, cw;
      found = 1'b0; sj = 0; sn = 0;
      for (int j = 0; j < P_H; j++)
        for (int n = 0; n < P_C; n++)
          if (!found && out_full[j][m][n]) begin
            found = 1'b1; sj = j; sn = n;
          end
      if (found) out_pop[sj][m][sn] = 1'b1;
      ti  = int'(out_tag[sj][m][sn]) >> TI_W;
      tj  = int'(out_tag[sj][m][sn]) & ((1 << TI_W) - 1);
      row = (int'(l_grp) * P_T + m) * B + ti * P_PE + int'(out_row[sj][m][sn]);
      cw  = int'(r_cw_base) + (int'(i_grp) * P_H + sj) * int'(r_head_stride)
            + (int'(k_grp) * P_C + sn) * TI + tj;
      rb_wr_en[m]   = found;
      rb_wr_addr[m] = FB_AW'(fb_addr(row, cw, B, P_T, FB_CW));
      rb_wr_data[m] = out_word[sj][m][sn];
    end
  end

  // ---------------- loop controller (Algorithm 2) ----------------
  logic last_i, last_k, last_l;
  assign last_i = (int'(i_grp) + 1) * P_H >= int'(n_heads);
  assign last_k = (int'(k_grp) + 1) * P_C >= int'(cpb);
  assign last_l = (int'(l_grp) + 1) * P_T >= int'(n_rowblk);

  assign busy       = (state != S_IDLE);
  assign wload_req  = (state == S_WREQ);
  assign wload_hgrp = i_grp;
  assign wload_cgrp = k_grp;
  assign chm_start  = (state == S_COMP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i_grp <= '0; k_grp <= '0; l_grp <= '0;
      ld_chm <= '0; ld_row <= '0; ld_cw <= '0;
      ld_v <= 1'b0; ld_row1 <= '0; ld_cw1 <= '0; ld_mask1 <= '0;
      cyc_load <= '0; cyc_comp <= '0; cyc_stall <= '0;
    end else begin
      ld_v <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          i_grp <= '0; k_grp <= '0; l_grp <= '0;
          cyc_load <= '0; cyc_comp <= '0; cyc_stall <= '0;
          state <= S_WREQ;
        end
        S_WREQ: if (wload_done) begin
          l_grp <= '0;
          ld_chm <= '0; ld_row <= '0; ld_cw <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          cyc_load <= cyc_load + 1;
          ld_v     <= 1'b1;
          ld_row1  <= ld_row;
          ld_cw1   <= ld_cw;
          ld_mask1 <= head_wise ? P_H'(1) << ld_chm : '1;
          if ((CW_W + 1)'(ld_cw) == in_cw - 1'b1) begin
            ld_cw <= '0;
            if (ld_row == RB_W'(B - 1)) begin
              ld_row <= '0;
              if (!head_wise || int'(ld_chm) == P_H - 1) state <= S_LWAIT;
              else ld_chm <= ld_chm + 1'b1;
            end else ld_row <= ld_row + 1'b1;
          end else ld_cw <= ld_cw + 1'b1;
        end
        S_LWAIT: state <= S_COMP;   // last ILB write lands
        S_COMP: state <= S_CWAIT;   // CHM start pulse
        S_CWAIT: begin
          cyc_comp <= cyc_comp + 1;
          if (chm_busy == '0) begin
            if (!last_l) begin
              l_grp <= l_grp + 1'b1;
              ld_chm <= '0; ld_row <= '0; ld_cw <= '0;
              state <= S_LOAD;
            end else if (!last_k) begin
              k_grp <= k_grp + 1'b1;
              state <= S_WREQ;
            end else if (!last_i) begin
              k_grp <= '0;
              i_grp <= i_grp + 1'b1;
              state <= S_WREQ;
            end else state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      // cycles in which some PE column waits for the drain
      if (chm_stall != '0) cyc_stall <= cyc_stall + 1;
    end
  end

endmodule
