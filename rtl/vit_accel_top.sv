// vit_accel_top: accelerator for ViT encoders pruned by static block weight
// pruning and dynamic token dropping.
//
// Units (one encoder layer is a sequence of passes over these):
//   mpca      compute array, P_H CHMs x P_T x P_C PEs x P_PE^2 MACs; block-wise
//             sparse (SBMM) or dense (DBMM, DHBMM) products GFB x CB -> RB
//   em        element-wise module: exp, softmax scaling, GELU, residual add,
//             LayerNorm; RB (or GFB) -> GFB
//   tdhm      token dropping: sorts the tokens by class-token attention and
//             rebuilds the token matrix in the GFB
//   gfb, rb   feature buffers (P_T banks each)
//   CB        column buffer, one bank per CHM, inside the mpca
//
// A pass is started by the host through mm_start/em_start/td_start with a
// command struct; one pass runs at a time and busy covers all of them.
// The schedule of a layer (LN1, QKV, Q K^T, exp, row sums, softmax scaling,
// A V, projection, add, token dropping, LN2, MLP, GELU, MLP, add) is issued
// by the host as a sequence of passes.  Off-chip memory is outside this
// module: weight columns and headers are written into the column buffer
// through the cb_* ports when the compute array asks for them
// (wload_req/wload_hgrp/wload_cgrp, answered by wload_done), and the host
// reads and writes the GFB (and reads the RB) through host_* ports while the
// accelerator is idle.  Host reads return data one cycle after the request.
//
// Buffer ports are shared: the running pass owns them; with nothing running
// the host does.  Single-row clients (EM, TDHM, host) address a token row and
// a column word; the bank of a row is (row/B) mod P_T.
//
// Reset is asynchronous and active low throughout.  The two assertions at
// the end use rst_n in their disable condition, so a lint tool may report
// rst_n as used both synchronously and asynchronously; that is expected and
// does not reach any flop.
module vit_accel_top
  import vit_pkg::*;
#(
  parameter int B       = 16,
  parameter int P_H     = 4,
  parameter int P_T     = 12,
  parameter int P_C     = 2,
  parameter int GAMMA   = 96,    // max blocks in a weight column (1536 / 16)
  parameter int ILB_CW  = 192,   // max input row width in words (1536 / 8)
  parameter int MAX_TOK = 208,   // 197 tokens padded to 13 blocks of 16
  parameter int FB_CW   = 256,   // GFB / RB row width in words (2048 columns)
  parameter int TD_CW   = 48,    // token width for dropping in words (D = 384)
  parameter int SORT_N  = 256,
  localparam int TI     = B / P_PE,
  localparam int E_W    = $clog2(GAMMA + 1),
  localparam int SUB_W  = (P_C > 1) ? $clog2(P_C) : 1,
  localparam int CHM_W  = (P_H > 1) ? $clog2(P_H) : 1,
  localparam int CB_AW  = $clog2(GAMMA * B * TI),
  localparam int FB_AW  = $clog2(((MAX_TOK / B + P_T - 1) / P_T) * B * FB_CW)
) (
  input  logic              clk,
  input  logic              rst_n,
  // pass control
  input  logic              mm_start,
  input  mm_cmd_t           mm_cmd,
  input  logic              em_start,
  input  em_cmd_t           em_cmd,
  input  logic              td_start,
  input  td_cmd_t           td_cmd,
  input  logic              sc_clear,      // clear the token scores (new layer)
  output logic              busy,
  output logic [31:0]       mm_cyc_load,
  output logic [31:0]       mm_cyc_comp,
  output logic [31:0]       mm_cyc_stall,
  output logic [8:0]        td_n_out,
  output logic [8:0]        td_n_keep,
  output logic [8:0]        td_n_fused,
  // weight loading (off-chip memory side)
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
  // host access to the feature buffers
  input  logic              host_gfb_wr_en,
  input  logic [8:0]        host_gfb_wr_row,
  input  logic [15:0]       host_gfb_wr_cw,
  input  vec_t              host_gfb_wr_data,
  input  logic              host_gfb_rd_en,
  input  logic [8:0]        host_gfb_rd_row,
  input  logic [15:0]       host_gfb_rd_cw,
  output vec_t              host_gfb_rd_data,
  input  logic              host_rb_rd_en,
  input  logic [8:0]        host_rb_rd_row,
  input  logic [15:0]       host_rb_rd_cw,
  output vec_t              host_rb_rd_data
);

  // ---------------- buffers ----------------
  logic [P_T-1:0]   gfb_wr_en, gfb_rd_en, rb_wr_en, rb_rd_en;
  logic [FB_AW-1:0] gfb_wr_addr [P_T];
  logic [FB_AW-1:0] gfb_rd_addr [P_T];
  logic [FB_AW-1:0] rb_wr_addr  [P_T];
  logic [FB_AW-1:0] rb_rd_addr  [P_T];
  vec_t             gfb_wr_data [P_T];
  vec_t             gfb_rd_data [P_T];
  vec_t             rb_wr_data  [P_T];
  vec_t             rb_rd_data  [P_T];

  feature_buffer #(.B(B), .P_T(P_T), .MAX_TOK(MAX_TOK), .MAX_CW(FB_CW)) u_gfb (
    .clk, .wr_en(gfb_wr_en), .wr_addr(gfb_wr_addr), .wr_data(gfb_wr_data),
    .rd_en(gfb_rd_en), .rd_addr(gfb_rd_addr), .rd_data(gfb_rd_data));
  feature_buffer #(.B(B), .P_T(P_T), .MAX_TOK(MAX_TOK), .MAX_CW(FB_CW)) u_rb (
    .clk, .wr_en(rb_wr_en), .wr_addr(rb_wr_addr), .wr_data(rb_wr_data),
    .rd_en(rb_rd_en), .rd_addr(rb_rd_addr), .rd_data(rb_rd_data));

  // ---------------- compute array ----------------
  logic             mm_busy;
  logic [P_T-1:0]   mm_gfb_rd_en;
  logic [FB_AW-1:0] mm_gfb_rd_addr [P_T];
  logic [P_T-1:0]   mm_rb_wr_en;
  logic [FB_AW-1:0] mm_rb_wr_addr [P_T];
  vec_t             mm_rb_wr_data [P_T];

  mpca #(.B(B), .P_H(P_H), .P_T(P_T), .P_C(P_C), .GAMMA(GAMMA), .MAX_CW(ILB_CW),
         .MAX_TOK(MAX_TOK), .FB_CW(FB_CW)) u_mpca (
    .clk, .rst_n, .start(mm_start), .mode(mm_cmd.mode), .n_rowblk(mm_cmd.n_rowblk),
    .n_inblk(E_W'(mm_cmd.n_inblk)), .n_heads(mm_cmd.n_heads), .cpb(mm_cmd.cpb),
    .x_cw_base(mm_cmd.x_cw_base), .x_head_stride(mm_cmd.x_head_stride),
    .r_cw_base(mm_cmd.r_cw_base), .r_head_stride(mm_cmd.r_head_stride),
    .busy(mm_busy), .cyc_load(mm_cyc_load), .cyc_comp(mm_cyc_comp), .cyc_stall(mm_cyc_stall),
    .wload_req, .wload_hgrp, .wload_cgrp, .wload_done,
    .cb_wr_en, .cb_wr_chm, .cb_wr_sub, .cb_wr_addr, .cb_wr_data,
    .cb_hdr_wr_en, .cb_hdr_wr_chm, .cb_hdr_wr_sub, .cb_hdr_wr_entry, .cb_hdr_wr_value,
    .gfb_rd_en(mm_gfb_rd_en), .gfb_rd_addr(mm_gfb_rd_addr), .gfb_rd_data(gfb_rd_data),
    .rb_wr_en(mm_rb_wr_en), .rb_wr_addr(mm_rb_wr_addr), .rb_wr_data(mm_rb_wr_data));

  // ---------------- element-wise module ----------------
  logic        em_busy;
  logic        em_rb_rd_en, em_gfb_rd_en, em_gfb_wr_en;
  logic [8:0]  em_rb_rd_row, em_gfb_rd_row, em_gfb_wr_row;
  logic [15:0] em_rb_rd_cw, em_gfb_rd_cw, em_gfb_wr_cw;
  vec_t        em_gfb_wr_data;
  vec_t        row_gfb_rd_data, row_rb_rd_data;
  logic        sc_valid;
  logic [11:0] sc_col;
  vec_t        sc_vec;

  em u_em (
    .clk, .rst_n, .start(em_start), .op(em_cmd.op), .n_rows(em_cmd.n_rows),
    .n_cw(em_cmd.n_cw), .valid_cols(em_cmd.valid_cols), .shift(em_cmd.shift),
    .a_gfb(em_cmd.a_gfb), .a_cw_base(em_cmd.a_cw_base), .b_cw_base(em_cmd.b_cw_base),
    .d_cw_base(em_cmd.d_cw_base), .f_cw(em_cmd.f_cw), .f_lane(em_cmd.f_lane),
    .capture(em_cmd.capture), .busy(em_busy),
    .rb_rd_en(em_rb_rd_en), .rb_rd_row(em_rb_rd_row), .rb_rd_cw(em_rb_rd_cw),
    .rb_rd_data(row_rb_rd_data),
    .gfb_rd_en(em_gfb_rd_en), .gfb_rd_row(em_gfb_rd_row), .gfb_rd_cw(em_gfb_rd_cw),
    .gfb_rd_data(row_gfb_rd_data),
    .gfb_wr_en(em_gfb_wr_en), .gfb_wr_row(em_gfb_wr_row), .gfb_wr_cw(em_gfb_wr_cw),
    .gfb_wr_data(em_gfb_wr_data),
    .sc_valid, .sc_col, .sc_vec);

  // ---------------- token dropping module ----------------
  logic        td_busy;
  logic        td_gfb_rd_en, td_gfb_wr_en;
  logic [8:0]  td_gfb_rd_row, td_gfb_wr_row;
  logic [15:0] td_gfb_rd_cw, td_gfb_wr_cw;
  vec_t        td_gfb_wr_data;

  tdhm #(.N_MAX(MAX_TOK), .SORT_N(SORT_N), .MAX_CW(TD_CW)) u_tdhm (
    .clk, .rst_n, .sc_clear, .sc_valid, .sc_col, .sc_vec,
    .start(td_start), .n_tok(td_cmd.n_tok), .n_cw(td_cmd.n_cw),
    .keep_rate(td_cmd.keep_rate), .inv_heads(td_cmd.inv_heads),
    .src_cw_base(td_cmd.src_cw_base), .dst_cw_base(td_cmd.dst_cw_base),
    .busy(td_busy), .n_out(td_n_out), .n_keep(td_n_keep), .n_fused(td_n_fused),
    .gfb_rd_en(td_gfb_rd_en), .gfb_rd_row(td_gfb_rd_row), .gfb_rd_cw(td_gfb_rd_cw),
    .gfb_rd_data(row_gfb_rd_data),
    .gfb_wr_en(td_gfb_wr_en), .gfb_wr_row(td_gfb_wr_row), .gfb_wr_cw(td_gfb_wr_cw),
    .gfb_wr_data(td_gfb_wr_data));

  assign busy = mm_busy || em_busy || td_busy;

  // ---------------- port sharing ----------------
  logic        r_gfb_rd_en, r_gfb_wr_en, r_rb_rd_en;
  logic [8:0]  r_gfb_rd_row, r_gfb_wr_row, r_rb_rd_row;
  logic [15:0] r_gfb_rd_cw, r_gfb_wr_cw, r_rb_rd_cw;
  vec_t        r_gfb_wr_data;

  always_comb begin
    // single-row requests
    if (em_busy) begin
      r_gfb_rd_en = em_gfb_rd_en; r_gfb_rd_row = em_gfb_rd_row; r_gfb_rd_cw = em_gfb_rd_cw;
      r_gfb_wr_en = em_gfb_wr_en; r_gfb_wr_row = em_gfb_wr_row; r_gfb_wr_cw = em_gfb_wr_cw;
      r_gfb_wr_data = em_gfb_wr_data;
      r_rb_rd_en = em_rb_rd_en; r_rb_rd_row = em_rb_rd_row; r_rb_rd_cw = em_rb_rd_cw;
    end else if (td_busy) begin
      r_gfb_rd_en = td_gfb_rd_en; r_gfb_rd_row = td_gfb_rd_row; r_gfb_rd_cw = td_gfb_rd_cw;
      r_gfb_wr_en = td_gfb_wr_en; r_gfb_wr_row = td_gfb_wr_row; r_gfb_wr_cw = td_gfb_wr_cw;
      r_gfb_wr_data = td_gfb_wr_data;
      r_rb_rd_en = 1'b0; r_rb_rd_row = '0; r_rb_rd_cw = '0;
    end else begin
      r_gfb_rd_en = host_gfb_rd_en && !mm_busy; r_gfb_rd_row = host_gfb_rd_row;
      r_gfb_rd_cw = host_gfb_rd_cw;
      r_gfb_wr_en = host_gfb_wr_en && !mm_busy; r_gfb_wr_row = host_gfb_wr_row;
      r_gfb_wr_cw = host_gfb_wr_cw; r_gfb_wr_data = host_gfb_wr_data;
      r_rb_rd_en = host_rb_rd_en && !mm_busy; r_rb_rd_row = host_rb_rd_row;
      r_rb_rd_cw = host_rb_rd_cw;
    end
    for (int g = 0; g < P_T; g++) begin
      // GFB reads: compute array uses all banks, others one bank
      if (mm_busy) begin
        gfb_rd_en[g]   = mm_gfb_rd_en[g];
        gfb_rd_addr[g] = mm_gfb_rd_addr[g];
      end else begin
        gfb_rd_en[g]   = r_gfb_rd_en && fb_bank(int'(r_gfb_rd_row), B, P_T) == g;
        gfb_rd_addr[g] = FB_AW'(fb_addr(int'(r_gfb_rd_row), int'(r_gfb_rd_cw), B, P_T, FB_CW));
      end
      gfb_wr_en[g]   = r_gfb_wr_en && fb_bank(int'(r_gfb_wr_row), B, P_T) == g;
      gfb_wr_addr[g] = FB_AW'(fb_addr(int'(r_gfb_wr_row), int'(r_gfb_wr_cw), B, P_T, FB_CW));
      gfb_wr_data[g] = r_gfb_wr_data;
      rb_rd_en[g]    = r_rb_rd_en && fb_bank(int'(r_rb_rd_row), B, P_T) == g;
      rb_rd_addr[g]  = FB_AW'(fb_addr(int'(r_rb_rd_row), int'(r_rb_rd_cw), B, P_T, FB_CW));
      rb_wr_en[g]    = mm_rb_wr_en[g];
      rb_wr_addr[g]  = mm_rb_wr_addr[g];
      rb_wr_data[g]  = mm_rb_wr_data[g];
    end
  end

  // read data of single-row clients comes from the bank addressed last cycle
  logic [$clog2(P_T)-1:0] gfb_rd_bank, rb_rd_bank;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gfb_rd_bank <= '0;
      rb_rd_bank  <= '0;
    end else begin
      if (r_gfb_rd_en) gfb_rd_bank <= $clog2(P_T)'(fb_bank(int'(r_gfb_rd_row), B, P_T));
      if (r_rb_rd_en)  rb_rd_bank  <= $clog2(P_T)'(fb_bank(int'(r_rb_rd_row), B, P_T));
    end
  end
  assign row_gfb_rd_data  = gfb_rd_data[gfb_rd_bank];
  assign row_rb_rd_data   = rb_rd_data[rb_rd_bank];
  assign host_gfb_rd_data = row_gfb_rd_data;
  assign host_rb_rd_data  = row_rb_rd_data;

  // one pass at a time
  a_one_pass: assert property (@(posedge clk) disable iff (!rst_n)
    (mm_start || em_start || td_start) |-> !busy);
  a_start_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({mm_start, em_start, td_start}));

endmodule
