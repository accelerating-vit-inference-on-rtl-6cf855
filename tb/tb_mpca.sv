// tb_mpca: self-checking test of the compute array at reduced size
// (b = 16, 2 CHMs of 2 x 2 PEs, 3 token block rows, 3 input blocks).
//
// The tb models the global feature buffer (read, one-cycle latency) and the
// result buffer (write) as arrays per bank, answers weight load requests by
// writing the column buffers of every CHM, and compares the result buffer
// with a reference product computed here.  Three passes are run:
//   SBMM   3 heads x 3 column blocks, about half of the weight blocks pruned,
//          one column with no retained block (zero column), one dense column
//   DBMM   same shapes with every block present
//   DHBMM  each head multiplies its own column slice of X
// Each pass checks every output word of every head, that the number of
// weight load requests equals head groups x column groups, that the input
// load time equals row groups x b x words (x P_H in DHBMM), and that the
// compute time is at least the model (b/P_PE)^2 * b * len summed over the
// groups.  The sparse pass must show stalls (short tiles drain slower than
// they are produced with these sizes).
module tb_mpca;
  import vit_pkg::*;
  localparam int B = 16, P_H = 2, P_T = 2, P_C = 2, GAMMA = 4, MAX_CW = 8, MAX_TOK = 64, FB_CW = 32;
  localparam int TI = B / P_PE;
  localparam int E_W = $clog2(GAMMA + 1), CB_AW = $clog2(GAMMA * B * TI);
  localparam int FB_AW = $clog2(((MAX_TOK / B + P_T - 1) / P_T) * B * FB_CW);
  localparam int DEPTH = 1 << FB_AW;
  localparam int NRB = 3, NIB = 3, NH = 3, CPB = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start; mm_mode_e mode; logic [7:0] n_rowblk, n_heads, cpb; logic [E_W-1:0] n_inblk;
  logic [15:0] x_cw_base, x_head_stride, r_cw_base, r_head_stride;
  logic busy; logic [31:0] cyc_load, cyc_comp, cyc_stall;
  logic wload_req; logic [7:0] wload_hgrp, wload_cgrp; logic wload_done;
  logic cb_wr_en; logic [0:0] cb_wr_chm, cb_wr_sub; logic [CB_AW-1:0] cb_wr_addr; vec_t cb_wr_data;
  logic cb_hdr_wr_en; logic [0:0] cb_hdr_wr_chm, cb_hdr_wr_sub; logic [E_W-1:0] cb_hdr_wr_entry, cb_hdr_wr_value;
  logic [P_T-1:0] gfb_rd_en; logic [FB_AW-1:0] gfb_rd_addr [P_T]; vec_t gfb_rd_data [P_T];
  logic [P_T-1:0] rb_wr_en; logic [FB_AW-1:0] rb_wr_addr [P_T]; vec_t rb_wr_data [P_T];

  mpca #(.B(B), .P_H(P_H), .P_T(P_T), .P_C(P_C), .GAMMA(GAMMA), .MAX_CW(MAX_CW),
         .MAX_TOK(MAX_TOK), .FB_CW(FB_CW)) dut (.*);

  vec_t gfb [P_T][DEPTH];
  vec_t rb  [P_T][DEPTH];
  always_ff @(posedge clk)
    for (int g = 0; g < P_T; g++) begin
      if (gfb_rd_en[g]) gfb_rd_data[g] <= gfb[g][gfb_rd_addr[g]];
      if (rb_wr_en[g]) rb[g][rb_wr_addr[g]] <= rb_wr_data[g];
    end

  // matrices: X [tokens][columns], W per head [NIB*B][CPB*B], block mask
  int X [NRB * B][2 * NIB * B];
  int W [NH][NIB * B][CPB * B];
  bit keep [NH][NIB][CPB];
  int checks = 0, failures = 0, wreqs = 0, stall_passes = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  function automatic data_t gfb_get(input int row, input int col);
    vec_t v;
    v = gfb[fb_bank(row, B, P_T)][fb_addr(row, col / P_PE, B, P_T, FB_CW)];
    return v[col % P_PE];
  endfunction
  function automatic data_t rb_get(input int row, input int col);
    vec_t v;
    v = rb[fb_bank(row, B, P_T)][fb_addr(row, col / P_PE, B, P_T, FB_CW)];
    return v[col % P_PE];
  endfunction

  // answer one weight load request: CHM j, sub-bank n gets column block
  // k*P_C+n of head i*P_H+j in the header + retained-blocks format
  task automatic load_weights(input int hg, input int cg, input bit dense);
    for (int j = 0; j < P_H; j++)
      for (int n = 0; n < P_C; n++) begin
        int h, c, len;
        h = hg * P_H + j; c = cg * P_C + n; len = 0;
        if (h >= NH || c >= CPB) continue;
        for (int ib = 0; ib < NIB; ib++)
          if (dense || keep[h][ib][c]) begin
            @(negedge clk);
            cb_hdr_wr_en = 1; cb_hdr_wr_chm = 1'(j); cb_hdr_wr_sub = 1'(n);
            cb_hdr_wr_entry = E_W'(len); cb_hdr_wr_value = E_W'(ib);
            @(negedge clk);
            cb_hdr_wr_en = 0;
            for (int k = 0; k < B; k++)
              for (int tj = 0; tj < TI; tj++) begin
                cb_wr_en = 1; cb_wr_chm = 1'(j); cb_wr_sub = 1'(n);
                cb_wr_addr = CB_AW'((len * B + k) * TI + tj);
                for (int l = 0; l < P_PE; l++)
                  cb_wr_data[l] = data_t'(W[h][ib * B + k][c * B + tj * P_PE + l]);
                @(negedge clk);
              end
            cb_wr_en = 0;
            len++;
          end
        cb_hdr_wr_en = 1; cb_hdr_wr_chm = 1'(j); cb_hdr_wr_sub = 1'(n);
        cb_hdr_wr_entry = E_W'(GAMMA); cb_hdr_wr_value = E_W'(len);
        @(negedge clk);
        cb_hdr_wr_en = 0;
      end
  endtask

  always @(posedge clk) begin
    if (wload_req && !wload_done) begin
      wreqs++;
      load_weights(int'(wload_hgrp), int'(wload_cgrp), mode != MM_SBMM);
      wload_done = 1;
      @(negedge clk);
      wload_done = 0;
    end
  end

  task automatic run_pass(input mm_mode_e md, input string name);
    int exp_wreq, exp_load, model_comp, xoff;
    mode = md; n_rowblk = NRB; n_inblk = E_W'(NIB); n_heads = NH; cpb = CPB;
    x_cw_base = 0; x_head_stride = (md == MM_DHBMM) ? 16'(NIB * TI) : 16'd0;
    r_cw_base = 16'(2 * NIB * TI); r_head_stride = 16'(CPB * TI);
    for (int g = 0; g < P_T; g++) for (int a = 0; a < DEPTH; a++) rb[g][a] = '0;
    wreqs = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    // reference
    for (int h = 0; h < NH; h++) begin
      xoff = (md == MM_DHBMM) ? h * NIB * B : 0;
      for (int r = 0; r < NRB * B; r++)
        for (int c = 0; c < CPB * B; c++) begin
          longint acc;
          int ev, got;
          acc = 0;
          for (int q = 0; q < NIB * B; q++)
            if (md != MM_SBMM || keep[h][q / B][c / B])
              acc += longint'(int'(gfb_get(r, xoff + q))) * W[h][q][c];
          ev = int'(sat16(64'(acc >>> FRAC)));
          got = int'(rb_get(r, 2 * NIB * B + h * CPB * B + c));
          chk(got == ev, $sformatf("%s h%0d r%0d c%0d got %0d exp %0d", name, h, r, c, got, ev));
        end
    end
    exp_wreq = ((NH + P_H - 1) / P_H) * ((CPB + P_C - 1) / P_C);
    chk(wreqs == exp_wreq, $sformatf("%s weight requests %0d", name, wreqs));
    exp_load = exp_wreq * ((NRB + P_T - 1) / P_T) * B * NIB * TI * ((md == MM_DHBMM) ? P_H : 1);
    chk(int'(cyc_load) == exp_load, $sformatf("%s load cycles %0d exp %0d", name, cyc_load, exp_load));
    // compute model: per group the longest column of the group
    model_comp = 0;
    for (int i = 0; i < (NH + P_H - 1) / P_H; i++)
      for (int k = 0; k < (CPB + P_C - 1) / P_C; k++) begin
        int mx;
        mx = 1;
        for (int j = 0; j < P_H; j++)
          for (int n = 0; n < P_C; n++) begin
            int h, c, len;
            h = i * P_H + j; c = k * P_C + n;
            if (h >= NH || c >= CPB) continue;
            len = 0;
            for (int ib = 0; ib < NIB; ib++) if (md != MM_SBMM || keep[h][ib][c]) len++;
            if (len > mx) mx = len;
          end
        model_comp += ((NRB + P_T - 1) / P_T) * TI * TI * B * mx;
      end
    chk(int'(cyc_comp) >= model_comp, $sformatf("%s compute cycles %0d < model %0d", name, cyc_comp, model_comp));
    $display("%s: load %0d compute %0d (model %0d) stall %0d", name, cyc_load, cyc_comp, model_comp, cyc_stall);
    if (cyc_stall > 0) stall_passes++;
  endtask

  initial begin
    start = 0; mode = MM_SBMM; wload_done = 0;
    cb_wr_en = 0; cb_wr_chm = '0; cb_wr_sub = '0; cb_wr_addr = '0; cb_wr_data = '0;
    cb_hdr_wr_en = 0; cb_hdr_wr_chm = '0; cb_hdr_wr_sub = '0; cb_hdr_wr_entry = '0; cb_hdr_wr_value = '0;
    n_rowblk = 0; n_inblk = '0; n_heads = 0; cpb = 0;
    x_cw_base = 0; x_head_stride = 0; r_cw_base = 0; r_head_stride = 0;
    for (int g = 0; g < P_T; g++) for (int a = 0; a < DEPTH; a++) gfb[g][a] = '0;
    // X: tokens x (2*NIB*B) columns, the second half feeds DHBMM head 1
    for (int r = 0; r < NRB * B; r++)
      for (int c = 0; c < 2 * NIB * B; c++) begin
        vec_t v;
        X[r][c] = $urandom_range(0, 511) - 256;
        v = gfb[fb_bank(r, B, P_T)][fb_addr(r, c / P_PE, B, P_T, FB_CW)];
        v[c % P_PE] = data_t'(X[r][c]);
        gfb[fb_bank(r, B, P_T)][fb_addr(r, c / P_PE, B, P_T, FB_CW)] = v;
      end
    for (int h = 0; h < NH; h++) begin
      for (int q = 0; q < NIB * B; q++)
        for (int c = 0; c < CPB * B; c++) W[h][q][c] = $urandom_range(0, 511) - 256;
      for (int ib = 0; ib < NIB; ib++)
        for (int c = 0; c < CPB; c++) keep[h][ib][c] = 1'($urandom_range(0, 1));
    end
    for (int ib = 0; ib < NIB; ib++) begin keep[0][ib][1] = 0; keep[1][ib][2] = 1; end
    repeat (3) @(negedge clk); rst_n = 1;

    run_pass(MM_SBMM, "SBMM");
    chk(stall_passes == 1, "SBMM pass shows no stall");
    run_pass(MM_DBMM, "DBMM");
    run_pass(MM_DHBMM, "DHBMM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
