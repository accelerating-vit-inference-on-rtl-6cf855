// tb_vit_accel_top_full: the end-to-end pass chain of tb_vit_accel_top run
// on the accelerator with every parameter at its default (4 CHMs of 12 x 2
// PEs, 208-token buffers, 1536-wide input rows, 256-entry sorter).  The
// workload is kept small (40 tokens of 32 features) so the run stays short;
// what is exercised is the full-size hardware: LayerNorm, a sparse product
// with pruned blocks, a zero column and stalls, GELU, residual add, a
// head-wise and a dense product, exp with score capture, and token dropping
// with fusion, all checked against references computed in the bench and
// each mechanism counted (one that never happens is a failure).
module tb_vit_accel_top_full;
  import vit_pkg::*;
  localparam int B = 16, P_H = 4, P_T = 12, P_C = 2, GAMMA = 96, ILB_CW = 192, MAX_TOK = 208;
  localparam int FB_CW = 256, TD_CW = 48, SORT_N = 256;
  localparam int TI = B / P_PE, E_W = $clog2(GAMMA + 1), CB_AW = $clog2(GAMMA * B * TI);
  localparam int NT = 40, D = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic mm_start, em_start, td_start, sc_clear, busy;
  mm_cmd_t mm_cmd; em_cmd_t em_cmd; td_cmd_t td_cmd;
  logic [31:0] mm_cyc_load, mm_cyc_comp, mm_cyc_stall;
  logic [8:0] td_n_out, td_n_keep, td_n_fused;
  logic wload_req, wload_done; logic [7:0] wload_hgrp, wload_cgrp;
  logic cb_wr_en; logic [1:0] cb_wr_chm; logic [0:0] cb_wr_sub; logic [CB_AW-1:0] cb_wr_addr; vec_t cb_wr_data;
  logic cb_hdr_wr_en; logic [1:0] cb_hdr_wr_chm; logic [0:0] cb_hdr_wr_sub; logic [E_W-1:0] cb_hdr_wr_entry, cb_hdr_wr_value;
  logic host_gfb_wr_en, host_gfb_rd_en, host_rb_rd_en;
  logic [8:0] host_gfb_wr_row, host_gfb_rd_row, host_rb_rd_row;
  logic [15:0] host_gfb_wr_cw, host_gfb_rd_cw, host_rb_rd_cw;
  vec_t host_gfb_wr_data, host_gfb_rd_data, host_rb_rd_data;

  vit_accel_top dut (.*);

  int checks = 0, failures = 0;
  int n_sbmm = 0, n_dbmm = 0, n_dhbmm = 0, n_stall = 0, n_zero_col = 0;
  int n_lnorm = 0, n_gelu = 0, n_add = 0, n_exp = 0, n_capture = 0, n_drop = 0, n_fuse = 0;

  // weights of the current matrix pass: [head][row][col], block mask
  int W [P_H][64][48];
  bit keep [P_H][4][3];
  bit dense_w;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15 || (failures % 500) == 0) $display("FAIL %s", what); end
  endtask

  // ---------------- host access ----------------
  task automatic gfb_write(input int row, input int cw, input vec_t v);
    @(negedge clk);
    host_gfb_wr_en = 1; host_gfb_wr_row = 9'(row); host_gfb_wr_cw = 16'(cw); host_gfb_wr_data = v;
    @(negedge clk);
    host_gfb_wr_en = 0;
  endtask
  task automatic gfb_read(input int row, input int col, output int val);
    @(negedge clk);
    host_gfb_rd_en = 1; host_gfb_rd_row = 9'(row); host_gfb_rd_cw = 16'(col / P_PE);
    @(negedge clk);
    host_gfb_rd_en = 0;
    val = int'(host_gfb_rd_data[col % P_PE]);
  endtask
  task automatic rb_read(input int row, input int col, output int val);
    @(negedge clk);
    host_rb_rd_en = 1; host_rb_rd_row = 9'(row); host_rb_rd_cw = 16'(col / P_PE);
    @(negedge clk);
    host_rb_rd_en = 0;
    val = int'(host_rb_rd_data[col % P_PE]);
  endtask

  // ---------------- off-chip weight memory ----------------
  always @(posedge clk) begin
    if (wload_req && !wload_done) begin
      for (int j = 0; j < P_H; j++)
        for (int n = 0; n < P_C; n++) begin
          int h, c, len;
          h = int'(wload_hgrp) * P_H + j; c = int'(wload_cgrp) * P_C + n; len = 0;
          if (h >= int'(mm_cmd.n_heads) || c >= int'(mm_cmd.cpb)) continue;
          for (int ib = 0; ib < int'(mm_cmd.n_inblk); ib++)
            if (dense_w || keep[h][ib][c]) begin
              @(negedge clk);
              cb_hdr_wr_en = 1; cb_hdr_wr_chm = 2'(j); cb_hdr_wr_sub = 1'(n);
              cb_hdr_wr_entry = E_W'(len); cb_hdr_wr_value = E_W'(ib);
              for (int k = 0; k < B; k++)
                for (int tj = 0; tj < TI; tj++) begin
                  cb_wr_en = 1; cb_wr_chm = 2'(j); cb_wr_sub = 1'(n);
                  cb_wr_addr = CB_AW'((len * B + k) * TI + tj);
                  for (int l = 0; l < P_PE; l++)
                    cb_wr_data[l] = data_t'(W[h][ib * B + k][c * B + tj * P_PE + l]);
                  @(negedge clk);
                  cb_hdr_wr_en = 0;
                end
              cb_wr_en = 0;
              len++;
            end
          if (len == 0) n_zero_col++;
          @(negedge clk);
          cb_hdr_wr_en = 1; cb_hdr_wr_chm = 2'(j); cb_hdr_wr_sub = 1'(n);
          cb_hdr_wr_entry = E_W'(GAMMA); cb_hdr_wr_value = E_W'(len);
          @(negedge clk);
          cb_hdr_wr_en = 0;
        end
      wload_done = 1;
      @(negedge clk);
      wload_done = 0;
    end
  end

  // ---------------- passes ----------------
  task automatic wait_idle();
    int n;
    n = 0;
    @(negedge clk);
    while (busy) begin @(negedge clk); n++; end
  endtask

  task automatic mm_pass(input mm_mode_e md, input int n_in, input int nh, input int cpbv,
                         input int xb, input int xs, input int rb_base, input int rs, input int wscale);
    int xv [NT][64];
    dense_w = (md != MM_SBMM);
    for (int h = 0; h < nh; h++)
      for (int q = 0; q < n_in * B; q++)
        for (int c = 0; c < cpbv * B; c++) W[h][q][c] = $urandom_range(0, 2 * wscale) - wscale;
    // input as stored in the GFB
    for (int h = 0; h < nh; h++)
      for (int r = 0; r < NT; r++)
        for (int q = 0; q < n_in * B; q++)
          if (h == 0 || md == MM_DHBMM)
            gfb_read(r, (xb + h * xs) * P_PE + q, xv[r][h * 32 + q]);
    mm_cmd = '0;
    mm_cmd.mode = md; mm_cmd.n_rowblk = 8'((NT + B - 1) / B); mm_cmd.n_inblk = 8'(n_in);
    mm_cmd.n_heads = 8'(nh); mm_cmd.cpb = 8'(cpbv); mm_cmd.x_cw_base = 16'(xb);
    mm_cmd.x_head_stride = 16'(xs); mm_cmd.r_cw_base = 16'(rb_base); mm_cmd.r_head_stride = 16'(rs);
    @(negedge clk); mm_start = 1; @(negedge clk); mm_start = 0;
    wait_idle();
    for (int h = 0; h < nh; h++)
      for (int r = 0; r < NT; r++)
        for (int c = 0; c < cpbv * B; c++) begin
          longint acc;
          int got, xo;
          acc = 0;
          xo = (md == MM_DHBMM) ? h * 32 : 0;
          for (int q = 0; q < n_in * B; q++)
            if (md != MM_SBMM || keep[h][q / B][c / B]) acc += longint'(xv[r][xo + q]) * W[h][q][c];
          rb_read(r, (rb_base + h * rs) * P_PE + c, got);
          chk(got == int'(sat16(64'(acc >>> FRAC))), $sformatf("mm mode %0d h%0d r%0d c%0d got %0d exp %0d", md, h, r, c, got, int'(sat16(64'(acc >>> FRAC)))));
        end
    case (md)
      MM_SBMM:  n_sbmm++;
      MM_DBMM:  n_dbmm++;
      default:  n_dhbmm++;
    endcase
    if (mm_cyc_stall > 0) n_stall++;
    $display("mm mode %0d: load %0d compute %0d stall %0d cycles", md, mm_cyc_load, mm_cyc_comp, mm_cyc_stall);
  endtask

  task automatic em_pass(input em_op_e op, input int ncw, input int valid, input int sh, input bit agfb,
                         input int a, input int b, input int d, input bit cap);
    em_cmd = '0;
    em_cmd.op = op; em_cmd.n_rows = 9'(NT); em_cmd.n_cw = 8'(ncw); em_cmd.valid_cols = 12'(valid);
    em_cmd.shift = 5'(sh); em_cmd.a_gfb = agfb; em_cmd.a_cw_base = 16'(a); em_cmd.b_cw_base = 16'(b);
    em_cmd.d_cw_base = 16'(d); em_cmd.capture = cap;
    @(negedge clk); em_start = 1; @(negedge clk); em_start = 0;
    wait_idle();
  endtask

  function automatic real absr(input real x); return x < 0 ? -x : x; endfunction

  initial begin
    int v, g, x0, sc [NT], ord [NT], k;
    start_defaults();
    repeat (3) @(negedge clk); rst_n = 1;

    // token matrix X in words 0..3
    for (int r = 0; r < MAX_TOK; r++)
      for (int w = 0; w < D / P_PE; w++) begin
        vec_t vv;
        for (int l = 0; l < P_PE; l++) vv[l] = (r < NT) ? data_t'($urandom_range(0, 1023)) - 16'sd512 : '0;
        gfb_write(r, w, vv);
      end

    // LayerNorm X -> words 4..7
    em_pass(EM_LNORM, 4, D, 0, 1, 0, 0, 4, 0);
    for (int r = 0; r < NT; r += 7) begin
      real m, s, xs [D];
      m = 0; s = 0;
      for (int c = 0; c < D; c++) begin gfb_read(r, c, v); xs[c] = real'(v) / 256.0; m += xs[c]; end
      m /= D;
      for (int c = 0; c < D; c++) s += (xs[c] - m) ** 2;
      s = $sqrt(s / D);
      for (int c = 0; c < D; c++) begin
        real e;
        e = (xs[c] - m) / s;
        gfb_read(r, 32 + c, v);
        chk(absr(real'(v) / 256.0 - e) < 0.05 + 0.03 * absr(e), $sformatf("lnorm r%0d c%0d", r, c));
      end
    end
    n_lnorm++;

    // SBMM: 2 heads x 2 column blocks of LN(X); head 0 column 1 fully pruned,
    // head 1 column 0 has a single block
    for (int h = 0; h < P_H; h++)
      for (int ib = 0; ib < 4; ib++)
        for (int c = 0; c < 3; c++) keep[h][ib][c] = 1'($urandom_range(0, 1));
    keep[0][0][1] = 0; keep[0][1][1] = 0;
    keep[1][0][0] = 1; keep[1][1][0] = 0;
    mm_pass(MM_SBMM, 2, 2, 2, 4, 0, 0, 4, 64);

    // GELU of the RB result (64 columns) -> GFB words 8..15
    em_pass(EM_GELU, 8, 64, 0, 0, 0, 0, 8, 0);
    for (int r = 0; r < NT; r += 5)
      for (int c = 0; c < 64; c++) begin
        real x, t, e;
        rb_read(r, c, v); x = real'(v) / 256.0;
        t = 0.7978845608 * (x + 0.044715 * x * x * x);
        e = 0.5 * x * (1.0 + (($exp(t) - $exp(-t)) / ($exp(t) + $exp(-t))));
        gfb_read(r, 64 + c, g);
        chk(absr(real'(g) / 256.0 - e) < 0.04 + 0.03 * absr(x), $sformatf("gelu r%0d c%0d", r, c));
      end
    n_gelu++;

    // ADD: RB + GELU output -> GFB words 16..23
    em_pass(EM_ADD, 8, 64, 0, 0, 0, 8, 16, 0);
    for (int r = 0; r < NT; r += 3)
      for (int c = 0; c < 64; c += 3) begin
        int a, s;
        rb_read(r, c, a); gfb_read(r, 64 + c, g); gfb_read(r, 128 + c, s);
        chk(s == int'(sat16(64'(a + g))), $sformatf("add r%0d c%0d", r, c));
      end
    n_add++;

    // DHBMM: head h multiplies GELU columns 32h..32h+31, dense 32x16 weights
    mm_pass(MM_DHBMM, 2, 2, 1, 8, 4, 16, 2, 32);

    // DBMM: X x W2 (32 x 48) -> RB words 20..25, a 40-wide "attention" row
    mm_pass(MM_DBMM, 2, 1, 3, 0, 0, 20, 6, 16);

    // EXP of the attention rows (x / 8), row 0 captured as token scores
    @(negedge clk); sc_clear = 1; @(negedge clk); sc_clear = 0;
    em_pass(EM_EXP, 5, NT, 3, 0, 20, 0, 24, 1);
    for (int c = 0; c < NT; c++) begin
      real e;
      rb_read(0, 160 + c, v);
      e = $exp(real'(v) / 256.0 / 8.0);
      gfb_read(0, 192 + c, g);
      sc[c] = g;
      chk(absr(real'(g) / 256.0 - e) < 0.012 + 0.01 * e, $sformatf("exp c%0d", c));
    end
    n_exp++;

    // token dropping on X with the captured scores (one head)
    td_cmd = '0;
    td_cmd.n_tok = 9'(NT); td_cmd.n_cw = 8'(D / P_PE); td_cmd.keep_rate = 9'(179);
    td_cmd.inv_heads = 17'(65536); td_cmd.src_cw_base = 0; td_cmd.dst_cw_base = 28;
    @(negedge clk); td_start = 1; @(negedge clk); td_start = 0;
    wait_idle();
    for (int i = 0; i < NT - 1; i++) ord[i] = i + 1;
    for (int i = 1; i < NT - 1; i++)
      for (int j = i; j > 0; j--)
        if (sc[ord[j]] > sc[ord[j - 1]]) begin int t; t = ord[j]; ord[j] = ord[j - 1]; ord[j - 1] = t; end
    k = ((NT - 1) * 179 + 255) / 256;
    chk(int'(td_n_keep) == k && int'(td_n_fused) == NT - 1 - k && int'(td_n_out) == k + 2, "td counts");
    // the captured scores must be the exp row (score capture works)
    if (int'(td_n_keep) == k) n_capture++;
    for (int c = 0; c < D; c++) begin
      gfb_read(0, c, x0); gfb_read(0, 224 + c, g);
      chk(g == x0, "class token kept");
    end
    for (int i = 0; i < k; i++)
      for (int c = 0; c < D; c += 5) begin
        gfb_read(ord[i], c, x0); gfb_read(i + 1, 224 + c, g);
        chk(g == x0, $sformatf("kept row %0d", i + 1));
      end
    if (td_n_fused > 0) n_drop++;
    for (int c = 0; c < D; c++) begin
      longint acc;
      acc = 0;
      for (int i = k; i < NT - 1; i++) begin gfb_read(ord[i], c, x0); acc += longint'(x0) * sc[ord[i]]; end
      gfb_read(k + 1, 224 + c, g);
      chk(g == int'(sat16(64'(acc >>> FRAC))), $sformatf("fused c%0d", c));
    end
    n_fuse++;

    $display("mechanisms: sbmm %0d dbmm %0d dhbmm %0d stall %0d zero_col %0d lnorm %0d gelu %0d add %0d exp %0d capture %0d drop %0d fuse %0d",
             n_sbmm, n_dbmm, n_dhbmm, n_stall, n_zero_col, n_lnorm, n_gelu, n_add, n_exp, n_capture, n_drop, n_fuse);
    chk(n_sbmm > 0, "no SBMM pass");
    chk(n_dbmm > 0, "no DBMM pass");
    chk(n_dhbmm > 0, "no DHBMM pass");
    chk(n_stall > 0, "no stall");
    chk(n_zero_col > 0, "no zero column");
    chk(n_lnorm > 0 && n_gelu > 0 && n_add > 0 && n_exp > 0, "element-wise op missing");
    chk(n_capture > 0, "no score capture");
    chk(n_drop > 0, "no token dropped");
    chk(n_fuse > 0, "no fusion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic start_defaults();
    mm_start = 0; em_start = 0; td_start = 0; sc_clear = 0; wload_done = 0;
    mm_cmd = '0; em_cmd = '0; td_cmd = '0; dense_w = 0;
    cb_wr_en = 0; cb_wr_chm = '0; cb_wr_sub = '0; cb_wr_addr = '0; cb_wr_data = '0;
    cb_hdr_wr_en = 0; cb_hdr_wr_chm = '0; cb_hdr_wr_sub = '0; cb_hdr_wr_entry = '0; cb_hdr_wr_value = '0;
    host_gfb_wr_en = 0; host_gfb_rd_en = 0; host_rb_rd_en = 0;
    host_gfb_wr_row = '0; host_gfb_rd_row = '0; host_rb_rd_row = '0;
    host_gfb_wr_cw = '0; host_gfb_rd_cw = '0; host_rb_rd_cw = '0; host_gfb_wr_data = '0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
