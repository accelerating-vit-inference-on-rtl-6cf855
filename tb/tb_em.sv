// tb_em: self-checking test of the element-wise module.
// The RB and GFB are modelled here as plain arrays addressed by (row, word)
// with one cycle of read latency.  Every operation runs on a 4-row matrix of
// 24 columns of which 20 are valid; results are compared with real-valued
// references (exp, GELU, division, mean / standard deviation) within a
// tolerance that covers the fixed-point approximations, and ADD/COPY
// exactly.  Padding columns must come out zero, row 0 must be offered on
// the score port when capture is set, and the cycle count of a plain pass
// (rows * (words + 2) + small overhead) is checked.
module tb_em;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int ROWS = 4, NCW = 3, VALID = 20;
  logic start; em_op_e op;
  logic [8:0] n_rows; logic [7:0] n_cw; logic [11:0] valid_cols; logic [4:0] shift;
  logic a_gfb, capture; logic [15:0] a_cw_base, b_cw_base, d_cw_base, f_cw; logic [2:0] f_lane;
  logic busy, rb_rd_en, gfb_rd_en, gfb_wr_en, sc_valid;
  logic [8:0] rb_rd_row, gfb_rd_row, gfb_wr_row;
  logic [15:0] rb_rd_cw, gfb_rd_cw, gfb_wr_cw;
  vec_t rb_rd_data, gfb_rd_data, gfb_wr_data, sc_vec;
  logic [11:0] sc_col;
  int checks = 0, failures = 0, sc_words = 0;

  em dut (.*);

  vec_t rb [ROWS][16];
  vec_t gfb [ROWS][16];
  always_ff @(posedge clk) begin
    if (rb_rd_en)  rb_rd_data  <= rb[rb_rd_row][rb_rd_cw];
    if (gfb_rd_en) gfb_rd_data <= gfb[gfb_rd_row][gfb_rd_cw];
    if (gfb_wr_en) gfb[gfb_wr_row][gfb_wr_cw] <= gfb_wr_data;
    if (sc_valid) sc_words++;
  end

  function automatic real val(input data_t d); return real'(d) / 256.0; endfunction
  function automatic real gelu_ref(input real x);
    // tanh form of GELU
    real t;
    t = 0.7978845608 * (x + 0.044715 * x * x * x);
    return 0.5 * x * (1.0 + ((($exp(t) - $exp(-t)) / ($exp(t) + $exp(-t)))));
  endfunction

  task automatic chk(input string what, input real got, input real exp_v, input real tol);
    checks++;
    if (got - exp_v > tol || exp_v - got > tol) begin
      failures++;
      if (failures < 15) $display("FAIL %s got %f exp %f", what, got, exp_v);
    end
  endtask

  task automatic run(input em_op_e o, input int sh, input bit agfb, input bit cap, output int cyc);
    op = o; shift = 5'(sh); a_gfb = agfb; capture = cap;
    start = 1; @(posedge clk); #1 start = 0;
    cyc = 1;
    while (busy) begin @(posedge clk); #1 cyc++; end
  endtask

  initial begin
    int cyc;
    start = 0; op = EM_COPY; n_rows = ROWS; n_cw = NCW; valid_cols = VALID; shift = 0;
    a_gfb = 0; capture = 0; a_cw_base = 0; b_cw_base = 4; d_cw_base = 8; f_cw = 12; f_lane = 3;
    for (int r = 0; r < ROWS; r++)
      for (int w = 0; w < 16; w++) begin rb[r][w] = '0; gfb[r][w] = '0; end
    for (int r = 0; r < ROWS; r++) begin
      for (int w = 0; w < NCW; w++)
        for (int l = 0; l < P_PE; l++) begin
          rb[r][w][l]      = data_t'($urandom_range(0, 1535)) - 16'sd768;   // -3 .. 3
          gfb[r][4 + w][l] = data_t'($urandom_range(0, 1023)) - 16'sd512;
        end
      rb[r][12][3] = data_t'(256 * (r + 2));   // row factor 2..5
    end
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // EXP with 1/8 input scaling, capture row 0
    run(EM_EXP, 3, 0, 1, cyc);
    checks++;
    if (cyc > ROWS * (NCW + 3) + 4) begin failures++; $display("FAIL EXP cycles %0d", cyc); end
    checks++;
    if (sc_words != NCW) begin failures++; $display("FAIL score words %0d", sc_words); end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NCW * P_PE; c++) begin
        real x, e;
        x = val(rb[r][c / P_PE][c % P_PE]) / 8.0;
        e = (c < VALID) ? $exp(x) : 0.0;
        chk("exp", val(gfb[r][8 + c / P_PE][c % P_PE]), e, 0.01 * e + 0.012);
      end
    // ROWSCALE: divide by factor * 2^1
    run(EM_ROWSCALE, 1, 0, 0, cyc);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < VALID; c++)
        chk("rowscale", val(gfb[r][8 + c / P_PE][c % P_PE]),
            val(rb[r][c / P_PE][c % P_PE]) / (2.0 * (r + 2)), 0.008);
    // GELU
    run(EM_GELU, 0, 0, 0, cyc);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < VALID; c++) begin
        real x;
        x = val(rb[r][c / P_PE][c % P_PE]);
        chk("gelu", val(gfb[r][8 + c / P_PE][c % P_PE]), gelu_ref(x), 0.03 + 0.03 * (x < 0 ? -x : x));
      end
    // ADD (a from RB, b from GFB)
    run(EM_ADD, 0, 0, 0, cyc);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NCW * P_PE; c++) begin
        int e;
        e = (c < VALID) ? int'(rb[r][c / P_PE][c % P_PE]) + int'(gfb[r][4 + c / P_PE][c % P_PE]) : 0;
        checks++;
        if (int'(gfb[r][8 + c / P_PE][c % P_PE]) != e) begin
          failures++; $display("FAIL add r%0d c%0d", r, c);
        end
      end
    // LNORM on the GFB copy of b
    a_cw_base = 4;
    run(EM_LNORM, 0, 1, 0, cyc);
    for (int r = 0; r < ROWS; r++) begin
      real m, v, sd;
      m = 0; v = 0;
      for (int c = 0; c < VALID; c++) m += val(gfb[r][4 + c / P_PE][c % P_PE]);
      m /= VALID;
      for (int c = 0; c < VALID; c++) v += (val(gfb[r][4 + c / P_PE][c % P_PE]) - m) ** 2;
      sd = $sqrt(v / VALID);
      for (int c = 0; c < VALID; c++) begin
        real e;
        e = (val(gfb[r][4 + c / P_PE][c % P_PE]) - m) / sd;
        chk("lnorm", val(gfb[r][8 + c / P_PE][c % P_PE]), e, 0.03 + 0.02 * (e < 0 ? -e : e));
      end
    end
    // COPY of GFB region
    run(EM_COPY, 0, 1, 0, cyc);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < VALID; c++) begin
        checks++;
        if (gfb[r][8 + c / P_PE][c % P_PE] !== gfb[r][4 + c / P_PE][c % P_PE]) begin
          failures++; $display("FAIL copy");
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
