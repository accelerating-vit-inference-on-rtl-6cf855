// tb_tdhm: self-checking test of the token dropping module at reduced size
// (40 token rows, sorter of 64, 3 words per token).
//
// The class-token attention rows of three heads are fed through the score
// port, a random token matrix sits in a modelled GFB (one-cycle read
// latency), and the output region is compared with a reference:
//   row 0      the class token
//   rows 1..K  the K = ceil((n-1) r_t) best tokens by mean score, highest
//              first, ties to the smaller index
//   row K+1    sum over dropped tokens of score * token (Q8.8 product, then
//              requantised)
// Runs: r_t = 0.7 and 0.5 with drop and fusion, r_t = 1.0 with nothing
// dropped (no fused row).  Each run also checks n_out / n_keep / n_fused and
// that the pass time stays within load + sort + shuffle + store.
module tb_tdhm;
  import vit_pkg::*;
  localparam int N_MAX = 40, SORT_N = 64, MAX_CW = 4, NT = 37, NCW = 3, H = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sc_clear, sc_valid; logic [11:0] sc_col; vec_t sc_vec;
  logic start; logic [8:0] n_tok; logic [7:0] n_cw; logic [8:0] keep_rate; logic [16:0] inv_heads;
  logic [15:0] src_cw_base, dst_cw_base;
  logic busy; logic [8:0] n_out, n_keep, n_fused;
  logic gfb_rd_en, gfb_wr_en; logic [8:0] gfb_rd_row, gfb_wr_row; logic [15:0] gfb_rd_cw, gfb_wr_cw;
  vec_t gfb_rd_data, gfb_wr_data;

  tdhm #(.N_MAX(N_MAX), .SORT_N(SORT_N), .MAX_CW(MAX_CW)) dut (.*);

  vec_t gfb [N_MAX][8];
  always_ff @(posedge clk) begin
    if (gfb_rd_en) gfb_rd_data <= gfb[gfb_rd_row][gfb_rd_cw];
    if (gfb_wr_en) gfb[gfb_wr_row][gfb_wr_cw] <= gfb_wr_data;
  end

  int checks = 0, failures = 0;
  int ssum [N_MAX];
  int sc [N_MAX];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic feed_scores();
    @(negedge clk); sc_clear = 1; @(negedge clk); sc_clear = 0;
    for (int j = 0; j < N_MAX; j++) ssum[j] = 0;
    for (int h = 0; h < H; h++)
      for (int w = 0; w < (NT + P_PE - 1) / P_PE; w++) begin
        sc_valid = 1; sc_col = 12'(w * P_PE);
        for (int l = 0; l < P_PE; l++) begin
          int v;
          // a few equal scores to exercise the tie rule
          v = (w * P_PE + l) % 5 == 0 ? 40 : $urandom_range(0, 255);
          sc_vec[l] = data_t'(v);
          if (w * P_PE + l < N_MAX) ssum[w * P_PE + l] += v;
        end
        @(negedge clk);
      end
    sc_valid = 0;
    for (int j = 0; j < N_MAX; j++) sc[j] = int'(sat16((64'(ssum[j]) * 64'(inv_heads)) >>> 16));
  endtask

  task automatic run(input int kr);
    int k, ord [N_MAX], nd, cyc, model;
    keep_rate = 9'(kr);
    for (int r = 0; r < NT; r++)
      for (int w = 0; w < NCW; w++)
        for (int l = 0; l < P_PE; l++) gfb[r][w][l] = data_t'($urandom_range(0, 2047)) - 16'sd1024;
    feed_scores();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    // reference order: tokens 1..NT-1 by score desc, ties smaller index
    for (int i = 0; i < NT - 1; i++) ord[i] = i + 1;
    for (int i = 1; i < NT - 1; i++)
      for (int j = i; j > 0; j--)
        if (sc[ord[j]] > sc[ord[j - 1]]) begin int t; t = ord[j]; ord[j] = ord[j - 1]; ord[j - 1] = t; end
    k = ((NT - 1) * kr + 255) / 256;
    nd = NT - 1 - k;
    chk(int'(n_keep) == k, $sformatf("n_keep %0d exp %0d", n_keep, k));
    chk(int'(n_fused) == nd, "n_fused");
    chk(int'(n_out) == k + 1 + (nd > 0 ? 1 : 0), "n_out");
    for (int w = 0; w < NCW; w++) begin
      chk(gfb[0][4 + w] === gfb[0][w], "class token");
    end
    for (int i = 0; i < k; i++)
      for (int w = 0; w < NCW; w++)
        chk(gfb[i + 1][4 + w] === gfb[ord[i]][w], $sformatf("kept row %0d (token %0d)", i + 1, ord[i]));
    if (nd > 0)
      for (int w = 0; w < NCW; w++)
        for (int l = 0; l < P_PE; l++) begin
          longint acc;
          acc = 0;
          for (int i = k; i < NT - 1; i++) acc += longint'(int'(gfb[ord[i]][w][l])) * sc[ord[i]];
          chk(int'(gfb[k + 1][4 + w][l]) == int'(sat16(64'(acc >>> FRAC))), $sformatf("fused w%0d l%0d", w, l));
        end
    model = NT * NCW + (6 * 7) / 2 + NT * NCW + NCW + int'(n_out) * NCW;
    chk(cyc <= model + 12, $sformatf("cycles %0d model %0d", cyc, model));
    $display("r_t %0d/256: keep %0d fused %0d cycles %0d (model %0d)", kr, n_keep, n_fused, cyc, model);
  endtask

  initial begin
    sc_clear = 0; sc_valid = 0; sc_col = '0; sc_vec = '0; start = 0;
    n_tok = NT; n_cw = NCW; keep_rate = 179; inv_heads = 17'(65536 / H);
    src_cw_base = 0; dst_cw_base = 4;
    for (int r = 0; r < N_MAX; r++) for (int w = 0; w < 8; w++) gfb[r][w] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(179);
    run(128);
    run(256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
