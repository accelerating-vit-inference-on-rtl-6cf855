// tb_bitonic_sorter: self-checking test of the bitonic sorting network.
// Sorts several random arrays of 256 (key, index) pairs, with many equal
// keys, and compares with a reference order computed here by insertion
// sort (key descending, then index ascending).  Checks that done arrives
// exactly log2(N)(log2(N)+1)/2 = 36 cycles after start.
module tb_bitonic_sorter;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic signed [15:0] in_key [N];
  logic [7:0] in_idx [N];
  logic signed [15:0] out_key [N];
  logic [7:0] out_idx [N];
  int checks = 0, failures = 0;

  bitonic_sorter #(.N(N), .KEY_W(16), .IDX_W(8)) dut (.*);

  logic signed [15:0] rk [N];
  logic [7:0] ri [N];

  initial begin
    start = 0;
    for (int i = 0; i < N; i++) begin in_key[i] = '0; in_idx[i] = '0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      int cyc;
      for (int i = 0; i < N; i++) begin
        in_key[i] = (trial % 2) ? 16'($urandom_range(0, 20)) : 16'($urandom);
        in_idx[i] = 8'(i);
        if (trial == 5 && i > 196) in_key[i] = 16'sh8000;
      end
      // reference: insertion sort
      for (int i = 0; i < N; i++) begin rk[i] = in_key[i]; ri[i] = in_idx[i]; end
      for (int i = 1; i < N; i++) begin
        logic signed [15:0] k; logic [7:0] x; int j;
        k = rk[i]; x = ri[i]; j = i - 1;
        while (j >= 0 && (rk[j] < k || (rk[j] == k && ri[j] > x))) begin
          rk[j+1] = rk[j]; ri[j+1] = ri[j]; j--;
        end
        rk[j+1] = k; ri[j+1] = x;
      end
      start = 1; @(posedge clk); #1 start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); #1 cyc++; end
      checks++;
      if (cyc != 36) begin failures++; $display("FAIL sort took %0d cycles", cyc); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_key[i] !== rk[i] || out_idx[i] !== ri[i]) begin
          failures++;
          if (failures < 10) $display("FAIL trial %0d pos %0d got (%0d,%0d) exp (%0d,%0d)",
                                      trial, i, out_key[i], out_idx[i], rk[i], ri[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
