// tb_pe: self-checking test of the processing element.
// Drives random tiles of 1..4 blocks (b = 16 beats per block) of random
// Q8.8 operands, including a zero-weight tile, and compares the drained
// P_PE x P_PE results with a reference computed here (sum of products,
// >>> 8, saturated).  Also checks that the result appears the cycle after
// the closing beat and that out_full stays low until then.
module tb_pe;
  import vit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, in_last, in_zero, out_full, out_pop;
  logic [7:0] in_tag, out_tag;
  logic [2:0] out_row;
  vec_t x_vec, w_vec, out_word;
  int checks = 0, failures = 0;

  pe #(.TAG_W(8)) dut (.*);

  longint ref_acc [P_PE][P_PE];

  task automatic run_tile(input int nbeats, input bit zero, input int tag);
    for (int r = 0; r < P_PE; r++) for (int c = 0; c < P_PE; c++) ref_acc[r][c] = 0;
    for (int t = 0; t < nbeats; t++) begin
      for (int l = 0; l < P_PE; l++) begin
        x_vec[l] = data_t'($urandom_range(0, 2047) - 1024);
        w_vec[l] = data_t'($urandom_range(0, 2047) - 1024);
      end
      in_valid = 1; in_first = (t == 0); in_last = (t == nbeats - 1);
      in_zero = zero; in_tag = 8'(tag);
      for (int r = 0; r < P_PE; r++) for (int c = 0; c < P_PE; c++)
        if (!zero) ref_acc[r][c] += longint'(x_vec[r]) * longint'(w_vec[c]);
      @(posedge clk); #1;
      if (t < nbeats - 1) begin
        checks++;
        if (out_full) begin failures++; $display("FAIL out_full early"); end
      end
    end
    in_valid = 0; in_first = 0; in_last = 0; in_zero = 0;
    checks++;
    if (!out_full || out_tag != 8'(tag)) begin
      failures++; $display("FAIL out_full/tag after last beat: %0d %0d", out_full, out_tag);
    end
    for (int r = 0; r < P_PE; r++) begin
      checks++;
      if (out_row != 3'(r)) begin failures++; $display("FAIL row order"); end
      for (int c = 0; c < P_PE; c++) begin
        data_t e;
        e = sat16(64'(ref_acc[r][c]) >>> FRAC);
        checks++;
        if (out_word[c] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d r%0d c%0d got %0d exp %0d", tag, r, c, out_word[c], e);
        end
      end
      out_pop = 1; @(posedge clk); #1; out_pop = 0;
    end
    checks++;
    if (out_full) begin failures++; $display("FAIL out_full after drain"); end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_zero = 0; out_pop = 0; in_tag = 0;
    x_vec = '0; w_vec = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 12; i++) run_tile(16 * (1 + (i % 4)), 1'b0, i);
    run_tile(1, 1'b1, 99);
    // large values saturate
    for (int t = 0; t < 16; t++) ;
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
