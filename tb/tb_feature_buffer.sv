// tb_feature_buffer: random writes and reads on all banks of a reduced
// feature buffer (P_T = 3, 32 tokens, 4 words per row), with simultaneous
// read and write on a bank, checked against a reference array.
module tb_feature_buffer;
  import vit_pkg::*;
  localparam int B = 16, P_T = 3, MAX_TOK = 32, MAX_CW = 4;
  localparam int DEPTH = ((MAX_TOK + B * P_T - 1) / (B * P_T)) * B * MAX_CW;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic [P_T-1:0] wr_en, rd_en; logic [AW-1:0] wr_addr [P_T], rd_addr [P_T];
  vec_t wr_data [P_T], rd_data [P_T];
  vec_t ref_m [P_T][DEPTH];
  int checks = 0, failures = 0;

  feature_buffer #(.B(B), .P_T(P_T), .MAX_TOK(MAX_TOK), .MAX_CW(MAX_CW)) dut (.*);

  initial begin
    int ra [P_T];
    wr_en = '0; rd_en = '0;
    for (int g = 0; g < P_T; g++) begin wr_addr[g] = '0; rd_addr[g] = '0; wr_data[g] = '0; end
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = '1;
      for (int g = 0; g < P_T; g++) begin
        wr_addr[g] = AW'(a);
        for (int l = 0; l < P_PE; l++) wr_data[g][l] = data_t'($urandom);
        ref_m[g][a] = wr_data[g];
      end
      @(negedge clk);
    end
    for (int t = 0; t < 300; t++) begin
      wr_en = P_T'($urandom); rd_en = '1;
      for (int g = 0; g < P_T; g++) begin
        ra[g] = $urandom_range(0, DEPTH - 1); rd_addr[g] = AW'(ra[g]);
        wr_addr[g] = AW'($urandom_range(0, DEPTH - 1));
        for (int l = 0; l < P_PE; l++) wr_data[g][l] = data_t'($urandom);
      end
      @(negedge clk);
      for (int g = 0; g < P_T; g++) begin
        checks++;
        if (rd_data[g] !== ref_m[g][ra[g]]) begin
          failures++; if (failures < 10) $display("FAIL bank %0d addr %0d", g, ra[g]);
        end
      end
      for (int g = 0; g < P_T; g++) if (wr_en[g]) ref_m[g][wr_addr[g]] = wr_data[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
