// tb_input_local_buffer: fills a reduced buffer (b = 16, 6 words per row)
// with random row slices and reads random column slices on both ports,
// checking every returned lane against a reference copy of the block row,
// with the one-cycle read latency.
module tb_input_local_buffer;
  import vit_pkg::*;
  localparam int B = 16, MAX_CW = 6, P_C = 2, TI = B / P_PE;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [3:0] wr_row; logic [2:0] wr_cw; vec_t wr_data;
  logic [P_C-1:0] rd_en; logic [0:0] rd_ti [P_C]; logic [5:0] rd_col [P_C]; vec_t rd_data [P_C];
  data_t ref_m [B][MAX_CW * P_PE];
  int checks = 0, failures = 0;

  input_local_buffer #(.B(B), .MAX_CW(MAX_CW), .P_C(P_C)) dut (.*);

  initial begin
    int ti [P_C], col [P_C];
    wr_en = 0; rd_en = '0; wr_row = '0; wr_cw = '0; wr_data = '0;
    for (int p = 0; p < P_C; p++) begin rd_ti[p] = '0; rd_col[p] = '0; end
    @(negedge clk);
    for (int r = 0; r < B; r++)
      for (int w = 0; w < MAX_CW; w++) begin
        wr_en = 1; wr_row = 4'(r); wr_cw = 3'(w);
        for (int l = 0; l < P_PE; l++) begin
          wr_data[l] = data_t'($urandom);
          ref_m[r][w * P_PE + l] = wr_data[l];
        end
        @(negedge clk);
      end
    wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      for (int p = 0; p < P_C; p++) begin
        ti[p] = $urandom_range(0, TI - 1); col[p] = $urandom_range(0, MAX_CW * P_PE - 1);
        rd_ti[p] = 1'(ti[p]); rd_col[p] = 6'(col[p]);
      end
      rd_en = '1;
      @(negedge clk);
      rd_en = '0;
      // the address may change once the read is taken
      for (int p = 0; p < P_C; p++) rd_col[p] = 6'($urandom);
      #1;
      for (int p = 0; p < P_C; p++)
        for (int l = 0; l < P_PE; l++) begin
          checks++;
          if (rd_data[p][l] !== ref_m[ti[p] * P_PE + l][col[p]]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d ti %0d col %0d lane %0d", p, ti[p], col[p], l);
          end
        end
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
