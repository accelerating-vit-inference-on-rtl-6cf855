// tb_column_buffer_bank: writes random block data and headers into both
// sub-banks of a reduced bank (b = 16, GAMMA = 6), then reads every word on
// both ports at once and checks data (one-cycle latency) and header
// registers against a reference copy.
module tb_column_buffer_bank;
  import vit_pkg::*;
  localparam int B = 16, GAMMA = 6, P_C = 2, TI = B / P_PE, DEPTH = GAMMA * B * TI;
  localparam int AW = $clog2(DEPTH), EW = $clog2(GAMMA + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [0:0] wr_sub; logic [AW-1:0] wr_addr; vec_t wr_data;
  logic hdr_wr_en; logic [0:0] hdr_wr_sub; logic [EW-1:0] hdr_wr_entry, hdr_wr_value;
  logic [EW-1:0] hdr_len [P_C]; logic [EW-1:0] hdr_idx [P_C][GAMMA];
  logic [P_C-1:0] rd_en; logic [AW-1:0] rd_addr [P_C]; vec_t rd_data [P_C];
  vec_t ref_m [P_C][DEPTH];
  int ref_len [P_C], ref_idx [P_C][GAMMA];
  int checks = 0, failures = 0;

  column_buffer_bank #(.B(B), .GAMMA(GAMMA), .P_C(P_C)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    wr_en = 0; hdr_wr_en = 0; rd_en = '0; wr_sub = '0; wr_addr = '0; wr_data = '0;
    hdr_wr_sub = '0; hdr_wr_entry = '0; hdr_wr_value = '0;
    for (int p = 0; p < P_C; p++) rd_addr[p] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < P_C; p++) begin
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1; wr_sub = 1'(p); wr_addr = AW'(a);
        for (int l = 0; l < P_PE; l++) wr_data[l] = data_t'($urandom);
        ref_m[p][a] = wr_data;
        @(negedge clk);
      end
      wr_en = 0;
      ref_len[p] = $urandom_range(0, GAMMA);
      for (int e = 0; e <= GAMMA; e++) begin
        hdr_wr_en = 1; hdr_wr_sub = 1'(p); hdr_wr_entry = EW'(e);
        if (e == GAMMA) hdr_wr_value = EW'(ref_len[p]);
        else begin ref_idx[p][e] = $urandom_range(0, 2 * GAMMA - 1); hdr_wr_value = EW'(ref_idx[p][e]); end
        @(negedge clk);
      end
      hdr_wr_en = 0;
    end
    for (int p = 0; p < P_C; p++) begin
      chk(int'(hdr_len[p]) == ref_len[p], "len");
      for (int e = 0; e < GAMMA; e++) chk(int'(hdr_idx[p][e]) == (ref_idx[p][e] % (1 << EW)), "idx");
    end
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = '1; rd_addr[0] = AW'(a); rd_addr[1] = AW'(DEPTH - 1 - a);
      @(negedge clk);
      chk(rd_data[0] === ref_m[0][a], "port 0 data");
      chk(rd_data[1] === ref_m[1][DEPTH - 1 - a], "port 1 data");
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
