// feature_buffer: on-chip feature matrix store, used both as the Global
// Feature Buffer (GFB, matrices the compute array reads) and as the Result
// Buffer (RB, matrices it writes).
//
// A feature matrix is kept in row-major order in words of P_PE int16
// columns.  Rows are spread over P_T banks by token block row: block row
// rb = row / b lives in bank rb mod P_T (vit_pkg::fb_bank / fb_addr).  That
// puts the P_T block rows of one row group in P_T different banks, so the
// P_T input local buffers of a CHM (or the P_T result streams of the array)
// are served in parallel, one word per bank per cycle.  Each bank is a
// simple dual-port RAM: one write and one read per cycle, read data one
// cycle after the address.  Several matrices share the buffer side by side
// at different column-word offsets.  Banking and sizes are this design's
// choices; the paper gives the buffers' roles.
module feature_buffer
  import vit_pkg::*;
#(
  parameter int B       = 16,
  parameter int P_T     = 12,
  parameter int MAX_TOK = 208,   // 13 blocks of 16 tokens >= 197
  parameter int MAX_CW  = 256,   // words per row (2048 columns)
  localparam int RB_PER_BANK = (MAX_TOK / B + P_T - 1) / P_T,
  localparam int DEPTH  = RB_PER_BANK * B * MAX_CW,
  localparam int ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic [P_T-1:0]    wr_en,
  input  logic [ADDR_W-1:0] wr_addr [P_T],
  input  vec_t              wr_data [P_T],
  input  logic [P_T-1:0]    rd_en,
  input  logic [ADDR_W-1:0] rd_addr [P_T],
  output vec_t              rd_data [P_T]
);

  for (genvar g = 0; g < P_T; g++) begin : g_bank
    vec_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[g]) mem[wr_addr[g]] <= wr_data[g];
      if (rd_en[g]) rd_data[g] <= mem[rd_addr[g]];
    end
  end

endmodule
