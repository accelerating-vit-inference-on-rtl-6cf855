// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// start loads num/den; after NUM_W cycles done pulses for one cycle with
// quo = num / den (den = 0 gives all ones).  Used by the element-wise module
// for per-row reciprocals (softmax scaling factor, LayerNorm mean, variance
// and 1/std).  The iterative form is this design's choice: the divider runs
// once per matrix row, so one bit per cycle is enough.
module seq_div #(
  parameter int NUM_W = 48,
  parameter int DEN_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quo
);
  logic [NUM_W-1:0] q;
  // rem has one guard bit for the trial subtraction; its top bit is never
  // read after the subtraction, which is expected
  logic [DEN_W:0]   rem;
  logic [DEN_W-1:0] d;
  logic [$clog2(NUM_W+1)-1:0] cnt;
  logic [DEN_W:0]   trial;

  assign trial = {rem[DEN_W-1:0], q[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; rem <= '0; d <= '0; cnt <= '0; quo <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; q <= num; rem <= '0; d <= den; cnt <= '0;
      end else if (busy) begin
        if (trial >= {1'b0, d}) begin
          rem <= trial - {1'b0, d};
          q   <= {q[NUM_W-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == NUM_W - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (trial >= {1'b0, d}) ? {q[NUM_W-2:0], 1'b1} : {q[NUM_W-2:0], 1'b0};
        end
      end
    end
  end
endmodule
