// seq_isqrt: unsigned integer square root, one result bit per cycle.
//
// start loads a W-bit radicand; W/2 cycles later done pulses with
// root = floor(sqrt(x)).  Digit-by-digit (restoring) method.  Used by the
// element-wise module to turn a Q16.16 variance into a Q8.8 standard
// deviation for LayerNorm.
module seq_isqrt #(
  parameter int W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   x,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   xs;
  // two guard bits for the trial subtraction; they are not read back
  logic [W/2+1:0] rem;
  logic [W/2-1:0] r;
  logic [$clog2(W/2+1)-1:0] cnt;
  logic [W/2+1:0] t, cand;

  assign t    = {rem[W/2-1:0], xs[W-1:W-2]};
  assign cand = {r, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; xs <= '0; rem <= '0; r <= '0; cnt <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; xs <= x; rem <= '0; r <= '0; cnt <= '0;
      end else if (busy) begin
        xs <= xs << 2;
        if (t >= cand) begin
          rem <= t - cand;
          r   <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= t;
          r   <= {r[W/2-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (int'(cnt) == W/2 - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (t >= cand) ? {r[W/2-2:0], 1'b1} : {r[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
