// pe: Processing Element of a Computing Head Module.
//
// A PE holds a P_PE x P_PE array of int16 multiply-accumulate units.  It
// computes one P_PE x P_PE tile of a b x b output block Y[m,n] of
// Y = X * W.  Each beat brings a column slice of the input block
// (x_vec[r] = X[ti*P_PE+r][k]) and a row slice of the weight block
// (w_vec[c] = W[k][tj*P_PE+c]); all P_PE^2 units update acc[r][c] +=
// x[r]*w[c] in the same cycle (an outer product).  in_first clears the
// accumulators, in_last closes the tile.  Walking k over b values and over
// every retained weight block of the column takes b * len beats per tile,
// and a full b x b block (b/P_PE)^2 tiles, which is the per-block cycle
// count ceil(b/p_pe)^2 * b of the paper's performance model.
//
// On in_last the finished tile is requantised to Q8.8 and parked in an
// output register (the PE's slot of the output local buffer) together with
// its tag; it is read out one row (one vec_t) per out_pop.  The controller
// must not send another in_last while out_full is high (checked by an
// assertion); in_zero forces the weight operand to zero, used for a weight
// column that has no retained block.  Interface and timing are this design's
// own choice: one beat per cycle, results visible the cycle after in_last.
module pe
  import vit_pkg::*;
#(
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic             in_zero,
  input  logic [TAG_W-1:0] in_tag,
  input  vec_t             x_vec,
  input  vec_t             w_vec,
  output logic             out_full,
  output logic [TAG_W-1:0] out_tag,
  output logic [$clog2(P_PE)-1:0] out_row,
  output vec_t             out_word,
  input  logic             out_pop
);

  acc_t  acc [P_PE][P_PE];
  data_t res [P_PE][P_PE];
  acc_t  nxt [P_PE][P_PE];

  always_comb begin
    for (int r = 0; r < P_PE; r++)
      for (int c = 0; c < P_PE; c++) begin
        acc_t prod;
        prod = in_zero ? '0 : acc_t'(x_vec[r]) * acc_t'(w_vec[c]);
        nxt[r][c] = (in_first ? '0 : acc[r][c]) + prod;
      end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < P_PE; r++)
        for (int c = 0; c < P_PE; c++)
          acc[r][c] <= nxt[r][c];
      if (in_last) begin
        for (int r = 0; r < P_PE; r++)
          for (int c = 0; c < P_PE; c++)
            res[r][c] <= requant(nxt[r][c]);
        out_tag <= in_tag;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_full <= 1'b0;
      out_row  <= '0;
    end else begin
      if (out_pop && out_full) begin
        out_row <= out_row + 1'b1;
        if (out_row == $clog2(P_PE)'(P_PE - 1)) out_full <= 1'b0;
      end
      if (in_valid && in_last) begin
        out_full <= 1'b1;
        out_row  <= '0;
      end
    end
  end

  always_comb
    for (int c = 0; c < P_PE; c++) out_word[c] = res[out_row][c];

  // A finished tile may only overwrite an output register that is empty or
  // being emptied by its final pop in this cycle.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_last) |-> (!out_full ||
      (out_pop && out_row == $clog2(P_PE)'(P_PE - 1))));

endmodule
