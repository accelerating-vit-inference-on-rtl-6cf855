// bitonic_sorter: the sorting network of the token dropping module.
//
// Sorts N (key, index) pairs into descending key order with Batcher's
// bitonic network.  The network has log2(N)*(log2(N)+1)/2 stages of N/2
// compare-exchange units; this implementation evaluates one stage per clock
// on a register array, so a sort of N = 256 entries takes 36 cycles after
// start.  Ties are broken by the smaller index first, which makes the order
// total and the result unique.
//
// Interface: start samples in_key/in_idx; done pulses once the last stage is
// written, and out_key/out_idx then hold the sorted array until the next
// start.  N must be a power of two; unused entries are filled by the caller
// with the most negative key so they sort to the end.  The paper names a
// bitonic network; stage-per-cycle evaluation and the tie rule are this
// design's choices.
module bitonic_sorter #(
  parameter int N     = 256,
  parameter int KEY_W = 16,
  parameter int IDX_W = 8,
  localparam int LOG  = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [KEY_W-1:0] in_key [N],
  input  logic [IDX_W-1:0]        in_idx [N],
  output logic                    busy,
  output logic                    done,
  output logic signed [KEY_W-1:0] out_key [N],
  output logic [IDX_W-1:0]        out_idx [N]
);

  logic [$clog2(LOG+1)-1:0] kk;   // block size 2^kk
  logic [$clog2(LOG+1)-1:0] jj;   // distance 2^jj

  // "a before b" in the final (descending) order
  function automatic logic ranks_first(input logic signed [KEY_W-1:0] ka, input logic [IDX_W-1:0] ia,
                                  input logic signed [KEY_W-1:0] kb, input logic [IDX_W-1:0] ib);
    return (ka > kb) || ((ka == kb) && (ia < ib));
  endfunction

  logic signed [KEY_W-1:0] nk [N];
  logic [IDX_W-1:0]        ni [N];

  // Each position i looks at its partner i ^ 2^jj (a mux over the log2(N)
  // possible distances) and keeps the element that belongs on its side of
  // the pair: the lower position of a descending pair keeps the one that
  // ranks first, the upper position the other, and the reverse for an
  // ascending pair (bit kk of i set).
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [KEY_W-1:0] pk;
      logic [IDX_W-1:0]        pi;
      logic desc, lower, mine_first, keep_mine;
      pk = out_key[i];
      pi = out_idx[i];
      lower = 1'b0;
      for (int j = 0; j < LOG; j++)
        if (int'(jj) == j) begin
          pk = out_key[i ^ (1 << j)];
          pi = out_idx[i ^ (1 << j)];
          lower = ((i >> j) & 1) == 0;
        end
      desc = 1'b1;
      for (int j = 1; j <= LOG; j++)
        if (int'(kk) == j) desc = ((i >> j) & 1) == 0;
      mine_first = ranks_first(out_key[i], out_idx[i], pk, pi);
      keep_mine  = (lower == desc) ? mine_first : !mine_first;
      nk[i] = keep_mine ? out_key[i] : pk;
      ni[i] = keep_mine ? out_idx[i] : pi;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; kk <= '0; jj <= '0;
      for (int i = 0; i < N; i++) begin out_key[i] <= '0; out_idx[i] <= '0; end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        kk <= 1; jj <= 0;
        for (int i = 0; i < N; i++) begin out_key[i] <= in_key[i]; out_idx[i] <= in_idx[i]; end
      end else if (busy) begin
        for (int i = 0; i < N; i++) begin out_key[i] <= nk[i]; out_idx[i] <= ni[i]; end
        if (jj == 0) begin
          if (int'(kk) == LOG) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            kk <= kk + 1'b1;
            jj <= kk;
          end
        end else jj <= jj - 1'b1;
      end
    end
  end

endmodule
