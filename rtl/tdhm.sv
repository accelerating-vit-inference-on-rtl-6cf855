// tdhm: Token Dropping Hardware Module.
//
// Drops inattentive tokens between the attention block and the MLP of an
// encoder layer.  The importance of token j is its attention from the class
// token averaged over the heads, S_j = (1/H) sum_h A_h[0, j].  The class
// token (row 0) is always kept; of the other n_tok-1 tokens the
// K = ceil((n_tok-1) * r_t) with the highest scores are kept in score order,
// and the rest are fused into one extra token, the score-weighted sum of the
// dropped tokens.  The output matrix therefore has K+2 rows (K+1 if nothing
// is dropped):
//
//   row 0        class token
//   rows 1..K    kept tokens, highest score first
//   row K+1      fused token
//
// Structure, following the paper's block diagram:
//   index buffer     - accumulates the class-token attention row of every
//                      head as the element-wise module produces it (sc_*),
//                      then scales by inv_heads (1/H in Q0.16)
//   sorting network  - bitonic_sorter over the n_tok-1 scores
//   index buffer     - entry p = (id_old, id_new, flag): id_new = p+1 and
//                      flag = keep for p < K, otherwise the fused row
//   index shuffle    - walks the entries and fetches old rows by id_old
//   old token buffer - copy of the input token matrix (loaded from the GFB)
//   new token buffer - kept tokens placed by id_new, plus the fused token
//   store            - new token buffer written back to the GFB
//
// Timing: load n_tok*n_cw cycles, sort log2(SORT_N)(log2(SORT_N)+1)/2
// cycles, shuffle n_tok*n_cw cycles, store n_out*n_cw cycles, one word of
// P_PE values per cycle throughout.  The paper's index shuffle network moves
// several entries per cycle; here one entry is moved at a time, a simplification
// of this design.  The keep rate is given in Q0.8 (r_t * 256), 1/H in Q0.16.
module tdhm
  import vit_pkg::*;
#(
  parameter int N_MAX  = 208,   // token rows held (>= 197)
  parameter int SORT_N = 256,   // sorter size, power of two >= N_MAX - 1
  parameter int MAX_CW = 48,    // words per token row (D = 384)
  localparam int IDX_W = $clog2(SORT_N),
  localparam int CWI_W = $clog2(MAX_CW)
) (
  input  logic        clk,
  input  logic        rst_n,
  // score capture from the element-wise module
  input  logic        sc_clear,
  input  logic        sc_valid,
  input  logic [11:0] sc_col,
  input  vec_t        sc_vec,
  // command
  input  logic        start,
  input  logic [8:0]  n_tok,        // tokens in, class token included
  input  logic [7:0]  n_cw,         // words per token row
  input  logic [8:0]  keep_rate,    // r_t in Q0.8 (256 = 1.0)
  input  logic [16:0] inv_heads,    // 1/H in Q0.16
  input  logic [15:0] src_cw_base,  // GFB region of the input tokens
  input  logic [15:0] dst_cw_base,  // GFB region of the output tokens
  output logic        busy,
  output logic [8:0]  n_out,
  output logic [8:0]  n_keep,
  output logic [8:0]  n_fused,      // tokens fused into the extra token
  // GFB access
  output logic        gfb_rd_en,
  output logic [8:0]  gfb_rd_row,
  output logic [15:0] gfb_rd_cw,
  input  vec_t        gfb_rd_data,
  output logic        gfb_wr_en,
  output logic [8:0]  gfb_wr_row,
  output logic [15:0] gfb_wr_cw,
  output vec_t        gfb_wr_data
);

  // ---------------- index buffer: score accumulation ----------------
  logic signed [23:0] score_sum [N_MAX];
  data_t              score     [N_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_MAX; j++) score_sum[j] <= '0;
    end else if (sc_clear) begin
      for (int j = 0; j < N_MAX; j++) score_sum[j] <= '0;
    end else if (sc_valid) begin
      for (int l = 0; l < P_PE; l++)
        if (int'(sc_col) + l < N_MAX)
          score_sum[int'(sc_col) + l] <= score_sum[int'(sc_col) + l] + 24'(sc_vec[l]);
    end
  end

  always_comb
    for (int j = 0; j < N_MAX; j++)
      score[j] = sat16((64'(score_sum[j]) * 64'(inv_heads)) >>> 16);

  // ---------------- sorting network ----------------
  logic signed [15:0] s_key [SORT_N];
  logic [IDX_W-1:0]   s_idx [SORT_N];
  // the sorted keys are not needed, only the order (o_idx); o_key stays
  // unused on purpose
  logic signed [15:0] o_key [SORT_N];
  logic [IDX_W-1:0]   o_idx [SORT_N];
  logic sort_start, sort_busy, sort_done;

  always_comb
    for (int i = 0; i < SORT_N; i++) begin
      if (i + 1 < int'(n_tok) && i + 1 < N_MAX) begin
        s_key[i] = score[i + 1];
        s_idx[i] = IDX_W'(i + 1);
      end else begin
        s_key[i] = 16'sh8000;
        s_idx[i] = '1;
      end
    end

  bitonic_sorter #(.N(SORT_N), .KEY_W(16), .IDX_W(IDX_W)) u_sort (
    .clk, .rst_n, .start(sort_start), .in_key(s_key), .in_idx(s_idx),
    .busy(sort_busy), .done(sort_done), .out_key(o_key), .out_idx(o_idx));

  // ---------------- token buffers ----------------
  vec_t old_buf [N_MAX * MAX_CW];
  vec_t new_buf [N_MAX * MAX_CW];
  logic signed [ACC_W-1:0] fused [MAX_CW][P_PE];

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SORT, S_CLS, S_SHUF, S_FUSE, S_STORE, S_DONE} state_e;
  state_e state;

  logic [8:0]  row;       // token row / index-buffer entry
  logic [7:0]  cw;
  logic        v1;        // read issued last cycle
  logic [8:0]  row1;
  logic [7:0]  cw1;
  logic [8:0]  k_cnt;
  logic [8:0]  id_old, id_new;
  logic        keep;
  vec_t        old_rd;

  // K = ceil((n_tok - 1) * r_t)
  logic [17:0] kprod;
  assign kprod  = 18'(n_tok - 1'b1) * 18'(keep_rate);
  assign k_cnt  = 9'((kprod + 18'd255) >> 8);
  assign n_keep = k_cnt;
  assign n_fused = 9'(n_tok - 1'b1 - k_cnt);
  assign n_out  = (n_tok - 1'b1 > k_cnt) ? k_cnt + 9'd2 : k_cnt + 9'd1;

  // index buffer entry for sorted position `row`
  assign id_old = 9'(o_idx[IDX_W'(row)]);
  assign keep   = (row < k_cnt);
  assign id_new = keep ? row + 1'b1 : k_cnt + 1'b1;

  assign busy       = (state != S_IDLE);
  assign sort_start = (state == S_SORT) && !sort_busy && !sort_done && !v1;

  // GFB reads during LOAD, GFB writes during STORE
  assign gfb_rd_en  = (state == S_LOAD);
  assign gfb_rd_row = row;
  assign gfb_rd_cw  = 16'(src_cw_base + 16'(cw));

  logic        st_v;
  logic [8:0]  st_row;
  logic [7:0]  st_cw;
  vec_t        st_data;
  assign gfb_wr_en   = st_v;
  assign gfb_wr_row  = st_row;
  assign gfb_wr_cw   = 16'(dst_cw_base + 16'(st_cw));
  assign gfb_wr_data = st_data;

  // shuffle pipeline: stage 1 carries the entry
  logic        sh_v, sh_keep;
  logic [8:0]  sh_new;
  logic [IDX_W-1:0] sh_old;
  logic [7:0]  sh_cw;

  always_ff @(posedge clk) begin
    // old token buffer write (load) and read (shuffle)
    if (v1 && state inside {S_LOAD, S_SORT})
      old_buf[int'(row1) * MAX_CW + int'(cw1)] <= gfb_rd_data;
    if (state == S_CLS)
      old_rd <= old_buf[int'(cw)];
    else
      old_rd <= old_buf[int'(id_old) * MAX_CW + int'(cw)];
    // new token buffer
    if (sh_v && sh_keep)
      new_buf[int'(sh_new) * MAX_CW + int'(sh_cw)] <= old_rd;
    if (state == S_FUSE) begin
      vec_t fv;
      for (int l = 0; l < P_PE; l++) fv[l] = requant(fused[CWI_W'(cw)][l]);
      new_buf[(int'(k_cnt) + 1) * MAX_CW + int'(cw)] <= fv;
    end
    st_data <= new_buf[int'(row) * MAX_CW + int'(cw)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; cw <= '0; v1 <= 1'b0; row1 <= '0; cw1 <= '0;
      sh_v <= 1'b0; sh_keep <= 1'b0; sh_new <= '0; sh_old <= '0; sh_cw <= '0;
      st_v <= 1'b0; st_row <= '0; st_cw <= '0;
      for (int c = 0; c < MAX_CW; c++)
        for (int l = 0; l < P_PE; l++) fused[c][l] <= '0;
    end else begin
      v1   <= 1'b0;
      sh_v <= 1'b0;
      st_v <= 1'b0;
      // fused-token accumulation for dropped entries
      if (sh_v && !sh_keep)
        for (int l = 0; l < P_PE; l++)
          fused[CWI_W'(sh_cw)][l] <= fused[CWI_W'(sh_cw)][l] + ACC_W'(old_rd[l]) * ACC_W'(score[sh_old]);
      case (state)
        S_IDLE: if (start) begin
          row <= '0; cw <= '0;
          for (int c = 0; c < MAX_CW; c++)
            for (int l = 0; l < P_PE; l++) fused[c][l] <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          v1 <= 1'b1; row1 <= row; cw1 <= cw;
          if (cw == n_cw - 1'b1) begin
            cw <= '0;
            if (row == n_tok - 1'b1) begin row <= '0; state <= S_SORT; end
            else row <= row + 1'b1;
          end else cw <= cw + 1'b1;
        end
        S_SORT: if (sort_done) begin row <= '0; cw <= '0; state <= S_CLS; end
        S_CLS: begin
          // class token: old row 0 -> new row 0
          sh_v <= 1'b1; sh_keep <= 1'b1; sh_new <= '0; sh_old <= '0; sh_cw <= cw;
          if (cw == n_cw - 1'b1) begin
            cw <= '0;
            state <= (n_tok > 9'd1) ? S_SHUF : S_STORE;
          end else cw <= cw + 1'b1;
        end
        S_SHUF: begin
          sh_v <= 1'b1; sh_keep <= keep; sh_new <= id_new; sh_old <= IDX_W'(id_old); sh_cw <= cw;
          if (cw == n_cw - 1'b1) begin
            cw <= '0;
            if (row == n_tok - 9'd2) begin
              row <= '0;
              state <= (n_tok - 1'b1 > k_cnt) ? S_FUSE : S_STORE;
            end else row <= row + 1'b1;
          end else cw <= cw + 1'b1;
        end
        S_FUSE: begin
          // one cycle gap lets the last dropped entry reach the accumulators
          if (!sh_v) begin
            if (cw == n_cw - 1'b1) begin cw <= '0; state <= S_STORE; end
            else cw <= cw + 1'b1;
          end
        end
        S_STORE: begin
          st_v <= 1'b1; st_row <= row; st_cw <= cw;
          if (cw == n_cw - 1'b1) begin
            cw <= '0;
            if (row == n_out - 1'b1) state <= S_DONE;
            else row <= row + 1'b1;
          end else cw <= cw + 1'b1;
        end
        S_DONE: state <= S_IDLE;   // last store word issued
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
