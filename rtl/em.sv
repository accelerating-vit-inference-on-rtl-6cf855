// em: Element-wise Module.
//
// The EM performs every non-linear and element-wise step of an encoder
// layer on matrices held in the result buffer (RB) and the global feature
// buffer (GFB), one word (P_PE int16 values) per cycle, and writes the result
// into the GFB.  Operations (vit_pkg::em_op_e):
//
//   EM_EXP      exp(a * 2^-shift)        scaling of Q K^T by 1/sqrt(D') and
//                                        exponentiation (D'=64: shift=3)
//   EM_ROWSCALE a / (f_row * 2^shift)    softmax: f_row is the row sum of the
//                                        exponentials, computed by the compute
//                                        array as exp(.) times a ones vector
//   EM_GELU     gelu(a)
//   EM_ADD      a + b                    residual add (b from the GFB)
//   EM_LNORM    (a - mean) / std         LayerNorm over the valid columns
//   EM_COPY     a
//
// Source a is the RB, or the GFB when a_gfb is set; columns at or beyond
// valid_cols are written as zero, which keeps the padding of a matrix to
// whole blocks out of the softmax sums and the LayerNorm statistics.
// With capture set, the output of row 0 (the class token's attention row)
// is also sent out on sc_* for the token dropping module.
//
// Arithmetic (Q8.8): exp uses 2^(x*log2 e) with a 16-segment linear table for
// 2^f, f in [0,1) (table values round(256*2^(i/16))); GELU is
// x * sigmoid(1.703125 x) with the shift-only piecewise-linear sigmoid of
// Amin et al. (PLAN).  Per-row reciprocals come from a sequential divider
// (49 cycles), the LayerNorm standard deviation from a sequential square
// root.  Timing: a row of n_cw words takes n_cw + 2 cycles, plus the divider
// for ROWSCALE and two passes plus three divider/root runs for LNORM.  The
// approximations, the fixed point format and the omission of the LayerNorm
// affine parameters (folded into the following weights) are this design's
// choices; the paper states only which functions the EM performs.
module em
  import vit_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  em_op_e      op,
  input  logic [8:0]  n_rows,
  input  logic [7:0]  n_cw,        // words per row processed
  input  logic [11:0] valid_cols,  // columns that hold data
  input  logic [4:0]  shift,
  input  logic        a_gfb,       // source a from GFB instead of RB
  input  logic [15:0] a_cw_base,
  input  logic [15:0] b_cw_base,   // GFB
  input  logic [15:0] d_cw_base,   // GFB destination
  input  logic [15:0] f_cw,        // RB word holding the row factor
  input  logic [2:0]  f_lane,
  input  logic        capture,
  output logic        busy,
  // RB read
  output logic        rb_rd_en,
  output logic [8:0]  rb_rd_row,
  output logic [15:0] rb_rd_cw,
  input  vec_t        rb_rd_data,
  // GFB read
  output logic        gfb_rd_en,
  output logic [8:0]  gfb_rd_row,
  output logic [15:0] gfb_rd_cw,
  input  vec_t        gfb_rd_data,
  // GFB write
  output logic        gfb_wr_en,
  output logic [8:0]  gfb_wr_row,
  output logic [15:0] gfb_wr_cw,
  output vec_t        gfb_wr_data,
  // score capture for the TDHM
  output logic        sc_valid,
  output logic [11:0] sc_col,      // first column of sc_vec
  output vec_t        sc_vec
);

  // ---------------- arithmetic helpers ----------------
  localparam logic [9:0] EXP2_LUT [17] = '{10'd256, 10'd267, 10'd279, 10'd292,
    10'd304, 10'd318, 10'd332, 10'd347, 10'd362, 10'd378, 10'd395, 10'd412,
    10'd431, 10'd450, 10'd470, 10'd490, 10'd512};

  function automatic data_t f_exp(input data_t x, input logic [4:0] sh);
    logic signed [31:0] y, t, ip;
    logic [7:0] fr;
    logic [9:0] lo, hi;
    logic [31:0] v;
    y  = 32'(x) >>> sh;
    t  = (y * 32'sd369) >>> 8;           // * log2(e) in Q8.8
    ip = t >>> 8;
    fr = t[7:0];
    lo = EXP2_LUT[int'(fr[7:4])];
    hi = EXP2_LUT[int'(fr[7:4]) + 1];
    v  = 32'(lo) + ((32'(hi - lo) * 32'(fr[3:0])) >> 4);
    if (ip >= 7)        return 16'sh7fff;
    else if (ip >= 0)   return data_t'(v << ip);
    else if (ip < -16)  return '0;
    else                return data_t'(v >> (-ip));
  endfunction

  function automatic data_t f_gelu(input data_t x);
    logic signed [31:0] z, az, s, r;
    z  = 32'(x) + (32'(x) >>> 1) + (32'(x) >>> 3) + (32'(x) >>> 4) + (32'(x) >>> 6);
    az = (z < 0) ? -z : z;
    if (az >= 1280)      s = 256;
    else if (az >= 608)  s = (az >>> 5) + 216;
    else if (az >= 256)  s = (az >>> 3) + 160;
    else                 s = (az >>> 2) + 128;
    if (z < 0) s = 256 - s;
    r = (32'(x) * s) >>> 8;
    return sat16(64'(r));
  endfunction

  // ---------------- control ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_ROW, S_FREAD, S_FDIV, S_P1, S_P1END, S_MEAN, S_VAR, S_SQRT, S_RDIV, S_P2, S_DRAIN
  } state_e;
  state_e state;

  logic [8:0]  row;
  logic [7:0]  cw;
  logic        v1, p1_1;
  logic [7:0]  cw1;
  logic [8:0]  row1;
  logic signed [63:0] sum, sumsq;
  logic signed [31:0] mean;
  logic [47:0] recip;              // 2^24 / divisor
  logic        div_start, div_busy, div_done;
  logic [47:0] div_num, div_quo;
  logic [31:0] div_den;
  logic        sq_start, sq_busy, sq_done;
  logic [31:0] sq_x;
  logic [15:0] sq_root;
  logic        fwait;

  seq_div #(.NUM_W(48), .DEN_W(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo));
  seq_isqrt #(.W(32)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(sq_x), .busy(sq_busy), .done(sq_done), .root(sq_root));

  assign busy = (state != S_IDLE);

  logic streaming;
  assign streaming = (state == S_P1) || (state == S_P2);

  // read requests
  always_comb begin
    rb_rd_en  = 1'b0; rb_rd_row = row; rb_rd_cw = 16'(a_cw_base + 16'(cw));
    gfb_rd_en = 1'b0; gfb_rd_row = row; gfb_rd_cw = 16'(a_cw_base + 16'(cw));
    if (state == S_FREAD) begin
      rb_rd_en = 1'b1;
      rb_rd_cw = f_cw;
    end else if (streaming) begin
      if (a_gfb) gfb_rd_en = 1'b1;
      else       rb_rd_en  = 1'b1;
      if (op == EM_ADD) begin
        gfb_rd_en = 1'b1;
        gfb_rd_cw = 16'(b_cw_base + 16'(cw));
      end
    end
  end

  // stage 1: data returned, compute
  vec_t a_vec, res_vec;
  always_comb begin
    a_vec = a_gfb ? gfb_rd_data : rb_rd_data;
    for (int l = 0; l < P_PE; l++) begin
      logic signed [63:0] w;
      data_t r;
      w = '0;
      r = '0;
      case (op)
        EM_EXP:      r = f_exp(a_vec[l], shift);
        EM_ROWSCALE: begin
          w = (64'(a_vec[l]) * $signed({16'd0, recip})) >>> 16;
          r = sat16(w);
        end
        EM_GELU:     r = f_gelu(a_vec[l]);
        EM_ADD:      r = sat16(64'(a_vec[l]) + 64'(gfb_rd_data[l]));
        EM_LNORM: begin
          w = ((64'(a_vec[l]) - 64'(mean)) * $signed({16'd0, recip})) >>> 16;
          r = sat16(w);
        end
        default:     r = a_vec[l];
      endcase
      if ((int'(cw1) * P_PE + l) >= int'(valid_cols)) r = '0;
      res_vec[l] = r;
    end
  end

  logic signed [63:0] beat_sum, beat_sq;
  always_comb begin
    beat_sum = '0; beat_sq = '0;
    for (int l = 0; l < P_PE; l++)
      if ((int'(cw1) * P_PE + l) < int'(valid_cols)) begin
        beat_sum = beat_sum + 64'(a_vec[l]);
        beat_sq  = beat_sq + 64'(a_vec[l]) * 64'(a_vec[l]);
      end
  end

  assign gfb_wr_en   = v1 && !p1_1;
  assign gfb_wr_row  = row1;
  assign gfb_wr_cw   = 16'(d_cw_base + 16'(cw1));
  assign gfb_wr_data = res_vec;
  assign sc_valid    = v1 && !p1_1 && capture && (row1 == '0);
  assign sc_col      = 12'(int'(cw1) * P_PE);
  assign sc_vec      = res_vec;

  always_comb begin
    div_start = 1'b0; div_num = '0; div_den = '0;
    sq_start = 1'b0; sq_x = '0;
    case (state)
      S_FDIV: if (fwait) begin
        div_start = 1'b1;
        div_num = 48'd1 << 24;
        div_den = 32'(rb_rd_data[f_lane]) << shift;
      end
      S_MEAN: if (!div_busy && !div_done) begin
        div_start = 1'b1;
        div_num = (sum < 0) ? 48'(-sum) : 48'(sum);
        div_den = 32'(valid_cols);
      end
      S_VAR: if (!div_busy && !div_done) begin
        div_start = 1'b1;
        div_num = 48'(sumsq);
        div_den = 32'(valid_cols);
      end
      S_SQRT: if (!sq_busy && !sq_done) begin
        sq_start = 1'b1;
        sq_x = 32'(recip);               // variance in Q16.16 parked here
      end
      S_RDIV: if (!div_busy && !div_done) begin
        div_start = 1'b1;
        div_num = 48'd1 << 24;
        div_den = 32'(recip);            // std in Q8.8 parked here
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; cw <= '0; v1 <= 1'b0; p1_1 <= 1'b0; cw1 <= '0; row1 <= '0;
      sum <= '0; sumsq <= '0; mean <= '0; recip <= '0; fwait <= 1'b0;
    end else begin
      v1 <= 1'b0;
      // pass-1 accumulation of LayerNorm statistics
      if (v1 && p1_1) begin
        sum   <= sum + beat_sum;
        sumsq <= sumsq + beat_sq;
      end
      case (state)
        S_IDLE: if (start) begin
          row <= '0;
          state <= S_ROW;
        end
        S_ROW: begin
          cw <= '0;
          sum <= '0; sumsq <= '0;
          if (row == n_rows) state <= S_IDLE;
          else if (op == EM_ROWSCALE) begin state <= S_FREAD; end
          else if (op == EM_LNORM) state <= S_P1;
          else begin recip <= '0; state <= S_P2; end
        end
        S_FREAD: begin fwait <= 1'b1; state <= S_FDIV; end
        S_FDIV: begin
          fwait <= 1'b0;
          if (div_done) begin recip <= div_quo; state <= S_P2; end
        end
        S_P1, S_P2: begin
          v1 <= 1'b1; p1_1 <= (state == S_P1); cw1 <= cw; row1 <= row;
          if (cw == n_cw - 1'b1) begin
            cw <= '0;
            state <= (state == S_P1) ? S_P1END : S_DRAIN;
          end else cw <= cw + 1'b1;
        end
        S_P1END: state <= S_MEAN;
        S_MEAN: if (div_done) begin
          mean <= (sum < 0) ? -32'(div_quo) : 32'(div_quo);
          state <= S_VAR;
        end
        S_VAR: if (div_done) begin
          // var = E[x^2] - mean^2, Q16.16, clamped at 0
          if (64'(div_quo) > 64'(mean) * 64'(mean)) recip <= 48'(64'(div_quo) - 64'(mean) * 64'(mean));
          else recip <= '0;
          state <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          recip <= (sq_root == '0) ? 48'd1 : 48'(sq_root);
          state <= S_RDIV;
        end
        S_RDIV: if (div_done) begin
          recip <= div_quo;
          state <= S_P2;
        end
        S_DRAIN: begin
          row <= row + 1'b1;
          state <= S_ROW;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
