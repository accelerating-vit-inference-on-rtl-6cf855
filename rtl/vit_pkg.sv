// vit_pkg: constants and types shared by the pruned-ViT accelerator.
//
// All activations and weights are int16 (the precision the design is built
// for) interpreted as signed fixed point with FRAC fractional bits (Q8.8).
// A "vector" (vec_t) is P_PE consecutive int16 values: it is the width of
// every buffer word and of one PE operand per cycle, so P_PE = 8 is fixed
// here rather than per module.  The fixed-point format, the accumulator
// width and the command encodings below are choices of this design.
package vit_pkg;

  localparam int DATA_W = 16;          // int16 data
  localparam int FRAC   = 8;           // Q8.8 fixed point
  localparam int ACC_W  = 40;          // MAC accumulator width
  localparam int P_PE   = 8;           // PE holds P_PE x P_PE MAC units

  typedef logic signed [DATA_W-1:0] data_t;
  typedef data_t [P_PE-1:0]         vec_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Matrix-multiplication modes of the compute array.
  typedef enum logic [1:0] {
    MM_SBMM  = 2'd0,   // sparse weight: column header selects input blocks
    MM_DBMM  = 2'd1,   // dense weight: every input block is used
    MM_DHBMM = 2'd2    // dense, head-wise: each head reads its own input slice
  } mm_mode_e;

  // Element-wise module operations.
  typedef enum logic [2:0] {
    EM_COPY     = 3'd0,  // dst = a
    EM_EXP      = 3'd1,  // dst = exp(a * 2^-shift), columns >= valid give 0
    EM_ROWSCALE = 3'd2,  // dst = a / (f_row * 2^shift)   (softmax scaling)
    EM_GELU     = 3'd3,  // dst = gelu(a)
    EM_ADD      = 3'd4,  // dst = a + b                   (residual add)
    EM_LNORM    = 3'd5   // dst = (a - mean_row) / std_row (LayerNorm)
  } em_op_e;

  // Command for one block-wise matrix product on the compute array.
  typedef struct packed {
    mm_mode_e    mode;
    logic [7:0]  n_rowblk;       // token block rows (M1 / b)
    logic [7:0]  n_inblk;        // input blocks per row (M2 / b)
    logic [7:0]  n_heads;        // heads (or weight column groups of width D')
    logic [7:0]  cpb;            // output column blocks per head (D' / b)
    logic [15:0] x_cw_base;      // GFB column word of the input matrix
    logic [15:0] x_head_stride;  // DHBMM: words between the heads' input slices
    logic [15:0] r_cw_base;      // RB column word of the output matrix
    logic [15:0] r_head_stride;  // words between the heads' output slices
  } mm_cmd_t;

  // Command for one element-wise pass.
  typedef struct packed {
    em_op_e      op;
    logic [8:0]  n_rows;
    logic [7:0]  n_cw;
    logic [11:0] valid_cols;
    logic [4:0]  shift;
    logic        a_gfb;
    logic [15:0] a_cw_base;
    logic [15:0] b_cw_base;
    logic [15:0] d_cw_base;
    logic [15:0] f_cw;
    logic [2:0]  f_lane;
    logic        capture;
  } em_cmd_t;

  // Command for one token-dropping pass.
  typedef struct packed {
    logic [8:0]  n_tok;
    logic [7:0]  n_cw;
    logic [8:0]  keep_rate;      // Q0.8
    logic [16:0] inv_heads;      // Q0.16
    logic [15:0] src_cw_base;
    logic [15:0] dst_cw_base;
  } td_cmd_t;

  // Saturate a wide signed value to int16.
  function automatic data_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  // Requantise a Q16.16 accumulator to Q8.8 int16.
  function automatic data_t requant(input acc_t a);
    logic signed [63:0] w;
    w = 64'(a) >>> FRAC;
    return sat16(w);
  endfunction

  // Feature-buffer mapping: token row `row` lives in bank (row/b) mod p_t, at
  // local row ((row/b)/p_t)*b + row mod b; each local row has max_cw words.
  function automatic int fb_bank(input int row, input int b, input int p_t);
    return (row / b) % p_t;
  endfunction

  function automatic int fb_addr(input int row, input int cw, input int b,
                                 input int p_t, input int max_cw);
    return (((row / b) / p_t) * b + (row % b)) * max_cw + cw;
  endfunction

endpackage
