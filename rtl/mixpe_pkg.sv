// mixpe_pkg: types and constants shared by the MixPE accelerator.
//
// The accelerator runs a group-quantized mixed-precision GEMM: UINT4 weights
// against INT8 activations (W4A8, "MixPE-A8") or FP16 activations (W4A16,
// "MixPE-A16"). The weight/activation formats and the group size of 128 follow
// the paper. Everything else here is this design's own choice:
//   * partial sums are 32 bits wide in both modes (two's complement integer for
//     A8, IEEE-754 binary32 for A16);
//   * scales are FP16, zero points UINT4; dequantized outputs are FP32;
//   * FP32 arithmetic rounds to nearest-even and flushes subnormals to zero.
// Global-buffer words are 32 bits; the packing of each tensor into them is
// described with the word layouts below.
package mixpe_pkg;

  // Precision mode of one accelerator instance (fixed at elaboration).
  typedef enum logic {
    PREC_A8  = 1'b0,   // W4A8 : UINT4 x INT8
    PREC_A16 = 1'b1    // W4A16: UINT4 x FP16
  } prec_e;

  localparam int unsigned WBITS   = 4;    // weight bits (UINT4)
  localparam int unsigned PSUM_W  = 32;   // partial-sum / output width
  localparam int unsigned WORD_W  = 32;   // global-buffer word width

  // Activation width of a mode.
  function automatic int unsigned act_width(prec_e p);
    return (p == PREC_A8) ? 8 : 16;
  endfunction

  // FP32 special encodings.
  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  // Quantization parameters of one (output channel, group): stored in one
  // global-buffer word as {12'b0, zero[3:0], scale_fp16[15:0]}.
  typedef struct packed {
    logic [11:0] rsvd;
    logic [3:0]  zero;
    logic [15:0] scale;
  } qparam_t;

  // One mpGEMM job: Y[m x n] = X[m x k] * W[n x k]^T with per-group dequant.
  // Global-buffer layouts (word addresses, row-major, k contiguous):
  //   X : x_base + i*(k/EPW) + k_idx/EPW, EPW = 4 (INT8) or 2 (FP16)
  //   W : w_base + j*(k/8)   + k_idx/8   (8 UINT4 per word)
  //   Q : q_base + j*(k/G)   + group     (one qparam_t per word)
  //   Y : o_base + i*n + j               (one FP32 per word)
  // m, n, k must be multiples of ROWS, COLS and the group size G.
  typedef struct packed {
    logic [15:0] m;
    logic [15:0] n;
    logic [15:0] k;
    logic [31:0] x_base;
    logic [31:0] w_base;
    logic [31:0] q_base;
    logic [31:0] o_base;
  } gemm_cfg_t;

  // Multiply an FP32 value by 2**sh by adding sh to its exponent
  // (zero, Inf and NaN pass unchanged; exponent overflow gives Inf).
  function automatic logic [31:0] fp32_pow2(input logic [31:0] a, input logic [1:0] sh);
    logic [8:0] e;
    if (a[30:23] == 8'd0 || a[30:23] == 8'hFF) return a;
    e = {1'b0, a[30:23]} + 9'(sh);
    if (e >= 9'd255) return {a[31], 8'hFF, 23'd0};
    return {a[31], e[7:0], a[22:0]};
  endfunction

endpackage
