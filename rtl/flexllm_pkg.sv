// flexllm_pkg: types, constants and fixed-point helpers shared by every block.
//
// Every floating-point value of the accelerator (activations before
// quantization, scales, zero offsets, non-linear results) is carried as a
// 32-bit signed fixed-point number with FX_FRAC fraction bits (fx_t).  This is
// a choice of this implementation; the original library is templated on the
// element type and shows float in its examples.  Integer operands of the
// linear layers are plain signed integers of 4 or 8 bits.
//
// The model sizes are those of Llama-3.2-1B and the parallelism constants are
// the U280 configuration of the stage-customized accelerator (prefill:
// TP=8, WP_kqvo=24, WP_mha=16, WP_ffn=96; decode: BP=16, WP_int4=1024,
// WP_mha=256; HMT plug-in: N=64, BP=4, WP_mem_attn=4).  HEAD_DIM=64 and
// ROPE_THETA=500000 are the model's published values and not given by the
// accelerator description.
package flexllm_pkg;

  localparam int FX_W    = 32;
  localparam int FX_FRAC = 16;
  typedef logic signed [FX_W-1:0] fx_t;
  localparam fx_t FX_ONE = fx_t'(1) <<< FX_FRAC;
  localparam fx_t FX_MAX = fx_t'(32'h7fff_ffff);
  localparam fx_t FX_MIN = fx_t'(32'h8000_0000);

  // Llama-3.2-1B
  localparam int D_MODEL    = 2048;
  localparam int D_KV       = 512;
  localparam int D_FFN      = 8192;
  localparam int N_LAYERS   = 16;
  localparam int VOCAB      = 128256;
  localparam int HEAD_DIM   = 64;
  localparam int ROPE_THETA = 500000;

  // U280 configuration
  localparam int TP_PREFILL     = 8;
  localparam int WP_KQVO        = 24;
  localparam int WP_MHA_PREFILL = 16;
  localparam int WP_FFN         = 96;
  localparam int BP_DECODE      = 16;
  localparam int WP_INT4        = 1024;
  localparam int WP_MHA_DECODE  = 256;
  localparam int HMT_N          = 64;
  localparam int HMT_BP         = 4;
  localparam int HMT_WP         = 4;

  // Operations of the decode engine (flexllm_top)
  typedef enum logic [3:0] {
    OP_NORM     = 4'd0,   // RMS normalization, aux stream = weight
    OP_QLINEAR4 = 4'd1,   // dynamic asym INT4 quant -> linear -> dequant
    OP_QLINEAR8 = 4'd2,   // static sym INT8 quant -> linear (K/V) -> dequant
    OP_ROPE     = 4'd3,
    OP_SOFTMAX  = 4'd4,
    OP_SWISH    = 4'd5,
    OP_GATE     = 4'd6,   // x * aux
    OP_RESIDUAL = 4'd7,   // x + aux
    OP_FHT      = 4'd8,
    OP_SAMPLE   = 4'd9
  } op_e;

  // Saturate a wide value to fx_t.
  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sd2147483647)       return FX_MAX;
    else if (v < -64'sd2147483648) return FX_MIN;
    else                           return fx_t'(v);
  endfunction

  // Fixed-point product, rounded to nearest, saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    p = p + (64'sd1 <<< (FX_FRAC - 1));
    return fx_sat(p >>> FX_FRAC);
  endfunction

  // exp(x) for x <= 0 (larger x is clamped to 0): 2^(x*log2(e)) with a
  // second-order polynomial for the fractional power of two.
  function automatic fx_t fx_exp_neg(input fx_t x);
    logic signed [63:0] y;     // x * log2(e), FX_FRAC fraction bits
    logic signed [63:0] ip;
    logic [FX_FRAC-1:0] f;
    logic [63:0] pf, e;
    if (x > 0) x = 0;
    y  = (64'(x) * 64'sd94548) >>> FX_FRAC;        // log2(e) = 1.442695 * 2^16
    ip = y >>> FX_FRAC;                            // floor, <= 0
    f  = y[FX_FRAC-1:0];
    // 2^f ~= 1 + f*(0.6565 + 0.3435*f), f in [0,1)
    pf = (64'(f) * 64'd22511) >> FX_FRAC;          // 0.3435*f
    pf = (64'(f) * (64'd43025 + pf)) >> FX_FRAC;   // f*(0.6565 + 0.3435 f)
    e  = 64'(FX_ONE) + pf;
    if (ip < -31) return '0;
    return fx_t'(e >> (-ip));
  endfunction

endpackage
