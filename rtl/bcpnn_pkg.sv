// bcpnn_pkg -- types, constants and fixed-point arithmetic shared by the
// BCPNN accelerator.
//
// Every value that is stored or streamed (weights, biases, activities,
// probability traces) is a 16-bit signed fixed-point number in Q3.12 format:
// 4 integer bits including sign, 12 fraction bits, range [-8, 8), step 2^-12.
// That is the storage format of the mixed-precision variant of the
// accelerator. Sums of products are carried in a 32-bit accumulator with the
// same 12 fraction bits (Q19.12); the original design accumulates in FP16 to
// avoid overflow, the wide fixed-point accumulator serves the same purpose
// without floating-point hardware.
//
// A 256-bit memory beat carries LANES = 16 such values, lane 0 in bits
// [15:0]. This is the burst parallelism factor of 16 of the 16-bit variants.
//
// The exponential and natural logarithm needed by the soft winner-take-all
// and by the Bayesian-Hebbian weight rule are piecewise-quadratic
// approximations built on base-2 shifts (exp) and a leading-one search (log).
// Both are this design's choice; their error is below 1 % of full scale
// over the ranges used.
package bcpnn_pkg;

  localparam int DW        = 16;            // stored word width
  localparam int FRAC      = 12;            // fraction bits (Q3.12)
  localparam int ACC_W     = 32;            // accumulator width (Q19.12)
  localparam int AXI_DW    = 256;           // memory beat width
  localparam int AXI_AW    = 32;            // byte address width
  localparam int LANES     = AXI_DW / DW;   // 16 values per beat
  localparam int BEAT_BYTES = AXI_DW / 8;   // 32 bytes per beat

  typedef logic signed [DW-1:0]    fxp_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [AXI_DW-1:0]       beat_t;
  typedef logic [AXI_AW-1:0]       addr_t;
  typedef fxp_t [LANES-1:0]        fxp_lanes_t;
  typedef acc_t [LANES-1:0]        acc_lanes_t;

  localparam fxp_t FXP_ONE = fxp_t'(16'sd4096);     // 1.0
  localparam fxp_t FXP_MAX = fxp_t'(16'sh7FFF);     // just below 8.0
  localparam fxp_t FXP_MIN = fxp_t'(-16'sd32768);   // -8.0

  // AXI4 read address / write address channel payload (INCR bursts,
  // 32-byte beats); valid and ready travel as separate signals.
  typedef struct packed {
    addr_t      addr;
    logic [7:0] len;     // beats - 1
  } axi_ax_t;

  typedef struct packed {
    beat_t data;
    logic  last;
  } axi_r_t;

  typedef struct packed {
    beat_t                  data;
    logic [BEAT_BYTES-1:0]  strb;
    logic                   last;
  } axi_w_t;

  // Run-time configuration of one kernel invocation (the host's arguments).
  typedef struct packed {
    logic        learn;      // 1: online learning after each inference
    logic [15:0] nsamples;   // number of input records to process
    fxp_t        alpha;      // trace learning rate, Q3.12
    addr_t       in_base;    // input records (pixels, then a label beat)
    addr_t       idx_base;   // sparse index list of the input-hidden projection
    addr_t       wih_base;   // input-hidden bias/weight stream
    addr_t       who_base;   // hidden-output bias/weight stream
    addr_t       pih_base;   // input-hidden joint traces p_ij
    addr_t       pho_base;   // hidden-output joint traces p_ij
    addr_t       out_base;   // one result beat per sample
  } kernel_cfg_t;

  // Saturate a Q19.12 value into Q3.12.
  function automatic fxp_t sat16(input acc_t v);
    if (v > acc_t'(FXP_MAX))      return FXP_MAX;
    else if (v < acc_t'(FXP_MIN)) return FXP_MIN;
    else                          return fxp_t'(v);
  endfunction

  // Q3.12 x Q3.12 product kept at 12 fraction bits, in accumulator width.
  function automatic acc_t mul_acc(input fxp_t a, input fxp_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return acc_t'(p >>> FRAC);
  endfunction

  // Saturating Q3.12 product.
  function automatic fxp_t fxp_mul(input fxp_t a, input fxp_t b);
    return sat16(mul_acc(a, b));
  endfunction

  // exp(x) for x <= 0 (Q19.12), result in (0, 1] as Q3.12.
  // exp(x) = 2^t with t = x*log2(e) = n + f, 0 <= f < 1;
  // 2^f ~= 1 + f*(0.6565 + 0.3435 f), then shifted right by -n.
  function automatic fxp_t fxp_exp_neg(input acc_t x);
    logic signed [63:0] t;
    logic signed [63:0] n;
    logic        [63:0] f;
    logic        [63:0] p;
    if (x >= 0) return FXP_ONE;
    t = (64'(x) * 64'sd5909) >>> FRAC;       // log2(e) = 1.4427 -> 5909
    n = t >>> FRAC;                           // floor, n <= -1 or 0
    f = 64'(t - (n <<< FRAC));                // 0 .. 4095
    p = 64'd4096 + ((f * (64'd2689 + ((64'd1407 * f) >> FRAC))) >> FRAC);
    if (n < -64'sd13) return '0;
    return fxp_t'(p >> (-n));
  endfunction

  // Natural logarithm of a positive Q3.12 value, saturated to [-8, 8).
  // log2(v) = k - 12 + log2(1+f) with k the leading-one position and
  // log2(1+f) ~= f*(1.3465 - 0.3465 f); ln = log2 * ln(2).
  function automatic fxp_t fxp_ln(input fxp_t v);
    int                 k;
    logic        [31:0] m;
    logic        [31:0] mf;
    logic signed [63:0] f;
    logic signed [63:0] l2;
    logic signed [63:0] ln;
    if (v <= 0) return FXP_MIN;
    k = 0;
    for (int b = 0; b < DW - 1; b++)
      if (v[b]) k = b;
    m  = 32'(v) << (14 - k);                  // leading one at bit 14
    mf = (m - 32'd16384) >> 2;                // Q.12 fraction of the mantissa
    f  = 64'(mf);
    l2 = (64'(k - FRAC) <<< FRAC) + ((f * (64'sd5515 - ((64'sd1419 * f) >>> FRAC))) >>> FRAC);
    ln = (l2 * 64'sd2839) >>> FRAC;           // ln(2) = 0.693147 -> 2839
    if (ln > 64'sd32767)  return FXP_MAX;
    if (ln < -64'sd32768) return FXP_MIN;
    return fxp_t'(ln);
  endfunction

  // One step of an exponential moving average: p + alpha * (target - p).
  function automatic fxp_t trace_step(input fxp_t p, input fxp_t target, input fxp_t alpha);
    return sat16(acc_t'(p) + mul_acc(alpha, fxp_t'(target - p)));
  endfunction

endpackage
