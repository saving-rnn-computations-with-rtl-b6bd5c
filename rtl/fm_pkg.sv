// fm_pkg: types, sizes and arithmetic helpers shared by the fuzzy-memoization
// LSTM accelerator (four gate computation units plus on-chip memory).
//
// Number formats. Full-precision values (weights, inputs, gate outputs, cell
// state) are 16-bit two's complement fixed point with FRAC fractional bits
// (Q8.8). A stored binarized value is 1 for a value >= 0 and 0 otherwise, so
// the binarized bit of a fixed-point word is the inverse of its sign bit. The
// binary neuron output and the accumulated relative difference delta are
// 16-bit integers ("integer width 2 bytes"); delta is unsigned fixed point with
// DELTA_FRAC fractional bits.
//
// The sizes follow the configuration the accelerator is presented in: a DPU of
// 16 lanes, a 2048-bit binary dot product, 2 MiB of weights, 8 KiB input
// buffer and 8 KiB memoization buffer per computation unit, 6 MiB on-chip
// memory. The fixed-point format and the piecewise-linear activations are
// this design's choice; the accelerator it is modelled on uses FP16/FP32.
package fm_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W      = 16;    // full-precision word
  localparam int unsigned FRAC        = 8;     // fractional bits of DATA_W words
  localparam int unsigned N_LANES     = 16;    // DPU width (operations per cycle)
  localparam int unsigned BDPU_W      = 2048;  // BDPU width in bits
  localparam int unsigned INT_W       = 16;    // FMU integer width (2 bytes)
  localparam int unsigned DELTA_FRAC  = 8;     // fractional bits of delta / theta
  localparam int unsigned FMU_LAT     = 5;     // FMU latency in cycles

  localparam int unsigned WBUF_BYTES  = 2*1024*1024;          // weight buffer per CU
  localparam int unsigned N_WEIGHTS   = WBUF_BYTES / (DATA_W/8); // 1 Mi weights
  localparam int unsigned SIGN_ROWS   = N_WEIGHTS / BDPU_W;   // 512 rows of 2048 signs
  localparam int unsigned WREST_ROWS  = N_WEIGHTS / N_LANES;  // 65536 rows of 16 x 15 bits
  localparam int unsigned WREST_W     = N_LANES * (DATA_W-1); // 240 bits per row

  localparam int unsigned INBUF_BYTES = 8*1024;
  localparam int unsigned IN_WORDS    = INBUF_BYTES / (DATA_W/8); // 4096 words
  localparam int unsigned IN_ROWS     = IN_WORDS / N_LANES;        // 256 rows

  localparam int unsigned MEMO_BYTES  = 8*1024;
  localparam int unsigned MEMO_ENTRY_W = DATA_W + 2*INT_W;          // y_m, y_m^b, delta
  localparam int unsigned MEMO_ENTRIES = MEMO_BYTES*8 / MEMO_ENTRY_W; // 1365

  localparam int unsigned MAX_NEURONS = SIGN_ROWS;       // one sign row per neuron
  localparam int unsigned MAX_K       = BDPU_W / N_LANES; // 128 sub-vectors per neuron

  localparam int unsigned OM_BYTES    = 6*1024*1024;
  localparam int unsigned OM_WORDS    = OM_BYTES / (DATA_W/8); // 3 Mi words

  // ---------------------------------------------------------------- types
  typedef logic signed [DATA_W-1:0] fx_t;    // Q8.8 value
  typedef logic signed [INT_W-1:0]  bint_t;  // binary neuron output
  typedef logic        [INT_W-1:0]  delta_t; // accumulated relative difference

  typedef struct packed {
    fx_t    ym;     // memoized full-precision neuron output (DPU result)
    bint_t  ymb;    // memoized binary neuron output
    delta_t delta;  // sum of relative differences since the last evaluation
  } memo_entry_t;

  typedef enum logic [1:0] {
    GATE_I = 2'd0,
    GATE_F = 2'd1,
    GATE_G = 2'd2,
    GATE_O = 2'd3
  } gate_e;

  typedef enum logic {
    ACT_SIGMOID = 1'b0,
    ACT_TANH    = 1'b1
  } act_e;

  localparam fx_t FX_MAX = fx_t'(16'sh7FFF);
  localparam fx_t FX_MIN = fx_t'(16'sh8000);
  localparam fx_t FX_ONE = fx_t'(1 << FRAC);

  // ---------------------------------------------------------------- helpers
  // Saturate a wide signed value to a Q8.8 word.
  function automatic fx_t sat_fx(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FX_MAX;
    else if (v < -48'sd32768) return FX_MIN;
    else                      return fx_t'(v[DATA_W-1:0]);
  endfunction

  // Q8.8 x Q8.8 -> Q8.8 with truncation toward minus infinity and saturation.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return sat_fx(48'(p >>> FRAC));
  endfunction

  // Piecewise-linear sigmoid (the PLAN segments: slopes 1/4, 1/8, 1/32, 0 with
  // breakpoints 1, 2.375 and 5) on Q8.8, using sigmoid(-x) = 1 - sigmoid(x).
  function automatic fx_t sigmoid_pwl(input fx_t x);
    logic signed [17:0] ax;
    logic signed [17:0] y;
    ax = (x < 0) ? -18'(x) : 18'(x);
    if (ax >= 18'sd1280)      y = 18'sd256;                       // |x| >= 5
    else if (ax >= 18'sd608)  y = (ax >>> 5) + 18'sd216;          // 0.03125|x| + 0.84375
    else if (ax >= 18'sd256)  y = (ax >>> 3) + 18'sd160;          // 0.125|x| + 0.625
    else                      y = (ax >>> 2) + 18'sd128;          // 0.25|x| + 0.5
    if (x < 0) y = 18'sd256 - y;
    return fx_t'(y[DATA_W-1:0]);
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, built on the same segments.
  function automatic fx_t tanh_pwl(input fx_t x);
    fx_t x2;
    fx_t s;
    x2 = sat_fx(48'(x) * 48'sd2);
    s  = sigmoid_pwl(x2);
    return fx_t'((32'(s) * 2) - 32'(FX_ONE));
  endfunction

  // Binarize a Q8.8 word: 1 when x >= 0.
  function automatic logic bin_fx(input fx_t x);
    return ~x[DATA_W-1];
  endfunction

endpackage
