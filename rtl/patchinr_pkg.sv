// patchinr_pkg: types, constants and arithmetic functions shared by the
// patch-based SIREN accelerator.
//
// The accelerator evaluates a small multilayer perceptron (SIREN: sine
// activations) once per image patch. Every datapath lane is 32 bits wide. In
// FP32 mode a lane holds an IEEE-754 single; in INT8 mode the low 8 bits of a
// lane hold a two's-complement value and the upper bits are a sign extension.
//
// The floating-point helpers below are this design's own simplified FP32
// arithmetic: subnormal inputs and results are flushed to zero, rounding is
// round-to-nearest-even, overflow saturates to infinity, NaN is not
// produced or propagated. The fixed-point helpers convert between FP32 and
// the Q formats used by the sine unit. All functions are combinational.
package patchinr_pkg;

  localparam int unsigned DATA_W     = 32;
  // Core MAC array size, printed as "16*16" in the accelerator's specification.
  localparam int unsigned ARRAY_ROWS = 16;
  localparam int unsigned ARRAY_COLS = 16;

  // Sine unit fixed-point formats: input Q7.24, output Q1.30 (signed 32 bit).
  localparam int unsigned SIN_IN_FRAC  = 24;
  localparam int unsigned SIN_OUT_FRAC = 30;

  typedef logic [DATA_W-1:0] word_t;

  typedef enum logic {
    MODE_FP32 = 1'b0,
    MODE_INT8 = 1'b1
  } prec_mode_e;

  // Value fed on the bias lane (the constant "1" input of every layer).
  localparam word_t FP32_ONE = 32'h3F80_0000;  // 1.0
  localparam word_t INT8_ONE = 32'd127;        // 127/128 in Q0.7

  // One weight tile: row r = output neuron, column c = input element.
  typedef logic [ARRAY_ROWS-1:0][ARRAY_COLS-1:0][DATA_W-1:0] wtile_t;
  // Activation vector entering the array (one lane per column).
  typedef logic [ARRAY_COLS-1:0][DATA_W-1:0] avec_t;
  // Result vector leaving the accumulator (one lane per row).
  typedef logic [ARRAY_ROWS-1:0][DATA_W-1:0] rvec_t;
  // All products of the array.
  typedef logic [ARRAY_ROWS-1:0][ARRAY_COLS-1:0][DATA_W-1:0] ptile_t;

  // Side information that travels down the pipeline with each issued tile.
  typedef struct packed {
    logic        first;       // first input tile of an output tile
    logic        last;        // last input tile of an output tile
    logic        last_layer;  // output layer: no sine, result goes to the patch buffer
    logic [3:0]  layer;       // layer index
    logic [15:0] ot;          // output tile index within the layer
    prec_mode_e  mode;        // precision of this tile
  } tag_t;

  // ---------------------------------------------------------------- FP32
  // Leading-zero count (result 31 for v == 0), as a five-step binary search.
  function automatic logic [4:0] clz32(input logic [31:0] v);
    logic [4:0]  n;
    logic [31:0] t;
    n = 5'd0;
    t = v;
    if (t[31:16] == 16'd0) begin n[4] = 1'b1; t = t << 16; end
    if (t[31:24] == 8'd0)  begin n[3] = 1'b1; t = t << 8;  end
    if (t[31:28] == 4'd0)  begin n[2] = 1'b1; t = t << 4;  end
    if (t[31:30] == 2'd0)  begin n[1] = 1'b1; t = t << 2;  end
    if (t[31] == 1'b0)     n[0] = 1'b1;
    return n;
  endfunction

  function automatic word_t fp_mul(input word_t a, input word_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] prod;
    logic [24:0] mant;
    logic        g, st;
    logic signed [10:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'd0 || eb == 8'd0) return {s, 31'd0};
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    if (prod[47]) begin
      mant = {1'b0, prod[47:24]};
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = {1'b0, prod[46:23]};
      g    = prod[22];
      st   = |prod[21:0];
    end
    if (g && (st || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 11'sd1;
    end
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], mant[22:0]};
  endfunction

  function automatic word_t fp_add(input word_t a, input word_t b);
    word_t       x, y;
    logic [7:0]  d8;
    logic [26:0] mx, my, mask;
    logic [27:0] sum;
    logic [4:0]  lz;
    logic [24:0] mant;
    logic        sticky;
    logic signed [10:0] e;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    // x has the larger magnitude
    if (a[30:0] >= b[30:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d8 = x[30:23] - y[30:23];
    if (d8 >= 8'd27) begin
      my = 27'd1;  // only the sticky bit is left
    end else begin
      mask   = (27'd1 << d8) - 27'd1;
      sticky = |(my & mask);
      my     = (my >> d8) | {26'd0, sticky};
    end
    e = 11'(signed'({3'b0, x[30:23]}));
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:1]} | {27'd0, sum[0]};
        e   = e + 11'sd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return 32'd0;
      lz  = clz32({5'd0, sum[26:0]}) - 5'd5;
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    mant = {1'b0, sum[26:3]};
    if (sum[2] && ((|sum[1:0]) || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 11'sd1;
    end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {x[31], 8'hFF, 23'd0};
    return {x[31], e[7:0], mant[22:0]};
  endfunction

  // FP32 -> signed fixed point with FRAC fractional bits, saturating,
  // truncating toward zero in magnitude.
  function automatic logic signed [31:0] fp_to_fix(input word_t f, input int frac);
    int          sh;
    logic [63:0] m;
    if (f[30:23] == 8'd0) return 32'sd0;
    sh = int'(f[30:23]) - 127 - 23 + frac;
    m  = {40'd0, 1'b1, f[22:0]};
    if (sh >= 8) begin
      m = 64'h7FFF_FFFF;
    end else if (sh >= 0) begin
      m = m << sh;
    end else if (sh > -32) begin
      m = m >> (-sh);
    end else begin
      m = 64'd0;
    end
    return f[31] ? -signed'(m[31:0]) : signed'(m[31:0]);
  endfunction

  // Signed fixed point with FRAC fractional bits -> FP32, round to nearest even.
  function automatic word_t fix_to_fp(input logic signed [31:0] v, input int frac);
    logic        s;
    logic [31:0] m;
    logic [4:0]  lz;
    logic [24:0] mant;
    int          e;
    if (v == 32'sd0) return 32'd0;
    s  = v[31];
    m  = s ? 32'(-v) : 32'(v);
    lz = clz32(m);
    m  = m << lz;
    e  = 127 + 31 - int'(lz) - frac;
    mant = {1'b0, m[31:8]};
    if (m[7] && ((|m[6:0]) || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (e <= 0) return 32'd0;
    return {s, 8'(e), mant[22:0]};
  endfunction

  // ---------------------------------------------------------------- INT8
  function automatic word_t sext8(input logic [7:0] v);
    return {{24{v[7]}}, v};
  endfunction

  // Saturate a signed 32-bit value to [-127, 127] and sign-extend it to a lane.
  function automatic word_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127) return 32'd127;
    if (v < -32'sd127) return sext8(8'h81);
    return sext8(v[7:0]);
  endfunction

endpackage
