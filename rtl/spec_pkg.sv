// spec_pkg: types, constants and arithmetic helpers shared by the spectrometer.
//
// The spectrometer turns two 12-bit ADC streams (I and Q) into an averaged
// power spectrum of N = 2^17 or 2^18 complex points. The widths below follow
// the two published configurations: 12-bit samples, one bit of growth per
// radix-2 stage (29 bits for N = 2^17, 30 bits for N = 2^18), a 54-bit fixed
// point or FP32 power word, and a 64-bit fixed point or FP32 accumulator.
// Twiddle coefficients are 18-bit signed numbers with 16 fraction bits so that
// +1.0 is exactly representable; that width is this design's choice.
//
// The floating-point helpers only handle the numbers that occur here:
// non-negative values, zero or normal, no infinities or NaNs. Rounding is
// round-to-nearest-even, as in IEEE 754.
package spec_pkg;

  // Output number format of the power and accumulator stages.
  typedef enum logic {
    FMT_FIXED = 1'b0,  // N = 2^17 build: 54-bit power, 64-bit sums
    FMT_FP32  = 1'b1   // N = 2^18 build: FP32 power and sums
  } out_fmt_e;

  localparam int unsigned ADC_W     = 12;  // ADC resolution
  localparam int unsigned ADC_PAR   = 8;   // samples per ADC per converter clock
  localparam int unsigned LANES     = 16;  // parallel FFT lanes
  localparam int unsigned LOG2LANES = 4;

  localparam int unsigned COEF_W    = 18;  // twiddle coefficient width
  localparam int unsigned COEF_FRAC = 16;  // fraction bits: 1.0 = 65536

  localparam int unsigned PWR_FIX_W = 54;  // fixed-point power word
  localparam int unsigned ACC_FIX_W = 64;  // fixed-point accumulator word
  localparam int unsigned FP_W      = 32;

  typedef logic signed [COEF_W-1:0] coef_t;

  // Width of the power word and of the accumulated word for a format.
  function automatic int unsigned pwr_width(out_fmt_e fmt);
    return (fmt == FMT_FP32) ? FP_W : PWR_FIX_W;
  endfunction

  function automatic int unsigned acc_width(out_fmt_e fmt);
    return (fmt == FMT_FP32) ? FP_W : ACC_FIX_W;
  endfunction

  // Reverse the lowest `bits` bits of x.
  function automatic logic [31:0] bitrev(logic [31:0] x, int unsigned bits);
    logic [31:0] r;
    r = '0;
    for (int unsigned i = 0; i < 32; i++)
      if (i < bits) r[i] = x[bits-1-i];
    return r;
  endfunction

  // Round a real number in [-1, 1] to a Q1.16 coefficient.
  function automatic coef_t to_coef(real v);
    real s;
    s = v * real'(1 << COEF_FRAC);
    return coef_t'($rtoi(s >= 0.0 ? s + 0.5 : s - 0.5));
  endfunction

  // Unsigned integer (up to 64 bits) to FP32, round to nearest even.
  function automatic logic [31:0] u64_to_fp32(logic [63:0] x);
    int          msb;
    logic [63:0] n;
    logic [23:0] man;   // hidden bit + 23 fraction bits
    logic        guard, sticky;
    logic [8:0]  e;
    logic [24:0] rnd;
    if (x == '0) return '0;
    msb = 0;
    for (int i = 0; i < 64; i++)
      if (x[i]) msb = i;
    n      = x << (63 - msb);
    man    = n[63:40];
    guard  = n[39];
    sticky = |n[38:0];
    e      = 9'(msb + 127);
    rnd    = {1'b0, man} + {24'd0, guard & (sticky | man[0])};
    if (rnd[24]) begin
      e   = e + 9'd1;
      rnd = rnd >> 1;
    end
    return {1'b0, e[7:0], rnd[22:0]};
  endfunction

  // Sum of two non-negative FP32 numbers, round to nearest even.
  function automatic logic [31:0] fp32_add_pos(logic [31:0] a, logic [31:0] b);
    logic [30:0] greater, lesser;   // sign bits are zero
    logic [7:0]  eb, es, d;
    logic [26:0] mb, ms;    // {hidden, 23 fraction, guard, round, sticky}
    logic [27:0] sum;
    logic [8:0]  e;
    logic [24:0] rnd;
    logic        st;
    if (a[30:0] == '0) return b;
    if (b[30:0] == '0) return a;
    if (a[30:0] >= b[30:0]) begin greater = a[30:0]; lesser = b[30:0]; end
    else                    begin greater = b[30:0]; lesser = a[30:0]; end
    eb = greater[30:23];
    es = lesser[30:23];
    d  = eb - es;
    mb = {1'b1, greater[22:0], 3'b000};
    ms = {1'b1, lesser[22:0], 3'b000};
    // Align the smaller operand, folding shifted-out bits into sticky.
    if (d > 8'd26) begin
      ms = 27'd1;
    end else begin
      st = 1'b0;
      for (int i = 0; i < 27; i++)
        if (i < int'(d) && ms[i]) st = 1'b1;
      ms = (ms >> d) | 27'(st);
    end
    sum = {1'b0, mb} + {1'b0, ms};
    e   = {1'b0, eb};
    if (sum[27]) begin
      sum = (sum >> 1) | 28'(sum[0]);
      e   = e + 9'd1;
    end
    // sum[26] is the hidden bit, sum[25:3] the fraction, sum[2:0] G,R,S.
    rnd = {1'b0, sum[26:3]} + {24'd0, sum[2] & (sum[1] | sum[0] | sum[3])};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 9'd1;
    end
    return {1'b0, e[7:0], rnd[22:0]};
  endfunction

endpackage
