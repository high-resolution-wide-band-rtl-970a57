// spec_pkg: constants and elaboration-time helper functions shared by the
// spectrometer core.
//
// The stage widths are those of the 32768-channel core: 10-bit ADC samples,
// 13 bits after the four-tap weighted overlap-add (WOLA) pre-filter, 29 bits
// after the 32768-point FFT, 30 bits after the channel transformation, 60 bits
// after squaring and 72 bits in the integrator; results leave as IEEE-754
// single-precision words. These numbers follow the paper. The twiddle and
// coefficient widths (TW_W, COEF_W) are this design's own choice.
//
// The twiddle helpers compute constant cosine/sine tables with real
// arithmetic while the design elaborates, so no table file is needed. A
// table value is round(cos(2*pi*e/n) * 2^(TW_W-2)), i.e. 1.0 is 2^(TW_W-2).
package spec_pkg;

  localparam int SAMPLE_W = 10;  // ADC sample width
  localparam int WOLA_W   = 13;  // after 4-tap WOLA: +log2(4) +1
  localparam int FFT_W    = 29;  // after 32768-point FFT: +log2(32768) +1
  localparam int CT_W     = 30;  // after channel transformation: +1
  localparam int PWR_W    = 60;  // squaring doubles the width
  localparam int ACC_W    = 72;  // integrated power
  localparam int FLT_W    = 32;  // IEEE-754 single

  localparam int TW_W     = 18;  // twiddle factor width, 1.0 = 2^(TW_W-2)
  localparam int COEF_W   = 16;  // WOLA coefficient width, 1.0 = 2^(COEF_W-2)
  localparam int TAPS     = 4;   // WOLA taps

  localparam real PI = 3.14159265358979323846;

  // round(cos(2*pi*num/den) * 2^(TW_W-2)) and the same for -sin, so that
  // (cos_q, msin_q) is the fixed-point value of exp(-j*2*pi*num/den).
  function automatic int tw_cos(longint num, longint den);
    real a;
    a = 2.0 * PI * real'(num) / real'(den);
    return int'($floor($cos(a) * real'(64'(1) << (TW_W - 2)) + 0.5));
  endfunction

  function automatic int tw_msin(longint num, longint den);
    real a;
    a = 2.0 * PI * real'(num) / real'(den);
    return int'($floor(-$sin(a) * real'(64'(1) << (TW_W - 2)) + 0.5));
  endfunction

  // Bit reversal of the low `bits` bits of v.
  function automatic int bitrev(int v, int bits);
    int r;
    r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

endpackage
