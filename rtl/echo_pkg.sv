// echo_pkg: types, sizes and constant tables shared by the readout firmware.
//
// The system numbers come from the described readout: 5 subbands of
// 800 MHz, 80 tones per subband, two ADC sideband streams of 500 MS/s per
// subband (10 streams), 32 polyphase channels per channelizer and a second,
// frequency-shifted channelizer (64 overlapping channels per stream), and a
// 1.6 MHz channel lowpass. Sample widths, phase widths and filter lengths are
// not given by the description and are this design's choice (16-bit I/Q
// samples, 18-bit coefficients, 32-bit tone phase accumulators).
//
// The coefficient and sine tables are computed at elaboration by constant
// functions so that no data file is needed:
//   sine table      : round(A * sin(2*pi*i/N))
//   windowed sinc   : h[n] = sinc(2*fc*(n-(L-1)/2)) * w[n], w = Blackman,
//                     normalised to sum(h) = 1, then scaled by 2^frac.
package echo_pkg;

  localparam int SAMPLE_W  = 16;   // I and Q sample width (ADC/DAC side)
  localparam int NSUB      = 5;    // subbands of 800 MHz between 4 and 8 GHz
  localparam int NSTREAM   = 2 * NSUB; // upper and lower sideband per subband
  localparam int NTONES    = 80;   // tones per subband
  localparam int NCHAN     = 32;   // channels per polyphase channelizer
  localparam real PI       = 3.14159265358979323846;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  // Configuration write (one register write per cycle when we is set).
  typedef struct packed {
    logic        we;
    logic [19:0] addr;
    logic [31:0] data;
  } cfg_t;

  // IQ imbalance correction matrix, Q2.14 (16384 = 1.0):
  //   I' = ii*I + iq*Q,  Q' = qi*I + qq*Q
  typedef struct packed {
    logic signed [15:0] ii;
    logic signed [15:0] iq;
    logic signed [15:0] qi;
    logic signed [15:0] qq;
  } iq_coef_t;

  localparam iq_coef_t IQ_IDENTITY = '{ii: 16'sd16384, iq: 16'sd0, qi: 16'sd0, qq: 16'sd16384};

  // Phase-to-amplitude tables: 2^LUT_AW entries per period, Q15 amplitude.
  localparam int LUT_AW = 10;
  localparam int LUT_A  = 32767;

  // One time-multiplexed channel sample.
  typedef struct packed {
    logic        valid;
    logic [5:0]  chan;     // channel index within its channelizer
    cplx_t       s;
  } chan_smp_t;

  // Saturate a wide signed value to SAMPLE_W bits.
  function automatic logic signed [SAMPLE_W-1:0] sat16(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = 64'sd32767;
    localparam logic signed [63:0] MINV = -64'sd32768;
    if (v > MAXV) return 16'sh7fff;
    if (v < MINV) return 16'sh8000;
    return v[SAMPLE_W-1:0];
  endfunction

  // Sine table with N entries and peak amplitude amp.
  function automatic int sin_entry(input int i, input int n, input real amp);
    return $rtoi($floor(amp * $sin(2.0 * PI * i / n) + 0.5));
  endfunction

  // Windowed-sinc lowpass tap n of L, cutoff fc in cycles/sample,
  // scaled so that the sum of all taps is 2^frac.
  function automatic real wsinc_raw(input int n, input int l, input real fc);
    real t, s, w;
    t = n - (l - 1) / 2.0;
    if (t == 0.0) s = 2.0 * fc;
    else          s = $sin(2.0 * PI * fc * t) / (PI * t);
    w = 0.42 - 0.5 * $cos(2.0 * PI * n / (l - 1)) + 0.08 * $cos(4.0 * PI * n / (l - 1));
    return s * w;
  endfunction

  function automatic real wsinc_sum(input int l, input real fc);
    real sum;
    sum = 0.0;
    for (int k = 0; k < l; k++) sum += wsinc_raw(k, l, fc);
    return sum;
  endfunction

  // Tap n, given the sum of all raw taps (wsinc_sum), scaled so that the
  // taps add up to 2^frac.
  function automatic int wsinc_tap(input int n, input int l, input real fc,
                                   input int frac, input real sum);
    return $rtoi($floor(wsinc_raw(n, l, fc) / sum * (2.0 ** frac) + 0.5));
  endfunction

  typedef logic signed [16:0] lut_t;

  function automatic lut_t [2**LUT_AW-1:0] mk_sin_lut();
    lut_t [2**LUT_AW-1:0] r;
    for (int i = 0; i < 2**LUT_AW; i++) r[i] = lut_t'(sin_entry(i, 2**LUT_AW, real'(LUT_A)));
    return r;
  endfunction

  localparam lut_t [2**LUT_AW-1:0] SIN_LUT = mk_sin_lut();

  // cos(phase) and sin(phase) for a phase in units of 2*pi/2^LUT_AW
  function automatic lut_t lut_cos(input logic [LUT_AW-1:0] ph);
    return SIN_LUT[ph + LUT_AW'(2**(LUT_AW-2))];
  endfunction

  function automatic lut_t lut_sin(input logic [LUT_AW-1:0] ph);
    return SIN_LUT[ph];
  endfunction

endpackage
