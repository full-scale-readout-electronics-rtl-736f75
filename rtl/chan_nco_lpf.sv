// chan_nco_lpf: carrier demodulation of the time-multiplexed channels of one
// channelizer. Each channel holds one resonator tone somewhere inside its
// band; a tunable numerically controlled oscillator (NCO) per channel mixes
// that carrier to DC, and a lowpass filter with a 1.6 MHz cutoff removes
// everything else, leaving the slow flux-ramp modulated SQUID signal.
//
// How it works. The channels arrive interleaved (chan = 0..NCH-1, one sample
// per clock at most), so a single datapath serves all of them:
//   stage 1 (NCO):  phase[c] += inc[c]; s = x * exp(-j*2*pi*phase[c]/2^32)
//                   using the top LUT_AW phase bits and a shared sine table.
//                   The phase used for a sample is the one accumulated before
//                   it, so the first sample after reset is mixed with phase 0.
//   stage 2 (LPF):  y = sum_i h[i] * s[c][n-i], NTAPS taps, with a history of
//                   the last NTAPS-1 mixed samples kept per channel.
// h is a Blackman-windowed sinc with cutoff F_CUT/F_CH (1.6 MHz at the
// 15.625 MHz channel rate of a 500 MS/s, 32-channel channelizer), unit gain
// at DC, 18-bit coefficients. The filter does not decimate.
//
// Interface: cfg_we/cfg_chan/cfg_inc write the NCO frequency word of one
// channel (f = inc/2^32 * F_CH). in is a chan_smp_t stream; out carries the
// filtered samples with their channel index two clocks after the input.
//
// The description gives a tunable NCO and a 1.6 MHz lowpass per channel;
// filter type (FIR), length, window, phase width and table size are this
// design's choices.
module chan_nco_lpf
  import echo_pkg::*;
#(
  parameter int  NCH       = NCHAN,
  parameter int  NTAPS     = 32,
  parameter real F_CH      = 15.625,  // channel sample rate, MHz
  parameter real F_CUT     = 1.6,     // lowpass cutoff, MHz
  parameter int  COEF_W    = 18,
  parameter int  COEF_FRAC = 17       // sum of taps = 2^COEF_FRAC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [5:0]  cfg_chan,
  input  logic [31:0] cfg_inc,
  input  chan_smp_t   in,
  output chan_smp_t   out
);
  localparam int CW = $clog2(NCH);

  typedef logic signed [COEF_W-1:0] coef_t;

  function automatic coef_t [NTAPS-1:0] mk_lpf();
    coef_t [NTAPS-1:0] r;
    real s;
    s = wsinc_sum(NTAPS, F_CUT / F_CH);
    for (int n = 0; n < NTAPS; n++) r[n] = coef_t'(wsinc_tap(n, NTAPS, F_CUT / F_CH, COEF_FRAC, s));
    return r;
  endfunction

  localparam coef_t [NTAPS-1:0] H = mk_lpf();

  logic [31:0] inc   [NCH];
  logic [31:0] phase [NCH];
  cplx_t       hist  [NCH][NTAPS-1];   // hist[c][0] = newest previous sample
  chan_smp_t   mix;                     // stage-1 register

  // ---------------- stage 1: NCO mixing ----------------
  logic [CW-1:0]        ic;
  logic [LUT_AW-1:0]    ph;
  lut_t                 c, s;
  logic signed [63:0]   mr, mi;

  always_comb begin
    ic = in.chan[CW-1:0];
    ph = phase[ic][31 -: LUT_AW];
    c  = lut_cos(ph);
    s  = lut_sin(ph);
    // x * (c - j*s)
    mr = 64'(in.s.re) * 64'(c) + 64'(in.s.im) * 64'(s);
    mi = 64'(in.s.im) * 64'(c) - 64'(in.s.re) * 64'(s);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NCH; i++) begin
        inc[i]   <= '0;
        phase[i] <= '0;
      end
      mix <= '0;
    end else begin
      if (cfg_we && int'(cfg_chan) < NCH) inc[cfg_chan[CW-1:0]] <= cfg_inc;
      mix.valid <= in.valid;
      mix.chan  <= in.chan;
      if (in.valid) begin
        phase[ic] <= phase[ic] + inc[ic];
        mix.s.re  <= sat16((mr + 64'sd16384) >>> 15);
        mix.s.im  <= sat16((mi + 64'sd16384) >>> 15);
      end
    end
  end

  // ---------------- stage 2: per-channel FIR lowpass ----------------
  logic [CW-1:0]      fc;
  logic signed [63:0] ar, ai;

  always_comb begin
    fc = mix.chan[CW-1:0];
    ar = 64'(mix.s.re) * 64'(H[0]);
    ai = 64'(mix.s.im) * 64'(H[0]);
    for (int i = 1; i < NTAPS; i++) begin
      ar += 64'(hist[fc][i-1].re) * 64'(H[i]);
      ai += 64'(hist[fc][i-1].im) * 64'(H[i]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c2 = 0; c2 < NCH; c2++)
        for (int i = 0; i < NTAPS-1; i++) hist[c2][i] <= '0;
      out <= '0;
    end else begin
      out.valid <= mix.valid;
      out.chan  <= mix.chan;
      if (mix.valid) begin
        hist[fc][0] <= mix.s;
        for (int i = 1; i < NTAPS-1; i++) hist[fc][i] <= hist[fc][i-1];
        out.s.re <= sat16((ar + (64'sd1 <<< (COEF_FRAC-1))) >>> COEF_FRAC);
        out.s.im <= sat16((ai + (64'sd1 <<< (COEF_FRAC-1))) >>> COEF_FRAC);
      end
    end
  end
endmodule
