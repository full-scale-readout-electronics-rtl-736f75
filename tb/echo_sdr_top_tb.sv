// echo_sdr_top_tb: end-to-end room-temperature loopback of the whole
// readout at its default size (5 subbands x 80 tones, 10 streams x 64
// channels), with no parameter overrides.
//
// Loopback model (behavioural, in this file): the DAC output of subband s
// (1 GS/s complex) optionally passes an analog IQ imbalance (gain 1.05,
// phase 3 degrees on Q), then an ADC digital down-converter model splits it
// into two 500 MS/s streams: lower sideband = decimate-by-2 of a lowpass
// (47-tap Blackman sinc, cutoff 250 MHz) of x*exp(+j*pi*n/2), upper
// sideband the same with exp(-j*pi*n/2). They enter streams 2s and 2s+1.
//
// Comb: tone t < 40 of a subband sits in the lower sideband near the centre
// of a channel of list L (bank A channels -10..9, bank B channels -10..9),
// offset d_t (|d_t| < 2 MHz); tone 40+t sits at the mirror frequency in the
// upper sideband, which is where the IQ image of tone t falls. Each used
// channel's NCO is set to its tone's offset.
// Checked mechanisms and the counters that must end above zero:
//   tone_dc        : a demodulated tone at DC with its DAC amplitude (3 %)
//   bank_a, bank_b : the above, in each channelizer bank
//   am             : subband 0 tone 5 amplitude-modulated (depth 0.3);
//                    its demodulated magnitude must swing by > 1.4 : 1
//   lpf_reject     : subband 1 tone 0 demodulated with an NCO 5 MHz off;
//                    the 1.6 MHz lowpass must suppress it by > 26 dB (its
//                    neighbour in the other bank, 7.8 MHz away, is off)
//   iq_uncorr      : subband 3 with the imbalance and identity correction:
//                    images (upper tones off) above -35 dBc
//   iq_corr        : subband 4 with the imbalance and its inverse programmed
//                    into the IQ correction: images below -40 dBc
module echo_sdr_top_tb;
  import echo_pkg::*;

  localparam int  NS = 5, NR = 10, NT = 80, M = 32;
  localparam int  DDC_L = 47;
  localparam real FCH = 15.625;
  localparam int  T_SETTLE = 3600;     // clocks after sync before measuring
  localparam int  T_MEAS   = 2400;     // measurement window, clocks
  localparam real G_ERR = 1.05, PH_ERR = 3.0 * PI / 180.0;

  logic      clk = 0, rst_n = 0;
  cfg_t      cfg;
  logic      dac_valid [NS];
  cplx_t     dac_out   [NS];
  logic      dac_clip  [NS];
  logic      adc_valid [NR];
  cplx_t     adc_in    [NR];
  chan_smp_t ch_a      [NR];
  chan_smp_t ch_b      [NR];
  always #1 clk = ~clk;

  echo_sdr_top dut (.clk, .rst_n, .cfg, .dac_valid, .dac_out, .dac_clip,
                    .adc_valid, .adc_in, .ch_a, .ch_b);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  // ---------------- configuration helpers ----------------
  task automatic wr(input int unit, input int addr, input logic [31:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {5'(unit), 15'(addr)}; cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] fword(input real f, input real fs);
    real v;
    v = f / fs * 4294967296.0;
    if (v < 0.0) v += 4294967296.0;
    return 32'(longint'($floor(v)));
  endfunction

  // expected result per stream, bank, channel
  // kind: 0 unused, 1 tone at DC, 2 AM tone, 3 LPF reject, 4 image (uncorrected), 5 image (corrected)
  int  kind [NR][2][M];
  real eamp [NR][2][M];
  real msum [NR][2][M], mmin [NR][2][M], mmax [NR][2][M];
  int  mcnt [NR][2][M];
  bit  measuring = 0;

  int n_tone_dc = 0, n_bank_a = 0, n_bank_b = 0, n_am = 0, n_lpf = 0, n_iq_uncorr = 0, n_iq_corr = 0;

  // ---------------- loopback model ----------------
  real ddc_h [DDC_L];
  real hre [NS][DDC_L], him [NS][DDC_L];
  int  dac_n = 0;

  initial begin
    real s, t, w;
    s = 0.0;
    for (int n = 0; n < DDC_L; n++) begin
      t = n - (DDC_L - 1) / 2.0;
      ddc_h[n] = (t == 0.0) ? 0.5 : $sin(2.0 * PI * 0.25 * t) / (PI * t);
      w = 0.42 - 0.5 * $cos(2.0 * PI * n / (DDC_L - 1)) + 0.08 * $cos(4.0 * PI * n / (DDC_L - 1));
      ddc_h[n] *= w;
      s += ddc_h[n];
    end
    for (int n = 0; n < DDC_L; n++) ddc_h[n] /= s;
  end

  function automatic int rnd16(input real v);
    int r;
    r = $rtoi($floor(v + 0.5));
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  always @(negedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NR; r++) begin adc_valid[r] = 0; adc_in[r] = '0; end
      for (int s = 0; s < NS; s++) for (int i = 0; i < DDC_L; i++) begin hre[s][i] = 0.0; him[s][i] = 0.0; end
    end else begin
      for (int s = 0; s < NS; s++) begin
        real xi, xq;
        xi = real'(dac_out[s].re);
        xq = real'(dac_out[s].im);
        if (s >= 3) begin   // analog IQ imbalance of subbands 3 and 4
          real q;
          q  = G_ERR * ($sin(PH_ERR) * xi + $cos(PH_ERR) * xq);
          xq = q;
        end
        for (int i = DDC_L - 1; i > 0; i--) begin hre[s][i] = hre[s][i-1]; him[s][i] = him[s][i-1]; end
        hre[s][0] = xi; him[s][0] = xq;
      end
      if (dac_n % 2 == 0) begin
        for (int s = 0; s < NS; s++) begin
          real lr, li, ur, ui, vr, vi;
          lr = 0.0; li = 0.0; ur = 0.0; ui = 0.0;
          for (int i = 0; i < DDC_L; i++) begin
            int q;
            q = (dac_n - i) & 3;   // exp(+j*pi*m/2) = j^m for sample m = dac_n - i
            vr = hre[s][i]; vi = him[s][i];
            case (q)
              0: begin lr += ddc_h[i] * vr;  li += ddc_h[i] * vi;  ur += ddc_h[i] * vr;  ui += ddc_h[i] * vi;  end
              1: begin lr += ddc_h[i] * -vi; li += ddc_h[i] * vr;  ur += ddc_h[i] * vi;  ui += ddc_h[i] * -vr; end
              2: begin lr += ddc_h[i] * -vr; li += ddc_h[i] * -vi; ur += ddc_h[i] * -vr; ui += ddc_h[i] * -vi; end
              default: begin lr += ddc_h[i] * vi; li += ddc_h[i] * -vr; ur += ddc_h[i] * -vi; ui += ddc_h[i] * vr; end
            endcase
          end
          adc_valid[2*s] = 1;   adc_in[2*s].re = 16'(rnd16(lr));   adc_in[2*s].im = 16'(rnd16(li));
          adc_valid[2*s+1] = 1; adc_in[2*s+1].re = 16'(rnd16(ur)); adc_in[2*s+1].im = 16'(rnd16(ui));
        end
      end else begin
        for (int r = 0; r < NR; r++) adc_valid[r] = 0;
      end
      dac_n++;
    end
  end

  // ---------------- channel output monitor ----------------
  always @(negedge clk) begin
    if (rst_n && measuring) begin
      for (int r = 0; r < NR; r++) begin
        for (int b = 0; b < 2; b++) begin
          chan_smp_t o;
          o = (b == 0) ? ch_a[r] : ch_b[r];
          if (o.valid) begin
            int k;
            real m;
            k = int'(o.chan);
            m = $sqrt(real'(o.s.re) ** 2 + real'(o.s.im) ** 2);
            msum[r][b][k] += m;
            mcnt[r][b][k]++;
            if (m < mmin[r][b][k]) mmin[r][b][k] = m;
            if (m > mmax[r][b][k]) mmax[r][b][k] = m;
          end
        end
      end
    end
  end

  // ---------------- test sequence ----------------
  initial begin
    int  lb [40], lk [40];     // channel list L: bank, signed channel
    real d [NS][40];
    iq_coef_t cc;
    cfg = '0;
    for (int i = 0; i < 20; i++) begin lb[i] = 0; lk[i] = i - 10; end
    for (int i = 0; i < 20; i++) begin lb[20+i] = 1; lk[20+i] = i - 10; end
    for (int r = 0; r < NR; r++) for (int b = 0; b < 2; b++) for (int k = 0; k < M; k++) begin
      kind[r][b][k] = 0; eamp[r][b][k] = 0.0;
      msum[r][b][k] = 0.0; mcnt[r][b][k] = 0; mmin[r][b][k] = 1.0e9; mmax[r][b][k] = 0.0;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;

    for (int s = 0; s < NS; s++) begin
      real a;
      a = (s >= 3) ? 700.0 : 380.0;
      for (int t = 0; t < 40; t++) begin
        real g, gm, fl, fu, dn;
        int kl, km, bm;
        d[s][t] = ($signed($urandom_range(0, 3000)) - 1500) / 1000.0;
        // lower sideband tone t
        g  = (real'(lk[t]) + 0.5 * lb[t]) * FCH + d[s][t];
        fl = g - 250.0;
        // mirror (image position) in the upper sideband: tone 40 + t
        bm = lb[t];
        km = (lb[t] == 0) ? -lk[t] : -lk[t] - 1;
        gm = -g;
        fu = gm + 250.0;
        wr(s, t, fword(fl, 1000.0));
        wr(s, 40 + t, fword(fu, 1000.0));
        // subband 1 tone 20 (bank B channel -10, next to the mistuned tone 0) stays off
        wr(s, 128 + t, (s == 1 && t == 20) ? 32'd0 : {15'd0, (s == 0 && t == 5), 16'($rtoi(a))});
        wr(s, 128 + 40 + t, (s >= 3) ? 32'd0 : 32'($rtoi(a)));
        // NCOs of the two streams
        kl = (lk[t] + M) % M;
        dn = d[s][t];
        if (s == 1 && t == 0) dn = dn + 5.0;
        wr(2 * NS + 2 * s, lb[t] * 64 + kl, fword(dn, FCH));
        wr(2 * NS + 2 * s + 1, bm * 64 + (km + M) % M, fword(-d[s][t], FCH));
        // expectations
        kind[2*s][lb[t]][kl] = (s == 0 && t == 5) ? 2 : (s == 1 && t == 0) ? 3 : (s == 1 && t == 20) ? 0 : 1;
        // subband 3 keeps the imbalance: the tone is scaled by |(1 + g*exp(j*ph))/2|
        eamp[2*s][lb[t]][kl] = (s == 3) ? a * $sqrt((1.0 + G_ERR * $cos(PH_ERR)) ** 2 + (G_ERR * $sin(PH_ERR)) ** 2) / 2.0 : a;
        kind[2*s+1][bm][(km + M) % M] = (s == 3) ? 4 : (s == 4) ? 5 : 1;
        eamp[2*s+1][bm][(km + M) % M] = a;
      end
    end
    // amplitude modulation of subband 0: 500 kHz, depth 0.3
    wr(0, 256 + 0, fword(0.5, 1000.0));
    wr(0, 256 + 1, 32'd9830);
    // IQ correction of subband 4: inverse of the imbalance
    cc.ii = 16'sd16384;
    cc.iq = 16'sd0;
    cc.qi = 16'($rtoi($floor(-$tan(PH_ERR) * 16384.0 + 0.5)));
    cc.qq = 16'($rtoi($floor(16384.0 / (G_ERR * $cos(PH_ERR)) + 0.5)));
    wr(NS + 4, 0, 32'(cc.ii));
    wr(NS + 4, 1, 32'(cc.iq));
    wr(NS + 4, 2, 32'($signed(cc.qi)));
    wr(NS + 4, 3, 32'(cc.qq));
    // restart all tone phases
    for (int s = 0; s < NS; s++) wr(s, 256 + 2, 0);

    repeat (T_SETTLE) @(negedge clk);
    measuring = 1;
    repeat (T_MEAS) @(negedge clk);
    measuring = 0;

    // ---------------- evaluation ----------------
    for (int r = 0; r < NR; r++) for (int b = 0; b < 2; b++) for (int k = 0; k < M; k++) begin
      real avg, a;
      if (kind[r][b][k] == 0) continue;
      a = eamp[r][b][k];
      check(mcnt[r][b][k] > 0, $sformatf("no samples r%0d b%0d k%0d", r, b, k));
      if (mcnt[r][b][k] == 0) continue;
      avg = msum[r][b][k] / mcnt[r][b][k];
      case (kind[r][b][k])
        1: begin
             check(fabs(avg - a) < 0.03 * a && mmax[r][b][k] - mmin[r][b][k] < 0.05 * a,
                   $sformatf("tone r%0d b%0d k%0d: mean %0.1f (min %0.1f max %0.1f) expected %0.1f",
                             r, b, k, avg, mmin[r][b][k], mmax[r][b][k], a));
             n_tone_dc++;
             if (b == 0) n_bank_a++; else n_bank_b++;
           end
        2: begin
             check(mmax[r][b][k] > 1.4 * mmin[r][b][k],
                   $sformatf("AM tone r%0d: min %0.1f max %0.1f", r, mmin[r][b][k], mmax[r][b][k]));
             n_am++;
           end
        3: begin
             check(mmax[r][b][k] < 0.05 * a, $sformatf("LPF reject r%0d: max %0.1f", r, mmax[r][b][k]));
             n_lpf++;
           end
        4: begin
             check(avg > a * 0.0178, $sformatf("uncorrected image r%0d b%0d k%0d: %0.2f", r, b, k, avg));
             n_iq_uncorr++;
           end
        default: begin
             check(avg < a * 0.01, $sformatf("corrected image r%0d b%0d k%0d: %0.2f", r, b, k, avg));
             n_iq_corr++;
           end
      endcase
    end
    for (int s = 0; s < NS; s++) check(dac_valid[s], "DAC valid");
    check(n_tone_dc > 0, "no tone demodulated to DC");
    check(n_bank_a > 0, "bank A never used");
    check(n_bank_b > 0, "bank B never used");
    check(n_am > 0, "amplitude modulation never seen");
    check(n_lpf > 0, "lowpass rejection never seen");
    check(n_iq_uncorr > 0, "uncorrected image never measured");
    check(n_iq_corr > 0, "corrected image never measured");
    $display("mechanisms: tone_dc=%0d bank_a=%0d bank_b=%0d am=%0d lpf_reject=%0d iq_uncorr=%0d iq_corr=%0d",
             n_tone_dc, n_bank_a, n_bank_b, n_am, n_lpf, n_iq_uncorr, n_iq_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
