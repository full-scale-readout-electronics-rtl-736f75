// pfb_channelizer_tb: self-checking test of the 32-channel polyphase
// channelizer at its default size (M = 32, T = 16).
//
// The reference is the channelizer's defining sum, evaluated in floating
// point with the prototype filter recomputed here:
//     y_k[m] = sum_n h[n] * exp(+j*2*pi*k*n/M) * x[m*M - n],  x[n<0] = 0,
// where block m closes on input sample m*M. Every output sample is compared
// with it (tolerance 4 LSB). Phase 1 drives random samples with a random
// valid pattern; phase 2 drives a tone at the centre of channel 5 with one
// valid sample every other clock (500 MS/s into a 1 GHz clock) and checks
// that every channel not adjacent to it is at least 55 dB down. The timing
// checks are: bin k of a block leaves k+2 clocks after the closing sample,
// and bins leave one per clock.
module pfb_channelizer_tb;
  import echo_pkg::*;

  localparam int M = 32;
  localparam int T = 16;
  localparam int L = M * T;
  localparam int NBLK1 = 24;
  localparam int NBLK2 = 40;
  localparam int TONE_K = 5;
  localparam real TONE_A = 12000.0;

  logic clk = 0, rst_n = 0, in_valid = 0;
  cplx_t in;
  chan_smp_t out;
  always #1 clk = ~clk;

  pfb_channelizer dut (.clk, .rst_n, .in_valid, .in, .out);

  int checks = 0, failures = 0;
  real h [L];
  real xr [$], xi [$];
  int  close_cyc [$];
  int  cyc = 0;
  int  nout = 0;
  localparam int phase2_start_blk = NBLK1;
  real worst_xt = -200.0;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    real s, t, w;
    s = 0.0;
    for (int n = 0; n < L; n++) begin
      t = n - (L - 1) / 2.0;
      h[n] = (t == 0.0) ? 1.0 / M : $sin(PI * t / M) / (PI * t);
      w = 0.42 - 0.5 * $cos(2.0 * PI * n / (L - 1)) + 0.08 * $cos(4.0 * PI * n / (L - 1));
      h[n] *= w;
      s += h[n];
    end
    for (int n = 0; n < L; n++) h[n] /= s;
  end

  function automatic void ref_bin(input int m, input int k, output real yr, output real yi);
    real a, c, sn, vr, vi;
    int idx;
    yr = 0.0; yi = 0.0;
    for (int n = 0; n < L; n++) begin
      idx = m * M - n;
      if (idx < 0) break;
      a = 2.0 * PI * k * n / M;
      c = $cos(a); sn = $sin(a);
      vr = xr[idx]; vi = xi[idx];
      yr += h[n] * (vr * c - vi * sn);
      yi += h[n] * (vr * sn + vi * c);
    end
  endfunction

  always @(posedge clk) cyc <= cyc + 1;

  // stimulus
  initial begin
    int n;
    in = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    n = 0;
    // phase 1: random data, random valid
    while (n < NBLK1 * M) begin
      @(posedge clk);
      if ($urandom_range(0, 3) != 0) begin
        in_valid <= 1;
        in.re <= 16'($signed($urandom_range(0, 20000)) - 10000);
        in.im <= 16'($signed($urandom_range(0, 20000)) - 10000);
        n++;
      end else in_valid <= 0;
    end
    // phase 2: tone at the centre of channel TONE_K, valid every other clock
    while (n < (NBLK1 + NBLK2) * M) begin
      @(posedge clk);
      if (in_valid == 0) begin
        in_valid <= 1;
        in.re <= 16'($rtoi($floor(TONE_A * $cos(2.0 * PI * TONE_K * n / M) + 0.5)));
        in.im <= 16'($rtoi($floor(TONE_A * $sin(2.0 * PI * TONE_K * n / M) + 0.5)));
        n++;
      end else in_valid <= 0;
    end
    @(posedge clk);
    in_valid <= 0;
    repeat (3 * M) @(posedge clk);
    check(nout == (NBLK1 + NBLK2) * M, $sformatf("output count %0d", nout));
    $display("worst crosstalk of non-adjacent channels: %0.1f dB", worst_xt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // record accepted inputs and block-closing cycles
  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      xr.push_back(real'(in.re));
      xi.push_back(real'(in.im));
      if ((xr.size() - 1) % M == 0) close_cyc.push_back(cyc);
    end
  end

  // compare outputs
  always @(posedge clk) begin
    if (rst_n && out.valid) begin
      int m, k;
      real yr, yi, mag, db;
      m = nout / M;
      k = nout % M;
      ref_bin(m, k, yr, yi);
      check(out.chan == 6'(k), $sformatf("chan %0d expected %0d", out.chan, k));
      check(fabs(real'(out.s.re) - yr) <= 4.0 && fabs(real'(out.s.im) - yi) <= 4.0,
            $sformatf("blk %0d bin %0d: got %0d,%0d ref %0.1f,%0.1f", m, k, out.s.re, out.s.im, yr, yi));
      // latency: bin k leaves k+2 clocks after the closing sample
      check(cyc == close_cyc[m] + k + 2, $sformatf("blk %0d bin %0d at cycle %0d, closed %0d", m, k, cyc, close_cyc[m]));
      // crosstalk once the tone fills the whole filter
      if (m >= phase2_start_blk + T + 1) begin
        mag = $sqrt(real'(out.s.re) ** 2 + real'(out.s.im) ** 2);
        if (k == TONE_K) check(fabs(mag - TONE_A) < 0.01 * TONE_A, $sformatf("tone channel amplitude %0.1f", mag));
        else if (k != TONE_K - 1 && k != TONE_K + 1) begin
          db = 20.0 * $log10((mag + 0.5) / TONE_A);
          if (db > worst_xt) worst_xt = db;
          check(db < -55.0, $sformatf("crosstalk in channel %0d: %0.1f dB", k, db));
        end
      end
      nout++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
