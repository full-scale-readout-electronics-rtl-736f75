// chan_nco_lpf_tb: checks the time-multiplexed per-channel NCO and 1.6 MHz
// lowpass at the default size (32 channels, 32 taps).
//
// Each of the 32 channels carries its own complex tone (random offset within
// +-6 MHz at the 15.625 MHz channel rate). The NCO of most channels is set to
// the tone frequency, so the tone must come out at DC with unit gain; channel
// 7 is mistuned by 5 MHz (the lowpass must suppress it by 50 dB), channel 9
// by 0.2 MHz (must pass within 2 %). Every output sample is also compared
// with a floating-point model: mix with exp(-j*2*pi*idx/1024), idx the top
// 10 bits of n*inc, then the Blackman-windowed sinc FIR recomputed here
// (tolerance 4 LSB). The output must follow the input by two clocks with the
// same channel index. Inputs come with random gaps.
module chan_nco_lpf_tb;
  import echo_pkg::*;
  localparam int  NCH = 32;
  localparam int  NTAPS = 32;
  localparam real FCH = 15.625;
  localparam int  NBLK = 120;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_chan = '0;
  logic [31:0] cfg_inc = '0;
  chan_smp_t in, out;
  always #1 clk = ~clk;

  chan_nco_lpf dut (.clk, .rst_n, .cfg_we, .cfg_chan, .cfg_inc, .in, .out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  real h [NTAPS];
  real ftone [NCH], fnco [NCH], amp [NCH];
  logic [31:0] inc [NCH];
  int  nsmp [NCH];                    // samples sent per channel
  real mr [NCH][$], mi [NCH][$];      // model: mixed samples per channel
  // expected outputs in flight: valid, chan, re, im
  bit  pv [2]; int pc [2]; real pr [2], pi [2];
  real last_mag [NCH];

  initial begin
    real s, t, w, fc;
    fc = 1.6 / FCH;
    s = 0.0;
    for (int n = 0; n < NTAPS; n++) begin
      t = n - (NTAPS - 1) / 2.0;
      h[n] = (t == 0.0) ? 2.0 * fc : $sin(2.0 * PI * fc * t) / (PI * t);
      w = 0.42 - 0.5 * $cos(2.0 * PI * n / (NTAPS - 1)) + 0.08 * $cos(4.0 * PI * n / (NTAPS - 1));
      h[n] *= w;
      s += h[n];
    end
    for (int n = 0; n < NTAPS; n++) h[n] /= s;
  end

  // model of one sample of channel c: returns expected filter output
  task automatic model(input int c, input int xr, input int xi, output real yr, output real yi);
    logic [31:0] ph;
    real a;
    ph = 32'(nsmp[c]) * inc[c];
    a = 2.0 * PI * real'(ph[31:22]) / 1024.0;
    mr[c].push_front(real'(xr) * $cos(a) * 32767.0 / 32768.0 + real'(xi) * $sin(a) * 32767.0 / 32768.0);
    mi[c].push_front(real'(xi) * $cos(a) * 32767.0 / 32768.0 - real'(xr) * $sin(a) * 32767.0 / 32768.0);
    yr = 0.0; yi = 0.0;
    for (int i = 0; i < NTAPS && i < mr[c].size(); i++) begin
      yr += h[i] * mr[c][i];
      yi += h[i] * mi[c][i];
    end
    nsmp[c]++;
  endtask

  int npass = 0;
  initial begin
    in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      ftone[c] = ($signed($urandom_range(0, 12000)) - 6000) / 1000.0;
      fnco[c]  = ftone[c];
      amp[c]   = 5000.0 + real'($urandom_range(0, 20000));
      nsmp[c]  = 0;
    end
    fnco[7] = ftone[7] - 5.0;
    fnco[9] = ftone[9] - 0.2;
    for (int c = 0; c < NCH; c++) begin
      inc[c] = 32'($rtoi($floor(fnco[c] / FCH * 4294967296.0)) & 64'hffff_ffff);
      @(negedge clk);
      cfg_we = 1; cfg_chan = 6'(c); cfg_inc = inc[c];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int m = 0; m < NBLK; m++) begin
      for (int c = 0; c < NCH; c++) begin
        int xr, xi;
        real a, yr, yi;
        while ($urandom_range(0, 4) == 0) begin
          in.valid = 0;
          @(negedge clk);
        end
        a = 2.0 * PI * ftone[c] / FCH * m;
        xr = $rtoi($floor(amp[c] * $cos(a) + 0.5));
        xi = $rtoi($floor(amp[c] * $sin(a) + 0.5));
        in.valid = 1; in.chan = 6'(c); in.s.re = 16'(xr); in.s.im = 16'(xi);
        model(c, xr, xi, yr, yi);
        pv[0] = 1; pc[0] = c; pr[0] = yr; pi[0] = yi;
        @(negedge clk);
      end
    end
    in.valid = 0;
    repeat (4) @(negedge clk);
    // steady-state behaviour
    for (int c = 0; c < NCH; c++) begin
      if (c == 7) check(last_mag[c] < amp[c] * 0.00316, $sformatf("ch7 residual %0.1f of %0.1f", last_mag[c], amp[c]));
      else begin
        check(fabs(last_mag[c] - amp[c]) < 0.02 * amp[c], $sformatf("ch%0d mag %0.1f of %0.1f", c, last_mag[c], amp[c]));
        npass++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pipeline of expected values: an input driven before a falling edge is on
  // the output two falling edges later
  bit  ev [3]; int ec [3]; real er [3], ei [3];
  always @(negedge clk) begin
    if (rst_n) begin
      check(out.valid == ev[1], $sformatf("out.valid %0d expected %0d", out.valid, ev[1]));
      if (ev[1]) begin
        check(int'(out.chan) == ec[1], "channel index");
        check(fabs(real'(out.s.re) - er[1]) <= 4.0 && fabs(real'(out.s.im) - ei[1]) <= 4.0,
              $sformatf("ch %0d got %0.0f,%0.0f exp %0.1f,%0.1f", ec[1], real'(out.s.re), real'(out.s.im), er[1], ei[1]));
        last_mag[ec[1]] = $sqrt(real'(out.s.re) ** 2 + real'(out.s.im) ** 2);
      end
      ev[1] = ev[0]; ec[1] = ec[0]; er[1] = er[0]; ei[1] = ei[0];
      ev[0] = in.valid; ec[0] = pc[0]; er[0] = pr[0]; ei[0] = pi[0];
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
