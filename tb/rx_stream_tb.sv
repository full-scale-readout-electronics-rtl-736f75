// rx_stream_tb: one 500 MS/s stream (one valid sample every other clock)
// through both channelizer banks and their demodulators.
//
// Three tones go in: 47.875 MHz (bank A channel 3, +1 MHz from its centre),
// 163.5625 MHz (bank B channel 10, whose centre is 10.5*15.625 MHz, -0.5 MHz
// from it) and -62.2 MHz (bank A channel 28 = -4, +0.3 MHz). The NCOs of
// those three channels are set to the offsets. In steady state each of them
// must hold its tone at DC with its amplitude (2 %, checked on every sample)
// and drift by less than 1 % from sample to sample; channels far from every
// tone, in both banks, must stay 55 dB below the strongest tone. Bank B
// samples must leave one clock after the matching bank A samples, one
// channel sample per input.
module rx_stream_tb;
  import echo_pkg::*;
  localparam int  NIN = 3200;        // input samples
  localparam real FS  = 500.0;
  localparam real FCH = 15.625;

  logic clk = 0, rst_n = 0, in_valid = 0;
  cplx_t in;
  logic cfg_we = 0, cfg_bank = 0;
  logic [5:0] cfg_chan = '0;
  logic [31:0] cfg_inc = '0;
  chan_smp_t out_a, out_b;
  always #1 clk = ~clk;

  rx_stream dut (.clk, .rst_n, .in_valid, .in, .cfg_we, .cfg_bank, .cfg_chan, .cfg_inc, .out_a, .out_b);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  function automatic logic [31:0] incw(input real f);
    return 32'($rtoi($floor(f / FCH * 4294967296.0)));
  endfunction

  task automatic wr(input logic bank, input int ch, input logic [31:0] v);
    @(negedge clk);
    cfg_we = 1; cfg_bank = bank; cfg_chan = 6'(ch); cfg_inc = v;
    @(negedge clk);
    cfg_we = 0;
  endtask

  real f [3] = '{47.875, 163.5625, -62.2};
  real a [3] = '{8000.0, 10000.0, 6000.0};
  real mag_a [32], mag_b [32], prev_a [32], prev_b [32];
  real drift_a [32], drift_b [32];
  int  na = 0, nb = 0;
  int  last_a_cyc = -1, cyc = 0;
  bit  steady = 0;

  always @(negedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_a.valid) begin
      int k;
      real m;
      k = int'(out_a.chan);
      m = $sqrt(real'(out_a.s.re) ** 2 + real'(out_a.s.im) ** 2);
      if (steady) begin
        if (fabs(real'(out_a.s.re) - prev_a[k]) > drift_a[k]) drift_a[k] = fabs(real'(out_a.s.re) - prev_a[k]);
        if (k == 3)  check(fabs(m - a[0]) < 0.02 * a[0], $sformatf("A3 sample %0.1f", m));
        if (k == 28) check(fabs(m - a[2]) < 0.02 * a[2], $sformatf("A28 sample %0.1f", m));
      end
      prev_a[k] = real'(out_a.s.re);
      mag_a[k] = m;
      na++;
    end
    if (rst_n && out_b.valid) begin
      int k;
      real m;
      k = int'(out_b.chan);
      m = $sqrt(real'(out_b.s.re) ** 2 + real'(out_b.s.im) ** 2);
      if (steady) begin
        if (fabs(real'(out_b.s.re) - prev_b[k]) > drift_b[k]) drift_b[k] = fabs(real'(out_b.s.re) - prev_b[k]);
        if (k == 10) check(fabs(m - a[1]) < 0.02 * a[1], $sformatf("B10 sample %0.1f", m));
      end
      prev_b[k] = real'(out_b.s.re);
      mag_b[k] = m;
      nb++;
    end
  end

  // bank B one clock behind bank A
  logic a_v_d;
  always @(negedge clk) begin
    if (rst_n) begin
      check(out_b.valid == a_v_d, "bank B valid one clock after bank A");
      a_v_d <= out_a.valid;
    end
  end

  initial begin
    in = '0;
    a_v_d = 0;
    for (int k = 0; k < 32; k++) begin drift_a[k] = 0; drift_b[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(0, 3, incw(1.0));
    wr(1, 10, incw(-0.5));
    wr(0, 28, incw(0.3));
    for (int n = 0; n < NIN; n++) begin
      real re, im;
      re = 0.0; im = 0.0;
      for (int t = 0; t < 3; t++) begin
        re += a[t] * $cos(2.0 * PI * f[t] / FS * n);
        im += a[t] * $sin(2.0 * PI * f[t] / FS * n);
      end
      @(negedge clk);
      in_valid = 1; in.re = 16'($rtoi($floor(re + 0.5))); in.im = 16'($rtoi($floor(im + 0.5)));
      @(negedge clk);
      in_valid = 0;
      if (n == 2400) steady = 1;
    end
    repeat (80) @(negedge clk);
    check(na == nb && na == (NIN / 32) * 32, $sformatf("sample counts A %0d B %0d", na, nb));
    check(fabs(mag_a[3] - a[0]) < 0.02 * a[0], $sformatf("A3 %0.1f", mag_a[3]));
    check(fabs(mag_b[10] - a[1]) < 0.02 * a[1], $sformatf("B10 %0.1f", mag_b[10]));
    check(fabs(mag_a[28] - a[2]) < 0.02 * a[2], $sformatf("A28 %0.1f", mag_a[28]));
    check(drift_a[3] < 0.01 * a[0], $sformatf("A3 drift %0.1f", drift_a[3]));
    check(drift_b[10] < 0.01 * a[1], $sformatf("B10 drift %0.1f", drift_b[10]));
    check(drift_a[28] < 0.01 * a[2], $sformatf("A28 drift %0.1f", drift_a[28]));
    for (int k = 15; k < 24; k++) begin
      check(mag_a[k] < 10000.0 * 0.00178, $sformatf("A%0d crosstalk %0.1f", k, mag_a[k]));
      check(mag_b[k] < 10000.0 * 0.00178, $sformatf("B%0d crosstalk %0.1f", k, mag_b[k]));
    end
    $display("A3 %0.1f B10 %0.1f A28 %0.1f", mag_a[3], mag_b[10], mag_a[28]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
