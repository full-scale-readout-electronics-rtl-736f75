// freq_shift_tb: checks the half-channel frequency shifter. Random samples
// with a random valid pattern go in; every output is compared with
// in[n] * exp(-j*pi*n/M) computed in floating point (n counts accepted
// samples, tolerance 2.5 LSB), and out_valid must follow in_valid by one
// clock. A second part feeds a tone at the shifted channel centre
// (k + 1/2)/M and checks it comes out at k/M: the output must then equal
// A*exp(+j*2*pi*k*n/M).
module freq_shift_tb;
  import echo_pkg::*;
  localparam int M = 32;

  logic clk = 0, rst_n = 0, in_valid = 0;
  cplx_t in, out;
  logic out_valid;
  always #1 clk = ~clk;

  freq_shift dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  int n = 0;             // accepted samples
  real er, ei;           // expected output of the last accepted sample
  logic exp_valid = 0;
  int mode = 0;          // 0 random, 1 tone
  int exp_mode = 0;      // mode of the sample now at the output

  initial begin
    real a;
    int ns;
    ns = 0;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 800; i++) begin
      @(posedge clk);
      mode <= (i >= 400) ? 1 : 0;
      if ($urandom_range(0, 2) != 0) begin
        in_valid <= 1;
        if (i < 400) begin
          in.re <= 16'($signed($urandom_range(0, 44000)) - 22000);
          in.im <= 16'($signed($urandom_range(0, 44000)) - 22000);
        end else begin
          a = 2.0 * PI * (3 + 0.5) * ns / M;
          in.re <= 16'($rtoi($floor(20000.0 * $cos(a) + 0.5)));
          in.im <= 16'($rtoi($floor(20000.0 * $sin(a) + 0.5)));
        end
        ns++;
      end else in_valid <= 0;
      // checking happens at the negedge below
    end
    @(posedge clk); in_valid <= 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: sample the inputs at the clock edge, compare one clock later
  always @(posedge clk) begin
    if (rst_n) begin
      check(out_valid == exp_valid, "out_valid does not follow in_valid");
      if (exp_valid)
        check(fabs(real'(out.re) - er) <= 2.5 && fabs(real'(out.im) - ei) <= 2.5,
              $sformatf("n=%0d got %0d,%0d exp %0.1f,%0.1f", n, out.re, out.im, er, ei));
      exp_valid <= in_valid;
      exp_mode  <= mode;
      if (in_valid) begin
        real c, s;
        c = $cos(-PI * n / M); s = $sin(-PI * n / M);
        er <= real'(in.re) * c - real'(in.im) * s;
        ei <= real'(in.re) * s + real'(in.im) * c;
        n <= n + 1;
      end
    end
  end

  // tone part: the shifted tone must sit at 3/M
  always @(posedge clk) begin
    if (rst_n && exp_valid && exp_mode == 1) begin
      real tr, ti;
      tr = 20000.0 * $cos(2.0 * PI * 3.0 * (n - 1) / M);
      ti = 20000.0 * $sin(2.0 * PI * 3.0 * (n - 1) / M);
      check(fabs(real'(out.re) - tr) <= 3.0 && fabs(real'(out.im) - ti) <= 3.0,
            $sformatf("shifted tone n=%0d got %0d,%0d exp %0.1f,%0.1f", n - 1, out.re, out.im, tr, ti));
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
