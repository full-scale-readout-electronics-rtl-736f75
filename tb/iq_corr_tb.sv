// iq_corr_tb: checks the IQ correction matrix. Random Q2.14 matrices and
// random samples are applied; every output is compared, one clock later,
// with round(M * [I;Q]) computed in floating point and saturated to 16 bits
// (tolerance 1 LSB). The identity matrix must pass samples unchanged, and a
// matrix with gain 2 must saturate.
module iq_corr_tb;
  import echo_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_coef_t coef;
  cplx_t in, out;
  always #1 clk = ~clk;

  iq_corr dut (.clk, .rst_n, .coef, .in_valid, .in, .out_valid, .out);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction
  function automatic real satr(input real v);
    if (v > 32767.0) return 32767.0;
    if (v < -32768.0) return -32768.0;
    return v;
  endfunction

  real er, ei;
  logic ev = 0;
  int nsat = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      check(out_valid == ev, "out_valid");
      check(fabs(real'(out.re) - er) <= 1.0 && fabs(real'(out.im) - ei) <= 1.0,
            $sformatf("got %0d,%0d exp %0.1f,%0.1f", out.re, out.im, er, ei));
      if (er == 32767.0 || er == -32768.0) nsat++;
      ev <= in_valid;
      er <= satr((real'(coef.ii) * real'(in.re) + real'(coef.iq) * real'(in.im)) / 16384.0);
      ei <= satr((real'(coef.qi) * real'(in.re) + real'(coef.qq) * real'(in.im)) / 16384.0);
    end
  end

  initial begin
    coef = IQ_IDENTITY;
    in = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 1200; i++) begin
      @(posedge clk);
      if (i < 200) coef <= IQ_IDENTITY;
      else if (i < 1000) begin
        if (i % 50 == 0) begin
          coef.ii <= 16'(16384 + $signed($urandom_range(0, 3000)) - 1500);
          coef.iq <= 16'($signed($urandom_range(0, 3000)) - 1500);
          coef.qi <= 16'($signed($urandom_range(0, 3000)) - 1500);
          coef.qq <= 16'(16384 + $signed($urandom_range(0, 3000)) - 1500);
        end
      end else coef <= '{ii: 16'sd32767, iq: 16'sd0, qi: 16'sd0, qq: -16'sd32768};
      in_valid <= ($urandom_range(0, 3) != 0);
      in.re <= 16'($signed($urandom_range(0, 60000)) - 30000);
      in.im <= 16'($signed($urandom_range(0, 60000)) - 30000);
    end
    repeat (2) @(posedge clk);
    check(nsat > 20, $sformatf("saturation seen %0d times", nsat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
