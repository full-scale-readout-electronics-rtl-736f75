// tone_gen_tb: checks the 80-tone comb generator at its default size.
//
// All 80 tones get random frequency words and amplitudes (sum below full
// scale), five of them amplitude modulation. After a phase sync, output
// sample j must equal
//     sum_t a_t(j) * exp(j*2*pi*idx_t(j)/1024),  idx_t(j) = top 10 bits of j*inc_t,
//     a_t(j) = amp_t * (1 + depth/2^15 * sin(2*pi*idx_am(j)/1024))   (AM tones)
// computed here in floating point (tolerance 8 LSB). One sample per clock
// is checked (out_valid every clock). A last part sets large amplitudes and
// checks that the output saturates and clip is raised.
module tone_gen_tb;
  import echo_pkg::*;
  localparam int NT = 80;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [8:0] cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  logic out_valid, clip;
  cplx_t out;
  always #1 clk = ~clk;

  tone_gen dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .out_valid, .out, .clip);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask
  function automatic real fabs(input real v); return (v < 0.0) ? -v : v; endfunction

  logic [31:0] inc [NT];
  int          amp [NT];
  bit          am  [NT];
  logic [31:0] am_inc;
  int          depth;

  task automatic wr(input logic [8:0] a, input logic [31:0] d);
    // driven on falling edges, sampled by the DUT on the rising edge between
    @(negedge clk);
    cfg_we = 1; cfg_addr = a; cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic real idx_ang(input logic [31:0] ph);
    return 2.0 * PI * real'(ph[31:22]) / 1024.0;
  endfunction

  task automatic run_check(input int nsmp, input real tol);
    // sync, then compare nsmp samples taken at the falling edges
    wr({2'd2, 7'd2}, 0);       // phases are 0 from the next rising edge on
    for (int j = 0; j < nsmp; j++) begin
      real er, ei, a, f;
      logic [31:0] ph;
      @(negedge clk);
      er = 0.0; ei = 0.0;
      ph = 32'(j) * am_inc;
      f = 1.0 + real'(depth) / 32768.0 * $sin(idx_ang(ph)) * 32767.0 / 32768.0;
      for (int t = 0; t < NT; t++) begin
        ph = 32'(j) * inc[t];
        a = am[t] ? real'(amp[t]) * f : real'(amp[t]);
        er += a * $cos(idx_ang(ph)) * 32767.0 / 32768.0;
        ei += a * $sin(idx_ang(ph)) * 32767.0 / 32768.0;
      end
      if (er > 32767.0) er = 32767.0;
      if (er < -32768.0) er = -32768.0;
      if (ei > 32767.0) ei = 32767.0;
      if (ei < -32768.0) ei = -32768.0;
      check(out_valid, "out_valid");
      check(fabs(real'(out.re) - er) <= tol && fabs(real'(out.im) - ei) <= tol,
            $sformatf("sample %0d got %0d,%0d exp %0.1f,%0.1f", j, out.re, out.im, er, ei));
    end
  endtask

  int nclip;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < NT; t++) begin
      inc[t] = $urandom();
      amp[t] = $urandom_range(0, 300);
      am[t]  = (t % 16 == 3);
      wr({2'd0, 7'(t)}, inc[t]);
      wr({2'd1, 7'(t)}, {15'd0, am[t], 16'(amp[t])});
    end
    am_inc = 32'h0123_4567;
    depth  = 16000;
    wr({2'd2, 7'd0}, am_inc);
    wr({2'd2, 7'd1}, 32'(depth));
    run_check(600, 8.0);
    // large amplitudes: saturation and clip
    for (int t = 0; t < 8; t++) begin
      amp[t] = 30000; am[t] = 0;
      wr({2'd1, 7'(t)}, 32'(amp[t]));
    end
    nclip = 0;
    fork
      run_check(200, 8.0);
      repeat (202) @(posedge clk) if (clip) nclip++;
    join
    check(nclip > 10, $sformatf("clip raised %0d times", nclip));
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
