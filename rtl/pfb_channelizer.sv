// pfb_channelizer: critically sampled polyphase filter bank that splits one
// complex baseband stream (500 MS/s in the described system) into M = 32
// equidistant channels and emits them time-multiplexed, one channel sample
// per clock.
//
// How it works. Channel k is the input filtered by the prototype lowpass h
// shifted to k/M cycles/sample and decimated by M:
//     y_k[m] = sum_n h[n] * exp(+j*2*pi*k*n/M) * x[m*M - n]
// With n = p + M*q this splits into M polyphase branches
//     v_p[m] = sum_q h[p + M*q] * x[m*M - p - M*q]      (T taps each)
//     y_k[m] = sum_p exp(+j*2*pi*k*p/M) * v_p[m]         (M-point inverse DFT)
// Each accepted input sample completes one branch: sample m*M - p is the
// newest one branch p needs, so branches finish in the order p = M-1 ... 0
// and a block closes on the sample where the input counter wraps to 0. The
// closed block of M branch sums is copied to a second buffer, from which a
// direct DFT produces one bin per clock, k = 0 ... M-1, while the next block
// is being collected. The unit gain of the prototype (sum h = 1) gives a tone
// at a channel centre the same amplitude at that channel's output.
//
// Interface: in/in_valid carry the input stream (any duty cycle; one valid
// sample per clock at most). out carries {valid, chan = k, sample}. Bin k of
// a block is on out k+2 clocks after the input sample that closed the block.
// With one input per clock the output is busy every clock.
//
// Prototype filter: Blackman-windowed sinc of L = M*T taps with cutoff
// 1/(2M) cycles/sample (half the channel spacing), 18-bit coefficients.
// The description gives the channel count (32), the input rate (500 MS/s)
// and an 11 MHz passband; filter length, window, coefficient width and the
// direct (not FFT) DFT are this design's choices. With T = 16 the flat part
// of each channel is about +-5 MHz wide around its centre at 500 MS/s.
module pfb_channelizer
  import echo_pkg::*;
#(
  parameter int M         = NCHAN,  // channels
  parameter int T         = 16,     // taps per polyphase branch
  parameter int COEF_W    = 18,
  parameter int COEF_FRAC = 21      // sum of prototype taps = 2^COEF_FRAC
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  cplx_t     in,
  output chan_smp_t out
);
  localparam int L    = M * T;
  localparam int MW   = $clog2(M);
  localparam int VW   = SAMPLE_W + COEF_W + $clog2(T) + 1;   // branch sum width
  localparam int TW_A = 32767;                               // twiddle amplitude (Q15)
  localparam int SHIFT = COEF_FRAC + 15;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [VW-1:0]     vsum_t;
  typedef logic signed [16:0]       tw_t;

  function automatic coef_t [L-1:0] mk_proto();
    coef_t [L-1:0] r;
    real s;
    s = wsinc_sum(L, 1.0 / (2.0 * M));
    for (int n = 0; n < L; n++) r[n] = coef_t'(wsinc_tap(n, L, 1.0 / (2.0 * M), COEF_FRAC, s));
    return r;
  endfunction

  function automatic tw_t [M-1:0] mk_cos();
    tw_t [M-1:0] r;
    for (int i = 0; i < M; i++) r[i] = tw_t'(sin_entry((i + M / 4) % M, M, real'(TW_A)));
    return r;
  endfunction

  function automatic tw_t [M-1:0] mk_sin();
    tw_t [M-1:0] r;
    for (int i = 0; i < M; i++) r[i] = tw_t'(sin_entry(i, M, real'(TW_A)));
    return r;
  endfunction

  localparam coef_t [L-1:0] H    = mk_proto();
  localparam tw_t   [M-1:0] TCOS = mk_cos();
  localparam tw_t   [M-1:0] TSIN = mk_sin();

  // ---------------- polyphase branches ----------------
  cplx_t          dl [L-1];         // dl[i] = x[n-1-i]
  logic [MW-1:0]  cnt;              // input sample index mod M
  logic [MW-1:0]  br;               // branch completed by the current sample
  vsum_t          v_re, v_im;
  vsum_t          vb_re [M];        // branches of the block being collected
  vsum_t          vb_im [M];
  vsum_t          db_re [M];        // closed block, read by the DFT
  vsum_t          db_im [M];
  logic           dft_run;
  logic [MW-1:0]  k;

  assign br = MW'(M) - cnt;         // (M - cnt) mod M

  always_comb begin
    logic signed [SAMPLE_W-1:0] xr, xi;
    v_re = '0;
    v_im = '0;
    for (int q = 0; q < T; q++) begin
      xr = (q == 0) ? in.re : dl[M*q-1].re;
      xi = (q == 0) ? in.im : dl[M*q-1].im;
      v_re += vsum_t'(xr) * vsum_t'(H[int'(br) + M*q]);
      v_im += vsum_t'(xi) * vsum_t'(H[int'(br) + M*q]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < L-1; i++) dl[i] <= '0;
      for (int i = 0; i < M; i++) begin
        vb_re[i] <= '0; vb_im[i] <= '0;
        db_re[i] <= '0; db_im[i] <= '0;
      end
      cnt     <= '0;
      dft_run <= 1'b0;
      k       <= '0;
    end else begin
      if (in_valid) begin
        dl[0] <= in;
        for (int i = 1; i < L-1; i++) dl[i] <= dl[i-1];
        cnt <= cnt + 1'b1;
        vb_re[br] <= v_re;
        vb_im[br] <= v_im;
      end
      // close the block: branch 0 is the last one of a block
      if (in_valid && br == '0) begin
        for (int i = 1; i < M; i++) begin
          db_re[i] <= vb_re[i];
          db_im[i] <= vb_im[i];
        end
        db_re[0] <= v_re;
        db_im[0] <= v_im;
        dft_run  <= 1'b1;
        k        <= '0;
      end else if (dft_run) begin
        k <= k + 1'b1;
        if (k == MW'(M-1)) dft_run <= 1'b0;
      end
    end
  end

  // ---------------- inverse DFT, one bin per clock ----------------
  logic signed [63:0] acc_re, acc_im;
  always_comb begin
    logic [MW-1:0] ti;
    acc_re = '0;
    acc_im = '0;
    for (int p = 0; p < M; p++) begin
      ti = MW'(int'(k) * p);
      acc_re += 64'(db_re[p]) * 64'(TCOS[ti]) - 64'(db_im[p]) * 64'(TSIN[ti]);
      acc_im += 64'(db_re[p]) * 64'(TSIN[ti]) + 64'(db_im[p]) * 64'(TCOS[ti]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out <= '0;
    end else begin
      out.valid <= dft_run;
      out.chan  <= 6'(k);
      out.s.re  <= sat16((acc_re + (64'sd1 <<< (SHIFT-1))) >>> SHIFT);
      out.s.im  <= sat16((acc_im + (64'sd1 <<< (SHIFT-1))) >>> SHIFT);
    end
  end

  // The DFT must finish a block before the next one closes.
  always_ff @(posedge clk) begin
    if (rst_n && in_valid && br == '0 && dft_run)
      a_no_overrun: assert (k == MW'(M-1))
        else $error("pfb_channelizer: block closed while DFT still running");
  end
endmodule
