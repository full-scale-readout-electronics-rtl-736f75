// freq_shift: shifts a complex sample stream down in frequency by half a
// channel spacing, fs/(2*M), so that a second polyphase channelizer fed with
// the shifted copy has its channel centres where the first one has its stop
// bands (between two neighbouring channels).
//
// How it works: every accepted sample n is multiplied by
// exp(-j*pi*n/M), a phasor that repeats after 2*M samples; the phasor
// index advances on each valid input. Products are rounded and saturated to
// 16 bits. Channel k of the channelizer behind this block is then centred at
// (k + 1/2) * fs/M of the original stream.
//
// Interface and timing: out_valid/out follow in_valid/in one clock later.
// The description states that the second channelizer works on a
// frequency-shifted copy with channel centres in the first one's stop band;
// the shift direction (down), the table form and the rounding are this
// design's choices.
module freq_shift
  import echo_pkg::*;
#(
  parameter int M = NCHAN     // channels of the channelizers; shift = fs/(2M)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in,
  output logic  out_valid,
  output cplx_t out
);
  localparam int P  = 2 * M;           // phasor period in samples
  localparam int PW = $clog2(P);

  typedef logic signed [16:0] ph_t;

  // cos and sin of -pi*n/M, Q15
  function automatic ph_t [P-1:0] mk_cos();
    ph_t [P-1:0] r;
    for (int i = 0; i < P; i++) r[i] = ph_t'(sin_entry((i + P / 4) % P, P, 32767.0));
    return r;
  endfunction

  function automatic ph_t [P-1:0] mk_msin();
    ph_t [P-1:0] r;
    for (int i = 0; i < P; i++) r[i] = ph_t'(-sin_entry(i, P, 32767.0));
    return r;
  endfunction

  localparam ph_t [P-1:0] ROT_C = mk_cos();
  localparam ph_t [P-1:0] ROT_S = mk_msin();

  logic [PW-1:0] idx;
  logic signed [63:0] pr, pi;

  always_comb begin
    pr = 64'(in.re) * 64'(ROT_C[idx]) - 64'(in.im) * 64'(ROT_S[idx]);
    pi = 64'(in.re) * 64'(ROT_S[idx]) + 64'(in.im) * 64'(ROT_C[idx]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        idx    <= idx + 1'b1;
        out.re <= sat16((pr + 64'sd16384) >>> 15);
        out.im <= sat16((pi + 64'sd16384) >>> 15);
      end
    end
  end
endmodule
