// iq_corr: IQ imbalance pre-correction for one subband's DAC pair.
//
// The analog path from the DAC to the IQ mixer has small gain and phase
// errors between I and Q, which produce image tones. They are compensated by
// generating I and Q with deliberately different amplitude and phase: each
// sample is multiplied by a programmable real 2x2 matrix
//     I' = ii*I + iq*Q,   Q' = qi*I + qq*Q     (coefficients Q2.14)
// which covers a gain error (ii != qq) and a phase error (iq, qi != 0). The
// matrix is found by calibration in software (image power minimised on a
// spectrum analyser); this block only applies it. Results are rounded and
// saturated to 16 bits.
//
// Interface and timing: out/out_valid follow in/in_valid one clock later;
// coef is static configuration. The description says that the imbalance is
// corrected by generating I and Q with slightly different phases and
// amplitudes; the matrix form and the Q2.14 format are this design's choice.
module iq_corr
  import echo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  iq_coef_t coef,
  input  logic     in_valid,
  input  cplx_t    in,
  output logic     out_valid,
  output cplx_t    out
);
  logic signed [63:0] ci, cq;

  always_comb begin
    ci = 64'(coef.ii) * 64'(in.re) + 64'(coef.iq) * 64'(in.im);
    cq = 64'(coef.qi) * 64'(in.re) + 64'(coef.qq) * 64'(in.im);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      out.re    <= sat16((ci + 64'sd8192) >>> 14);
      out.im    <= sat16((cq + 64'sd8192) >>> 14);
    end
  end
endmodule
