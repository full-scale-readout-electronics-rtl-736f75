// tone_gen: digital frequency-comb generator for one subband. It produces
// the complex baseband (I, Q) sum of NTONES = 80 tones that, after the DAC
// and IQ mixer, stimulate the resonators of the multiplexer in that subband.
//
// How it works. Every tone t has a 32-bit phase accumulator advanced by its
// frequency word inc[t] once per output sample (f_t = inc[t]/2^32 * fs, with
// fs = 1 GS/s, negative frequencies as two's complement) and an amplitude
// amp[t] in DAC LSBs. The output sample is
//     I + jQ = sum_t a_t * exp(+j*2*pi*phase_t/2^32)
// using the top LUT_AW phase bits and a shared Q15 sine table, rounded and
// saturated to 16 bits; `clip` marks a saturated sample. Tones whose am_en
// bit is set are amplitude-modulated by a common modulation oscillator,
//     a_t = amp[t] * (1 + depth/2^15 * sin(2*pi*phase_am/2^32)),
// which imitates the flux-ramp modulated response of a SQUID channel when
// the system runs in room-temperature loopback. Per-tone amplitudes are how
// software flattens the comb (all tones set to the weakest one's power).
//
// Configuration (cfg_we, cfg_addr[8:0], cfg_data):
//   addr[8:7]=0, addr[6:0]=t : inc[t]
//   addr[8:7]=1, addr[6:0]=t : amp[t] = data[15:0], am_en[t] = data[16]
//   addr[8:7]=2, addr[6:0]=0 : modulation frequency word
//   addr[8:7]=2, addr[6:0]=1 : modulation depth (Q15, data[15:0])
//   addr[8:7]=2, addr[6:0]=2 : write = restart all phases at 0 (sync)
// Timing: one sample per clock (the clock stands for the 1 GS/s DAC sample
// rate). The sample leaving on a clock edge uses the phases accumulated up
// to the previous edge: the first sample after a sync has every phase at 0.
//
// The description gives the comb (80 tones per subband, I and Q generated in
// the programmable logic, 1 GS/s DACs), adjustable per-tone power and the
// digital amplitude modulation; the direct-synthesis structure, widths and
// register map are this design's choices.
module tone_gen
  import echo_pkg::*;
#(
  parameter int NT = NTONES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [8:0]  cfg_addr,
  input  logic [31:0] cfg_data,
  output logic        out_valid,
  output cplx_t       out,
  output logic        clip
);
  logic [31:0] inc   [NT];
  logic [15:0] amp   [NT];
  logic        am_en [NT];
  logic [31:0] phase [NT];
  logic [31:0] am_inc, am_phase;
  logic [15:0] am_depth;
  logic        sync;

  assign sync = cfg_we && cfg_addr[8:7] == 2'd2 && cfg_addr[6:0] == 7'd2;

  // amplitude factor of the modulation, Q15 (32768 = 1.0)
  logic signed [31:0] am_fac;
  logic signed [63:0] acc_re, acc_im;

  always_comb begin
    logic signed [31:0] a;
    am_fac = 32'sd32768 + 32'((64'($signed({1'b0, am_depth})) * 64'(lut_sin(am_phase[31 -: LUT_AW]))) >>> 15);
    acc_re = '0;
    acc_im = '0;
    for (int t = 0; t < NT; t++) begin
      a = am_en[t] ? 32'((64'($signed({1'b0, amp[t]})) * 64'(am_fac)) >>> 15)
                   : 32'($signed({1'b0, amp[t]}));
      acc_re += 64'(a) * 64'(lut_cos(phase[t][31 -: LUT_AW]));
      acc_im += 64'(a) * 64'(lut_sin(phase[t][31 -: LUT_AW]));
    end
  end

  // configuration registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) begin
        inc[t] <= '0; amp[t] <= '0; am_en[t] <= 1'b0;
      end
      am_inc   <= '0;
      am_depth <= '0;
    end else if (cfg_we) begin
      case (cfg_addr[8:7])
        2'd0: if (int'(cfg_addr[6:0]) < NT) inc[cfg_addr[6:0]] <= cfg_data;
        2'd1: if (int'(cfg_addr[6:0]) < NT) begin
                amp[cfg_addr[6:0]]   <= cfg_data[15:0];
                am_en[cfg_addr[6:0]] <= cfg_data[16];
              end
        2'd2: case (cfg_addr[6:0])
                7'd0: am_inc   <= cfg_data;
                7'd1: am_depth <= cfg_data[15:0];
                default: ;
              endcase
        default: ;
      endcase
    end
  end

  // phase accumulators
  always_ff @(posedge clk) begin
    if (!rst_n || sync) begin
      for (int t = 0; t < NT; t++) phase[t] <= '0;
      am_phase <= '0;
    end else begin
      for (int t = 0; t < NT; t++) phase[t] <= phase[t] + inc[t];
      am_phase <= am_phase + am_inc;
    end
  end

  // output register
  logic signed [63:0] rnd_re, rnd_im;
  assign rnd_re = (acc_re + 64'sd16384) >>> 15;
  assign rnd_im = (acc_im + 64'sd16384) >>> 15;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      clip      <= 1'b0;
    end else begin
      out_valid <= 1'b1;
      out.re    <= sat16(rnd_re);
      out.im    <= sat16(rnd_im);
      clip      <= (rnd_re != 64'(sat16(rnd_re))) || (rnd_im != 64'(sat16(rnd_im)));
    end
  end
endmodule
