// echo_sdr_top: programmable-logic signal processing of the software-defined
// radio that reads out a microwave SQUID multiplexer between 4 and 8 GHz.
//
// The band is split into NSUB = 5 subbands of 800 MHz that are handled
// independently. For each subband the transmit side generates the complex
// baseband comb of 80 tones (tone_gen) and pre-corrects the IQ imbalance of
// the analog path (iq_corr) before the I/Q DAC pair (1 GS/s). On the receive
// side the ADC of each subband delivers two 500 MS/s streams, its lower and
// upper sideband, so NSTREAM = 10 streams enter; each is channelized into 64
// overlapping channels and demodulated to DC (rx_stream).
//
//   cfg --+--> tone_gen[s] --> iq_corr[s] --> dac_out[s]      s = 0..4
//         +--> rx_stream[r]:  adc_in[r] --> ch_a[r], ch_b[r]  r = 0..9
//
// Interfaces. One clock; it stands for the DAC sample rate, so each
// dac_out[s] carries one sample per clock and each adc_in[r] is expected
// with adc_valid[r] every other clock (500 MS/s). Streams 2s and 2s+1 are
// the lower and upper sideband of subband s. The DACs, the ADCs with their
// digital down-converters, the analog mixer boards and the processor that
// stores or forwards ch_a/ch_b (and later flux-ramp demodulation and event
// detection) are outside this module; their signals are the ports.
//
// Configuration is one register write per clock (cfg.we, cfg.addr, cfg.data):
//   addr[19:15] = s          (0..4)   : tone_gen of subband s, addr[8:0] local
//   addr[19:15] = 5 + s      (5..9)   : IQ matrix of subband s,
//                                        addr[1:0] = 0 ii, 1 iq, 2 qi, 3 qq
//   addr[19:15] = 10 + r     (10..19) : NCO of stream r, addr[6] = bank,
//                                        addr[5:0] = channel, data = freq word
// The IQ matrices reset to identity. The unit/register map is this design's
// choice; the numbers of subbands, tones, streams and channels follow the
// described system.
module echo_sdr_top
  import echo_pkg::*;
#(
  parameter int NS    = NSUB,
  parameter int NT    = NTONES,
  parameter int M     = NCHAN,
  parameter int T     = 16,
  parameter int NTAPS = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  cfg_t      cfg,
  // transmit: to the I/Q DAC pair of each subband
  output logic      dac_valid [NS],
  output cplx_t     dac_out   [NS],
  output logic      dac_clip  [NS],
  // receive: from the ADC sideband streams
  input  logic      adc_valid [2*NS],
  input  cplx_t     adc_in    [2*NS],
  output chan_smp_t ch_a      [2*NS],
  output chan_smp_t ch_b      [2*NS]
);
  localparam int NR = 2 * NS;

  logic [4:0] unit;
  assign unit = cfg.addr[19:15];

  iq_coef_t iq_coef [NS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) iq_coef[s] <= IQ_IDENTITY;
    end else if (cfg.we && int'(unit) >= NS && int'(unit) < 2 * NS) begin
      case (cfg.addr[1:0])
        2'd0: iq_coef[int'(unit) - NS].ii <= cfg.data[15:0];
        2'd1: iq_coef[int'(unit) - NS].iq <= cfg.data[15:0];
        2'd2: iq_coef[int'(unit) - NS].qi <= cfg.data[15:0];
        default: iq_coef[int'(unit) - NS].qq <= cfg.data[15:0];
      endcase
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_tx
    logic  tg_valid;
    cplx_t tg_out;

    tone_gen #(.NT(NT)) u_tone (
      .clk, .rst_n,
      .cfg_we(cfg.we && int'(unit) == s), .cfg_addr(cfg.addr[8:0]), .cfg_data(cfg.data),
      .out_valid(tg_valid), .out(tg_out), .clip(dac_clip[s]));

    iq_corr u_iq (
      .clk, .rst_n, .coef(iq_coef[s]),
      .in_valid(tg_valid), .in(tg_out), .out_valid(dac_valid[s]), .out(dac_out[s]));
  end

  for (genvar r = 0; r < NR; r++) begin : g_rx
    rx_stream #(.M(M), .T(T), .NTAPS(NTAPS)) u_rx (
      .clk, .rst_n,
      .in_valid(adc_valid[r]), .in(adc_in[r]),
      .cfg_we(cfg.we && int'(unit) == 2 * NS + r), .cfg_bank(cfg.addr[6]),
      .cfg_chan(cfg.addr[5:0]), .cfg_inc(cfg.data),
      .out_a(ch_a[r]), .out_b(ch_b[r]));
  end
endmodule
