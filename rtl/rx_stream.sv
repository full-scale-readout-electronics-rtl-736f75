// rx_stream: digital channelization of one 500 MS/s ADC sideband stream
// into 2*M = 64 overlapping channels, each demodulated to DC.
//
// How it works. Bank A is a polyphase channelizer on the stream itself; its
// channel k is centred at k*fs/M. Bank B is an identical channelizer on a
// copy shifted down by fs/(2M), so its channel k is centred at
// (k + 1/2)*fs/M, in bank A's stop band. Together every tone falls close to
// the centre of some channel of one of the two banks. Each bank is followed
// by its time-multiplexed per-channel NCO and 1.6 MHz lowpass.
//
//   in --> pfb_channelizer (A) -------------> chan_nco_lpf (A) --> out_a
//      \-> freq_shift --> pfb_channelizer (B) --> chan_nco_lpf (B) --> out_b
//
// Interface: in/in_valid is the sideband stream (at most one sample per
// clock). cfg_we/cfg_bank/cfg_chan/cfg_inc set the NCO frequency word of a
// channel of bank A (cfg_bank = 0) or B (1). out_a and out_b are the two
// TDM channel streams. Bank B is one clock behind bank A (the shifter's
// register).
//
// The two-bank arrangement with a frequency-shifted copy follows the
// description; the direction of the shift is this design's choice.
module rx_stream
  import echo_pkg::*;
#(
  parameter int M     = NCHAN,
  parameter int T     = 16,
  parameter int NTAPS = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  cplx_t       in,
  input  logic        cfg_we,
  input  logic        cfg_bank,
  input  logic [5:0]  cfg_chan,
  input  logic [31:0] cfg_inc,
  output chan_smp_t   out_a,
  output chan_smp_t   out_b
);
  chan_smp_t ch_a, ch_b;
  logic      sh_valid;
  cplx_t     sh;

  pfb_channelizer #(.M(M), .T(T)) u_pfb_a (
    .clk, .rst_n, .in_valid, .in, .out(ch_a));

  freq_shift #(.M(M)) u_shift (
    .clk, .rst_n, .in_valid, .in, .out_valid(sh_valid), .out(sh));

  pfb_channelizer #(.M(M), .T(T)) u_pfb_b (
    .clk, .rst_n, .in_valid(sh_valid), .in(sh), .out(ch_b));

  chan_nco_lpf #(.NCH(M), .NTAPS(NTAPS)) u_demod_a (
    .clk, .rst_n, .cfg_we(cfg_we && !cfg_bank), .cfg_chan, .cfg_inc,
    .in(ch_a), .out(out_a));

  chan_nco_lpf #(.NCH(M), .NTAPS(NTAPS)) u_demod_b (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_bank), .cfg_chan, .cfg_inc,
    .in(ch_b), .out(out_b));
endmodule
