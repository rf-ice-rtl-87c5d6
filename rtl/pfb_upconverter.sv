// pfb_upconverter: polyphase up-converter (interpolation by M/2 = 256) of
// one readout comb. The comb has two: the carrier and the nuller
// synthesiser.
//
// Chain: channel-to-bin corner turn -> M-point inverse FFT -> polyphase
// band-shaping (synthesis) filter. Per frame, the baseband blocks' channel
// samples (about 2 MSPS per channel) are summed into their subbands, turned
// into M time samples, and overlap-added into HOP = M/2 output samples of the
// 500 MSPS complex stream sent to a DAC. A channel sample sequence rotating
// by pi*d per frame in subband k appears at frequency (k + d) subband
// spacings, i.e. (k + d) * 976.5625 kHz at the default sizes.
//
// Interface: NBLK_P lock-step channel streams in; 16-bit complex samples
// out, HOP per frame on consecutive clocks. Structure from the paper's
// figure; see the sub-blocks for the choices of this design.
module pfb_upconverter
  import rfice_pkg::*;
#(
  parameter int unsigned M      = 512,
  parameter int unsigned TAPS_P = 4,
  parameter int unsigned NCH_P  = 128,
  parameter int unsigned NBLK_P = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_chan,
  input  iq_t                      in_data [NBLK_P],
  output logic                     out_valid,
  output adc_iq_t                  out_data
);
  logic                 ct_valid, ct_last;
  iq_t                  ct_data;
  logic                 if_valid, if_last;
  iq_t                  if_data;
  logic [$clog2(M)-1:0] if_idx;

  corner_turn_c2b #(.M(M), .NCH_P(NCH_P), .NBLK_P(NBLK_P)) u_turn (
    .clk, .rst, .cfg, .in_valid, .in_chan, .in_data,
    .out_valid(ct_valid), .out_data(ct_data), .out_last(ct_last)
  );

  fft_r2sdf #(.N(M), .INVERSE(1'b1)) u_ifft (
    .clk, .rst, .in_valid(ct_valid), .in_data(ct_data),
    .out_valid(if_valid), .out_data(if_data), .out_bin(if_idx), .out_last(if_last)
  );

  pfb_synthesis_filter #(.M(M), .TAPS_P(TAPS_P)) u_filter (
    .clk, .rst, .in_valid(if_valid), .in_data(if_data), .in_idx(if_idx),
    .in_last(if_last), .out_valid, .out_data
  );

  // Frames from the corner turn are contiguous and start at subband 0.
  assert property (@(posedge clk) disable iff (rst) ct_last |-> ct_valid);
endmodule
