// pfb_downconverter: the polyphase downconverter (decimation by M/2 = 256)
// of one readout comb.
//
// Chain: polyphase band-shaping filter -> M-point FFT -> bin-to-channel
// corner turn. The 500 MSPS complex stream is split into M = 512 subbands,
// 2x oversampled, each at 1/256 of the input rate; the corner turn then
// hands every baseband block one subband sample per channel per frame.
//
// Interface: in_valid/in_ready on the input (one sample per two clocks in
// steady state); per frame NCH_P clocks of valid output carrying out_chan
// and one sample for each of the NBLK_P blocks. The structure follows the
// paper's figure of the downconverter; see the sub-blocks for the details
// this design chose.
module pfb_downconverter
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
  output logic                     in_ready,
  input  adc_iq_t                  in_data,
  output logic                     out_valid,
  output logic [$clog2(NCH_P)-1:0] out_chan,
  output iq_t                      out_data [NBLK_P]
);
  logic                 pf_valid, pf_last;
  iq_t                  pf_data;
  logic [$clog2(M)-1:0] pf_idx;
  logic                 ff_valid, ff_last;
  iq_t                  ff_data;
  logic [$clog2(M)-1:0] ff_bin;

  pfb_analysis_filter #(.M(M), .TAPS_P(TAPS_P)) u_filter (
    .clk, .rst, .in_valid, .in_ready, .in_data,
    .out_valid(pf_valid), .out_data(pf_data), .out_idx(pf_idx), .out_last(pf_last)
  );

  fft_r2sdf #(.N(M), .INVERSE(1'b0)) u_fft (
    .clk, .rst, .in_valid(pf_valid), .in_data(pf_data),
    .out_valid(ff_valid), .out_data(ff_data), .out_bin(ff_bin), .out_last(ff_last)
  );

  corner_turn_b2c #(.M(M), .NCH_P(NCH_P), .NBLK_P(NBLK_P)) u_turn (
    .clk, .rst, .cfg, .in_valid(ff_valid), .in_data(ff_data), .in_bin(ff_bin),
    .in_last(ff_last), .out_valid, .out_chan, .out_data
  );

  // The filter emits frames in natural order starting at index 0.
  assert property (@(posedge clk) disable iff (rst) (pf_valid && pf_last) |-> pf_idx == '1);
endmodule
