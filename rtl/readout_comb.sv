// readout_comb: the complete signal path of one readout module (one
// multiplexed comb of up to NBLK_P*NCH_P = 1024 detectors).
//
//   ADC / carrier loopback / nuller loopback -> input_mux
//     -> pfb_downconverter (M = 512 subbands, 2x oversampled, /256)
//     -> NBLK_P baseband_processor blocks of NCH_P channels each
//          -> science packets (one stream per block)
//          -> carrier channel samples -> carrier pfb_upconverter -> carrier DAC
//          -> nuller channel samples  -> nuller pfb_upconverter  -> nuller DAC
//
// All blocks share one clock. One subband frame takes M clocks and carries
// HOP = M/2 input samples, so ADC and DAC streams run at one complex
// sample per two clocks; each baseband block is busy NCH_P of every M clocks.
// Configuration: cfg_wr_t records whose comb field equals COMB_ID are
// accepted (channel tables), and ctrl holds the comb's mode registers.
// The subband table (TBL_BIN) is applied to the downconverter and to both
// up-converters, so a channel is synthesised and analysed in the same subband.
// The ADC strobe paces the comb in every input mode: in loopback the DAC
// samples are buffered (M deep, primed at M/4) and taken at the ADC strobe,
// so the loop through synthesiser and analyser starts by itself and stays in
// step. in_drop_count and in_slip_count report input overflow and loopback
// underruns.
// Composition as in the paper's signal-path figure; the single-clock timing
// is this design's.
module readout_comb
  import rfice_pkg::*;
#(
  parameter int unsigned M       = 512,
  parameter int unsigned TAPS_P  = 4,
  parameter int unsigned NCH_P   = 128,
  parameter int unsigned NBLK_P  = 8,
  parameter int unsigned COMB_ID = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  cfg_wr_t     cfg,
  input  comb_ctrl_t  ctrl,
  input  logic [63:0] timestamp,
  input  logic        adc_valid,
  input  adc_iq_t     adc_data,
  output logic        car_dac_valid,
  output adc_iq_t     car_dac_data,
  output logic        nul_dac_valid,
  output adc_iq_t     nul_dac_data,
  output logic        pkt_valid [NBLK_P],
  input  logic        pkt_ready [NBLK_P],
  output pkt_word_t   pkt_word  [NBLK_P],
  output logic [31:0] in_drop_count,
  output logic [31:0] in_slip_count,
  output logic [31:0] pkt_drop_count [NBLK_P]
);
  localparam int unsigned CW = $clog2(NCH_P);

  cfg_wr_t ccfg;
  always_comb begin
    ccfg       = cfg;
    ccfg.valid = cfg.valid && cfg.comb == 4'(COMB_ID);
  end

  // Input multiplexer and downconverter.
  logic    mx_valid, mx_ready;
  adc_iq_t mx_data;
  input_mux #(.DEPTH(M), .PREFILL(M / 4)) u_mux (
    .clk, .rst, .sel(ctrl.in_sel),
    .adc_valid, .adc_data,
    .car_valid(car_dac_valid), .car_data(car_dac_data),
    .nul_valid(nul_dac_valid), .nul_data(nul_dac_data),
    .out_valid(mx_valid), .out_ready(mx_ready), .out_data(mx_data),
    .drop_count(in_drop_count), .slip_count(in_slip_count)
  );

  logic          dc_valid;
  logic [CW-1:0] dc_chan;
  iq_t           dc_data [NBLK_P];
  pfb_downconverter #(.M(M), .TAPS_P(TAPS_P), .NCH_P(NCH_P), .NBLK_P(NBLK_P)) u_down (
    .clk, .rst, .cfg(ccfg),
    .in_valid(mx_valid), .in_ready(mx_ready), .in_data(mx_data),
    .out_valid(dc_valid), .out_chan(dc_chan), .out_data(dc_data)
  );

  // Baseband blocks.
  logic          nul_v [NBLK_P];
  logic [CW-1:0] nul_c [NBLK_P];
  iq_t           nul_d [NBLK_P];
  logic          car_v [NBLK_P];
  logic [CW-1:0] car_c [NBLK_P];
  iq_t           car_d [NBLK_P];

  for (genvar b = 0; b < NBLK_P; b++) begin : g_blk
    baseband_processor #(.NCH_P(NCH_P), .BLK_ID(b), .COMB_ID(COMB_ID)) u_bb (
      .clk, .rst, .cfg(ccfg), .sci_sel(ctrl.sci_sel), .cic2_log2r(ctrl.cic2_log2r),
      .timestamp,
      .in_valid(dc_valid), .in_chan(dc_chan), .in_data(dc_data[b]),
      .nul_valid(nul_v[b]), .nul_chan(nul_c[b]), .nul_data(nul_d[b]),
      .car_valid(car_v[b]), .car_chan(car_c[b]), .car_data(car_d[b]),
      .out_valid(pkt_valid[b]), .out_ready(pkt_ready[b]), .out_word(pkt_word[b]),
      .drop_count(pkt_drop_count[b])
    );
  end

  // Up-converters. The blocks run in lock-step; block 0 supplies valid/channel.
  pfb_upconverter #(.M(M), .TAPS_P(TAPS_P), .NCH_P(NCH_P), .NBLK_P(NBLK_P)) u_car (
    .clk, .rst, .cfg(ccfg), .in_valid(car_v[0]), .in_chan(car_c[0]), .in_data(car_d),
    .out_valid(car_dac_valid), .out_data(car_dac_data)
  );

  pfb_upconverter #(.M(M), .TAPS_P(TAPS_P), .NCH_P(NCH_P), .NBLK_P(NBLK_P)) u_nul (
    .clk, .rst, .cfg(ccfg), .in_valid(nul_v[0]), .in_chan(nul_c[0]), .in_data(nul_d),
    .out_valid(nul_dac_valid), .out_data(nul_dac_data)
  );

  for (genvar b = 1; b < NBLK_P; b++) begin : g_lockstep
    assert property (@(posedge clk) disable iff (rst)
      car_v[b] == car_v[0] && nul_v[b] == nul_v[0] &&
      (!car_v[0] || car_c[b] == car_c[0]) && (!nul_v[0] || nul_c[b] == nul_c[0]));
  end
endmodule
