// rfice_top: firmware of one readout board: NCOMB_P (2) independent readout
// combs, a register control interface and a 1 Gb/s Ethernet transmitter for
// the science data.
//
// Each comb (readout_comb) takes a 500 MSPS complex 16-bit stream from its
// ADC, channelises it into 512 subbands with a 2x oversampled polyphase
// filter bank, demodulates up to 1024 detector channels in 8 baseband blocks,
// decimates them through CIC1 (/64) and CIC2 (/1../64) and packetises the
// result; it also synthesises the carrier (and optional nuller) comb for its
// two DACs through polyphase up-converters. The science packets of all
// NCOMB_P*NBLK_P blocks are merged into Ethernet frames.
//
// Timing: one clock for everything. A subband frame takes M clocks and moves
// M/2 converter samples, so ADC and DAC samples come at one per two clocks
// (valid-qualified). At the default sizes that is a 1 GHz core clock for
// 500 MSPS converters; gmii_byte_en gives the transmitter its byte rate.
// The converter serial links (JESD204B), the Ethernet PHY and the IRIG-B
// decoder are outside this module: their samples, bytes and the decoded
// time appear as ports. Per comb the input overflow, loopback underrun and
// (summed over blocks) packet drop counters are outputs. The paper runs its
// baseband blocks on a 250 MHz DSP clock with parallel lanes; this design
// keeps one clock and one point per cycle, which keeps the same sample rates
// relative to the converters.
module rfice_top
  import rfice_pkg::*;
#(
  parameter int unsigned NCOMB_P = 2,
  parameter int unsigned M       = 512,
  parameter int unsigned TAPS_P  = 4,
  parameter int unsigned NCH_P   = 128,
  parameter int unsigned NBLK_P  = 8
) (
  input  logic        clk,
  input  logic        rst,
  // Control processor bus.
  input  logic        bus_wr,
  input  logic        bus_rd,
  input  logic [23:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  // Decoded IRIG-B time.
  input  logic [63:0] timestamp,
  // Converters (from / to the JESD204B link layers).
  input  logic        adc_valid     [NCOMB_P],
  input  adc_iq_t     adc_data      [NCOMB_P],
  output logic        car_dac_valid [NCOMB_P],
  output adc_iq_t     car_dac_data  [NCOMB_P],
  output logic        nul_dac_valid [NCOMB_P],
  output adc_iq_t     nul_dac_data  [NCOMB_P],
  // Ethernet (to the PHY).
  input  logic        gmii_byte_en,
  output logic [7:0]  gmii_txd,
  output logic        gmii_tx_en,
  // Status.
  output logic [31:0] frame_count,
  output logic [31:0] in_drop_count  [NCOMB_P],
  output logic [31:0] in_slip_count  [NCOMB_P],
  output logic [31:0] pkt_drop_count [NCOMB_P]
);
  localparam int unsigned NSRC = NCOMB_P * NBLK_P;

  cfg_wr_t    cfg;
  comb_ctrl_t ctrl [NCOMB_P];

  control_interface #(.NCOMB_P(NCOMB_P)) u_ctrl (
    .clk, .rst, .bus_wr, .bus_rd, .bus_addr, .bus_wdata, .bus_rdata, .cfg, .ctrl
  );

  logic      src_valid [NSRC];
  logic      src_ready [NSRC];
  pkt_word_t src_word  [NSRC];

  for (genvar c = 0; c < NCOMB_P; c++) begin : g_comb
    logic        pv [NBLK_P];
    logic        pr [NBLK_P];
    pkt_word_t   pw [NBLK_P];
    logic [31:0] pd [NBLK_P];

    readout_comb #(.M(M), .TAPS_P(TAPS_P), .NCH_P(NCH_P), .NBLK_P(NBLK_P), .COMB_ID(c)) u_comb (
      .clk, .rst, .cfg, .ctrl(ctrl[c]), .timestamp,
      .adc_valid(adc_valid[c]), .adc_data(adc_data[c]),
      .car_dac_valid(car_dac_valid[c]), .car_dac_data(car_dac_data[c]),
      .nul_dac_valid(nul_dac_valid[c]), .nul_dac_data(nul_dac_data[c]),
      .pkt_valid(pv), .pkt_ready(pr), .pkt_word(pw),
      .in_drop_count(in_drop_count[c]), .in_slip_count(in_slip_count[c]), .pkt_drop_count(pd)
    );

    for (genvar b = 0; b < NBLK_P; b++) begin : g_src
      assign src_valid[c * NBLK_P + b] = pv[b];
      assign src_word[c * NBLK_P + b]  = pw[b];
      assign pr[b] = src_ready[c * NBLK_P + b];
    end

    always_comb begin
      pkt_drop_count[c] = '0;
      for (int b = 0; b < NBLK_P; b++) pkt_drop_count[c] += pd[b];
    end
  end

  ethernet_tx #(.NSRC(NSRC)) u_eth (
    .clk, .rst, .src_valid, .src_ready, .src_word,
    .byte_en(gmii_byte_en), .txd(gmii_txd), .tx_en(gmii_tx_en), .frame_count
  );
endmodule
