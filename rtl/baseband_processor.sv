// baseband_processor: one baseband block, NCH_P (128) channels processed in
// turn, one per clock, at the subband sample rate (about 2 MSPS each).
//
// Per channel c, with a local oscillator LO_c = exp(j*phi_c) from the
// channel's DDS:
//   down      d = x * conj(LO_c)              (completes the downconversion)
//   loop      y = y + G_c * d                 (feedback loop, nuller_feedback)
//   nuller    n = y * LO_c                    (LO up-converter, to the nuller path)
//   carrier   s = A_c * LO_c                  (static carrier amplitude)
//   science   d or y (selected) -> CIC1 (/64) -> CIC2 (/R) -> packetizer
// The same DDS phase serves the down- and up-conversion, so a carrier
// synthesised for a channel and looped back demodulates to a constant.
//
// Interface: samples from the bin-to-channel corner turn (in_valid,
// in_chan, in_data); nuller and carrier channel streams for the two
// up-converters (valid, channel, sample; latency 4 and 2 clocks); science
// packets (out_valid/out_ready/out_word). Tables (TBL_FREQ, TBL_AMP,
// TBL_GAIN) are written through cfg_wr_t; BLK_ID selects which channel
// numbers belong to this block.
// The chain follows the paper's figure of the baseband processor; the
// multiplexer in front of CIC1, widths and latencies are this design's.
module baseband_processor
  import rfice_pkg::*;
#(
  parameter int unsigned NCH_P   = 128,
  parameter int unsigned BLK_ID  = 0,
  parameter int unsigned COMB_ID = 0
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  sci_sel_e                 sci_sel,
  input  logic [2:0]               cic2_log2r,
  input  logic [63:0]              timestamp,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_chan,
  input  iq_t                      in_data,
  output logic                     nul_valid,
  output logic [$clog2(NCH_P)-1:0] nul_chan,
  output iq_t                      nul_data,
  output logic                     car_valid,
  output logic [$clog2(NCH_P)-1:0] car_chan,
  output iq_t                      car_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output pkt_word_t                out_word,
  output logic [31:0]              drop_count
);
  localparam int unsigned CW = $clog2(NCH_P);

  // Static carrier amplitudes.
  logic [AMP_W-1:0] amp [NCH_P];
  always_ff @(posedge clk) begin
    if (cfg.valid && cfg.tbl == TBL_AMP && (32'(cfg.chan) >> CW) == BLK_ID)
      amp[CW'(cfg.chan)] <= AMP_W'(cfg.data);
  end
  initial for (int c = 0; c < NCH_P; c++) amp[c] = '0;

  // Stage 0 -> 1: DDS lookup, align the input sample.
  logic                     lo_valid;
  logic [CW-1:0]            lo_chan;
  logic signed [COEF_W-1:0] lo_cos, lo_sin;
  iq_t                      x_d;

  channel_dds #(.NCH_P(NCH_P), .BLK_ID(BLK_ID)) u_dds (
    .clk, .rst, .cfg, .in_valid, .in_chan,
    .lo_valid, .lo_chan, .lo_cos, .lo_sin
  );

  always_ff @(posedge clk) if (in_valid) x_d <= in_data;

  // Stage 1 -> 2: down-mix and carrier synthesis.
  logic                     dn_valid;
  logic [CW-1:0]            dn_chan;
  iq_t                      dn_data;
  logic signed [COEF_W-1:0] lo2_cos, lo2_sin, lo3_cos, lo3_sin;
  logic signed [COEF_W+AMP_W:0] car_re, car_im;
  assign car_re = $signed(lo_cos) * $signed({1'b0, amp[lo_chan]});
  assign car_im = $signed(lo_sin) * $signed({1'b0, amp[lo_chan]});

  always_ff @(posedge clk) begin
    if (rst) begin
      dn_valid  <= 1'b0;
      car_valid <= 1'b0;
    end else begin
      dn_valid  <= lo_valid;
      car_valid <= lo_valid;
    end
    if (lo_valid) begin
      dn_data     <= cmul_q17(x_d, lo_cos, lo_sin, 1'b1);
      dn_chan     <= lo_chan;
      car_chan    <= lo_chan;
      car_data.re <= DW'(car_re >>> 11);
      car_data.im <= DW'(car_im >>> 11);
      lo2_cos     <= lo_cos;
      lo2_sin     <= lo_sin;
    end
  end

  // Stage 2 -> 3: feedback loop.
  logic          lp_valid;
  logic [CW-1:0] lp_chan;
  iq_t           lp_data;
  iq_t           dn_d;
  nuller_feedback #(.NCH_P(NCH_P), .BLK_ID(BLK_ID)) u_loop (
    .clk, .rst, .cfg, .in_valid(dn_valid), .in_chan(dn_chan), .in_data(dn_data),
    .out_valid(lp_valid), .out_chan(lp_chan), .out_data(lp_data)
  );
  always_ff @(posedge clk) begin
    if (dn_valid) begin
      dn_d    <= dn_data;
      lo3_cos <= lo2_cos;
      lo3_sin <= lo2_sin;
    end
  end

  // Stage 3 -> 4: LO up-converter for the nuller path.
  always_ff @(posedge clk) begin
    if (rst) nul_valid <= 1'b0;
    else     nul_valid <= lp_valid;
    if (lp_valid) begin
      nul_data <= cmul_q17(lp_data, lo3_cos, lo3_sin, 1'b0);
      nul_chan <= lp_chan;
    end
  end

  // Science path: multiplexer, CIC1, CIC2, packetizer.
  iq_t           sci;
  assign sci = (sci_sel == SCI_LOOP) ? lp_data : dn_d;

  logic          c1_valid, c2_valid;
  logic [CW-1:0] c1_chan, c2_chan;
  iq_t           c1_data, c2_data;

  cic_decimator #(.NCH_P(NCH_P), .ORDER(CIC_ORDER), .MAX_LOG2R(CIC1_LOG2R)) u_cic1 (
    .clk, .rst, .log2r(3'(CIC1_LOG2R)),
    .in_valid(lp_valid), .in_chan(lp_chan), .in_data(sci),
    .out_valid(c1_valid), .out_chan(c1_chan), .out_data(c1_data)
  );

  cic_decimator #(.NCH_P(NCH_P), .ORDER(CIC_ORDER), .MAX_LOG2R(CIC2_MAXLOG2)) u_cic2 (
    .clk, .rst, .log2r(cic2_log2r),
    .in_valid(c1_valid), .in_chan(c1_chan), .in_data(c1_data),
    .out_valid(c2_valid), .out_chan(c2_chan), .out_data(c2_data)
  );

  packetizer #(.NCH_P(NCH_P), .BLK_ID(BLK_ID), .COMB_ID(COMB_ID)) u_pkt (
    .clk, .rst, .log2r(cic2_log2r), .timestamp,
    .in_valid(c2_valid), .in_chan(c2_chan), .in_data(c2_data),
    .out_valid, .out_ready, .out_word, .drop_count
  );
endmodule
