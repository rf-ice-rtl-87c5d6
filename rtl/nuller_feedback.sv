// nuller_feedback: the per-channel feedback loop of a baseband block.
//
// For each channel the downconverted sample x is scaled by the channel's
// gain G and added to the channel's accumulator; the new accumulator value
// is both stored and sent on (to the LO up-converter of the nuller path and,
// if selected, to CIC1):
//     y[c] <- sat(y[c] + (G[c] * x) >>> 16),   G signed Q2.16.
// This is an integrating loop: with the nuller synthesiser driving a
// cancellation tone and the right sign of G, y settles where the carrier at
// the amplifier input is nulled. G = 0 holds the loop; writing a channel's
// gain (cfg_wr_t, TBL_GAIN) also clears its accumulator.
//
// Interface: one channel per clock (in_valid, in_chan), output registered,
// one clock later. The paper's figure shows a gain, an adder and a register
// in a loop; the integrator form, the gain format and the saturation are this
// design's.
module nuller_feedback
  import rfice_pkg::*;
#(
  parameter int unsigned NCH_P  = 128,
  parameter int unsigned BLK_ID = 0
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_chan,
  input  iq_t                      in_data,
  output logic                     out_valid,
  output logic [$clog2(NCH_P)-1:0] out_chan,
  output iq_t                      out_data
);
  localparam int unsigned CW = $clog2(NCH_P);

  logic signed [GAIN_W-1:0] gain [NCH_P];
  iq_t                      acc  [NCH_P];

  logic cfg_hit;
  assign cfg_hit = cfg.valid && cfg.tbl == TBL_GAIN && (32'(cfg.chan) >> CW) == BLK_ID;

  iq_t nxt;
  logic signed [63:0] pr, pi_;
  always_comb begin
    pr  = 64'(in_data.re) * 64'(gain[in_chan]);
    pi_ = 64'(in_data.im) * 64'(gain[in_chan]);
    nxt.re = sat_dw(64'(acc[in_chan].re) + (pr >>> 16));
    nxt.im = sat_dw(64'(acc[in_chan].im) + (pi_ >>> 16));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc[in_chan] <= nxt;
        out_data     <= nxt;
        out_chan     <= in_chan;
      end
      if (cfg_hit) begin
        gain[CW'(cfg.chan)] <= GAIN_W'(cfg.data);
        acc[CW'(cfg.chan)]  <= '0;
      end
    end
  end

  initial begin
    for (int c = 0; c < NCH_P; c++) begin
      gain[c] = '0;
      acc[c]  = '0;
    end
  end
endmodule
