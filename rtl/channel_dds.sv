// channel_dds: per-channel direct digital synthesiser (local oscillator) of
// a baseband block.
//
// The block processes NCH_P channels in turn, one per clock. Each channel
// has a PHASE_W-bit phase accumulator and a phase increment (frequency
// word). When channel c is presented (in_valid, in_chan = c), its current
// phase is looked up in a 2^LUT_AW-entry cosine/sine table and the
// accumulator advances by the channel's increment, so the oscillator steps
// once per subband sample. A frequency offset df from the subband centre
// corresponds to an increment of df / fs_sub * 2^PHASE_W with
// fs_sub = 500 MHz / 256; because the oversampled filter bank references
// subbands to absolute time, a tone at offset df (in bins) rotates by
// pi*df per frame, i.e. increment = df/2 * 2^PHASE_W.
//
// Frequency words are written through cfg_wr_t (TBL_FREQ); writing one
// also resets that channel's phase. Output: lo_cos/lo_sin (Q1.17) one clock
// after the request, with the channel number. The paper specifies a locally
// generated DDS carrier per channel; table size and widths are this design's.
module channel_dds
  import rfice_pkg::*;
#(
  parameter int unsigned NCH_P  = 128,
  parameter int unsigned BLK_ID = 0
) (
  input  logic                      clk,
  input  logic                      rst,
  input  cfg_wr_t                   cfg,
  input  logic                      in_valid,
  input  logic [$clog2(NCH_P)-1:0]  in_chan,
  output logic                      lo_valid,
  output logic [$clog2(NCH_P)-1:0]  lo_chan,
  output logic signed [COEF_W-1:0]  lo_cos,
  output logic signed [COEF_W-1:0]  lo_sin
);
  localparam int unsigned CW = $clog2(NCH_P);
  localparam int unsigned LN = 1 << LUT_AW;

  logic signed [COEF_W-1:0] cos_lut [LN];
  logic signed [COEF_W-1:0] sin_lut [LN];
  for (genvar i = 0; i < LN; i++) begin : g_lut
    localparam logic signed [COEF_W-1:0] C = cos_q17(i, LN);
    localparam logic signed [COEF_W-1:0] S = sin_q17(i, LN);
    assign cos_lut[i] = C;
    assign sin_lut[i] = S;
  end

  logic [PHASE_W-1:0] phase [NCH_P];
  logic [PHASE_W-1:0] freq  [NCH_P];

  logic cfg_hit;
  assign cfg_hit = cfg.valid && cfg.tbl == TBL_FREQ && (32'(cfg.chan) >> CW) == BLK_ID;

  logic [LUT_AW-1:0] a;
  assign a = phase[in_chan][PHASE_W-1 -: LUT_AW];

  always_ff @(posedge clk) begin
    if (rst) begin
      lo_valid <= 1'b0;
    end else begin
      lo_valid <= in_valid;
      if (in_valid) begin
        lo_chan <= in_chan;
        lo_cos  <= cos_lut[a];
        lo_sin  <= sin_lut[a];
        phase[in_chan] <= phase[in_chan] + freq[in_chan];
      end
      if (cfg_hit) begin
        freq[CW'(cfg.chan)]  <= cfg.data;
        phase[CW'(cfg.chan)] <= '0;
      end
    end
  end

  // Phases are only valid once a frequency word has been written; clear them on reset.
  initial begin
    for (int c = 0; c < NCH_P; c++) begin
      phase[c] = '0;
      freq[c]  = '0;
    end
  end
endmodule
