// pfb_analysis_filter: polyphase band-shaping filter of the 2x oversampled
// analysis filter bank (the front half of the polyphase downconverter).
//
// Input samples are written into TAPS_P+1 banks of M samples each (a circular
// history of (TAPS_P+1)*M samples). Once the TAPS_P*M samples starting at n0 are
// present, the filter emits one frame of M polyphase sums
//     u[m'] = sum_t h[m + t*M] * x[n0 + m + t*M],   m = (m' - n0) mod M,
// for m' = 0..M-1, one per clock, then advances n0 by HOP = M/2. Ordering the
// sums by absolute sample index modulo M (m') makes the following FFT produce
// subbands whose phase is referenced to absolute time, so a tone at a
// subband centre comes out as a constant even though frames start every HOP
// samples. h is the prototype low-pass of rfice_pkg::proto_coef.
//
// Interface: in_valid/in_ready handshake (ready drops only when the history
// would overwrite samples still needed); the output is a valid-qualified
// stream with out_idx = m' and out_last on the last sample of each frame.
// Steady state consumes HOP inputs per M output clocks, i.e. one input per
// two clocks. Two-cycle latency from frame start to first output.
// The paper gives the 2x oversampling, the 512 subbands and the decimation by
// 256; the window, the number of taps and the banked memory are this design's.
module pfb_analysis_filter
  import rfice_pkg::*;
#(
  parameter int unsigned M    = 512,
  parameter int unsigned TAPS_P = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  adc_iq_t              in_data,
  output logic                 out_valid,
  output iq_t                  out_data,
  output logic [$clog2(M)-1:0] out_idx,
  output logic                 out_last
);
  localparam int unsigned AW   = $clog2(M);
  localparam int unsigned NB   = TAPS_P + 1;
  localparam int unsigned BW   = $clog2(NB);
  localparam int unsigned HOP  = M / 2;
  localparam int unsigned SHIFT = COEF_W - 1 - 7;  // output = x * h * 2^7

  // Coefficient table h[0 .. TAPS_P*M-1], computed at elaboration.
  logic signed [COEF_W-1:0] coef [TAPS_P*M];
  for (genvar n = 0; n < TAPS_P*M; n++) begin : g_coef
    localparam logic signed [COEF_W-1:0] C = proto_coef(n, M, TAPS_P);
    assign coef[n] = C;
  end

  adc_iq_t mem [NB][M];

  // Write side.
  logic [31:0]   wr_cnt;
  logic [AW-1:0] wr_addr;
  logic [BW-1:0] wr_bank;
  // Frame side.
  logic [31:0]   n0;
  logic [AW-1:0] n0_off;     // n0 mod M
  logic [BW-1:0] n0_bank;    // floor(n0/M) mod NB
  logic          busy;
  logic [AW-1:0] mp;         // m'

  assign in_ready = (wr_cnt - n0) < 32'(NB * M);

  function automatic logic [BW-1:0] bank_add(input logic [BW-1:0] b, input int unsigned k);
    int unsigned s;
    s = (int'(b) + k) % NB;
    return BW'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_cnt  <= '0;
      wr_addr <= '0;
      wr_bank <= '0;
    end else if (in_valid && in_ready) begin
      mem[wr_bank][wr_addr] <= in_data;
      wr_cnt  <= wr_cnt + 1;
      wr_addr <= wr_addr + 1'b1;
      if (wr_addr == AW'(M - 1)) wr_bank <= bank_add(wr_bank, 1);
    end
  end

  // Stage 1: read all banks at address m', remember which bank serves each tap.
  adc_iq_t          rd     [NB];
  logic [BW-1:0]    tap_bank [TAPS_P];
  logic [AW-1:0]    rd_m;
  logic             rd_valid, rd_last;
  logic [AW-1:0]    rd_idx;

  always_ff @(posedge clk) begin
    if (rst) begin
      n0       <= '0;
      n0_off   <= '0;
      n0_bank  <= '0;
      busy     <= 1'b0;
      mp       <= '0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
      if (!busy) begin
        if ((wr_cnt - n0) >= 32'(TAPS_P * M)) begin
          busy <= 1'b1;
          mp   <= '0;
        end
      end else begin
        for (int b = 0; b < NB; b++) rd[b] <= mem[b][mp];
        for (int t = 0; t < TAPS_P; t++)
          tap_bank[t] <= bank_add(n0_bank, ((mp < n0_off) ? 1 : 0) + t);
        rd_m     <= mp - n0_off;
        rd_idx   <= mp;
        rd_valid <= 1'b1;
        rd_last  <= (mp == AW'(M - 1));
        mp       <= mp + 1'b1;
        if (mp == AW'(M - 1)) begin
          // Continue straight into the next frame when its samples are in.
          busy   <= (wr_cnt - n0 - 32'(HOP)) >= 32'(TAPS_P * M);
          n0     <= n0 + 32'(HOP);
          n0_off <= n0_off + AW'(HOP);
          if (32'(n0_off) + 32'(HOP) >= 32'(M)) n0_bank <= bank_add(n0_bank, 1);
        end
      end
    end
  end

  // Stage 2: multiply-accumulate over the taps.
  logic signed [47:0] acc_re, acc_im;
  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int t = 0; t < TAPS_P; t++) begin
      acc_re += 48'(rd[tap_bank[t]].re) * 48'(coef[int'(rd_m) + t * M]);
      acc_im += 48'(rd[tap_bank[t]].im) * 48'(coef[int'(rd_m) + t * M]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= rd_valid;
      out_last  <= rd_last;
      if (rd_valid) begin
        out_data.re <= sat_dw(64'(acc_re >>> SHIFT));
        out_data.im <= sat_dw(64'(acc_im >>> SHIFT));
        out_idx     <= rd_idx;
      end
    end
  end
endmodule
