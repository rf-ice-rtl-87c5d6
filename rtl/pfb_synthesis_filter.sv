// pfb_synthesis_filter: polyphase band-shaping filter of the 2x oversampled
// synthesis filter bank (the back half of a polyphase up-converter).
//
// Each inverse-FFT frame v_F (M time samples, one frame per HOP = M/2
// output samples) is stored in one of 2*TAPS_P+1 frame banks. When frame F is
// complete, the output samples n = F*HOP + r, r = 0..HOP-1, are formed as
//     y[n] = sum_{j=0}^{2*TAPS_P-1} g[r + j*HOP] * v_{F-j}[n mod M],
// one per clock, with g the same prototype low-pass as the analysis side.
// This is the overlap-add of windowed, periodically extended frames written
// in gather form; indexing v by n mod M keeps the phase of every subband
// continuous across frames, matching the analysis filter bank. Output is
// saturated to the 16-bit DAC width. The first output block needs 2*TAPS_P
// frames of history.
//
// Interface: frame samples in (valid, time index in any order, last);
// output valid-qualified, HOP samples on consecutive clocks starting two
// clocks after the frame's last sample. The paper names the filter and the
// 2x oversampled structure; window, taps, scaling and memory organisation are
// this design's.
module pfb_synthesis_filter
  import rfice_pkg::*;
#(
  parameter int unsigned M      = 512,
  parameter int unsigned TAPS_P = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  iq_t                  in_data,
  input  logic [$clog2(M)-1:0] in_idx,
  input  logic                 in_last,
  output logic                 out_valid,
  output adc_iq_t              out_data
);
  localparam int unsigned AW  = $clog2(M);
  localparam int unsigned HOP = M / 2;
  localparam int unsigned NJ  = 2 * TAPS_P;
  localparam int unsigned NS  = NJ + 1;
  localparam int unsigned SW  = $clog2(NS);

  logic signed [COEF_W-1:0] coef [TAPS_P*M];
  for (genvar n = 0; n < TAPS_P*M; n++) begin : g_coef
    localparam logic signed [COEF_W-1:0] C = proto_coef(n, M, TAPS_P);
    assign coef[n] = C;
  end

  iq_t mem [NS][M];

  logic [SW-1:0] wslot;       // slot of the frame being written
  logic [31:0]   nframes;     // frames completed
  logic          busy;
  logic [SW-1:0] cslot;       // slot of the newest frame used by the computation
  logic [AW-1:0] off;         // (F*HOP) mod M
  logic [AW-1:0] r;

  function automatic logic [SW-1:0] slot_sub(input logic [SW-1:0] s, input int unsigned j);
    return SW'((int'(s) + NS - j) % NS);
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid) mem[wslot][in_idx] <= in_data;
  end

  iq_t           rd [NS];
  logic [SW-1:0] rd_slot;
  logic [AW-1:0] rd_r;
  logic          rd_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      wslot    <= '0;
      nframes  <= '0;
      busy     <= 1'b0;
      r        <= '0;
      off      <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      if (busy) begin
        for (int s = 0; s < NS; s++) rd[s] <= mem[s][off + r];
        rd_slot  <= cslot;
        rd_r     <= r;
        rd_valid <= 1'b1;
        r        <= r + 1'b1;
        if (r == AW'(HOP - 1)) busy <= 1'b0;
      end
      if (in_valid && in_last) begin
        wslot   <= (wslot == SW'(NS - 1)) ? '0 : wslot + 1'b1;
        nframes <= nframes + 1;
        if (nframes >= 32'(NJ - 1)) begin
          busy  <= 1'b1;
          cslot <= wslot;
          r     <= '0;
          off   <= AW'(nframes * HOP);
        end
      end
    end
  end

  logic signed [63:0] acc_re, acc_im;
  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int j = 0; j < NJ; j++) begin
      acc_re += 64'(rd[slot_sub(rd_slot, j)].re) * 64'(coef[int'(rd_r) + j * HOP]);
      acc_im += 64'(rd[slot_sub(rd_slot, j)].im) * 64'(coef[int'(rd_r) + j * HOP]);
    end
  end

  function automatic logic signed [ADC_W-1:0] sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7FFF;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return v[ADC_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= rd_valid;
    if (rd_valid) begin
      out_data.re <= sat16(acc_re >>> (COEF_W - 1));
      out_data.im <= sat16(acc_im >>> (COEF_W - 1));
    end
  end

  // A new frame must not complete while an output block is still being formed.
  assert property (@(posedge clk) disable iff (rst) (in_valid && in_last) |-> !busy || r == AW'(HOP - 1));
endmodule
