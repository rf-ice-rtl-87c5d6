// corner_turn_b2c: bin-to-channel corner turn of the polyphase downconverter.
//
// The FFT delivers each frame of M subband samples in bit-reversed order,
// tagged with the bin number. This block writes them into one half of a
// double-buffered frame memory at their natural address. When a frame is
// complete (in_last) the halves swap, and the finished frame is read out in
// channel order: on each of NCH consecutive clocks every one of the NBLK
// baseband blocks receives, for its channel c, the subband that the
// channel-to-subband table assigns to it. Each channel therefore gets one
// sample per frame, i.e. at the subband rate, and the NBLK blocks run in
// lock-step.
//
// Table writes arrive as cfg_wr_t records (TBL_BIN, channel = blk*NCH + c).
// Timing: read-out starts the clock after in_last and lasts NCH clocks; the
// output is registered. Frames must arrive at least NCH clocks apart.
// The paper says that each channel is taken from the subband nearest to its
// frequency and names the corner turn; the buffering is this design's.
module corner_turn_b2c
  import rfice_pkg::*;
#(
  parameter int unsigned M       = 512,
  parameter int unsigned NCH_P   = 128,
  parameter int unsigned NBLK_P  = 8
) (
  input  logic                     clk,
  input  logic                     rst,
  input  cfg_wr_t                  cfg,
  input  logic                     in_valid,
  input  iq_t                      in_data,
  input  logic [$clog2(M)-1:0]     in_bin,
  input  logic                     in_last,
  output logic                     out_valid,
  output logic [$clog2(NCH_P)-1:0] out_chan,
  output iq_t                      out_data [NBLK_P]
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned CW = $clog2(NCH_P);
  localparam int unsigned BW = (NBLK_P > 1) ? $clog2(NBLK_P) : 1;

  iq_t           fbuf [2][M];
  logic [AW-1:0] bin_map [NBLK_P][NCH_P];
  logic          wsel;
  logic          reading;
  logic [CW-1:0] rc;

  logic [BW-1:0] cfg_blk;
  logic [CW-1:0] cfg_c;
  assign cfg_blk = BW'(cfg.chan >> CW);
  assign cfg_c   = CW'(cfg.chan);

  // Unassigned channels read (and write) subband 0.
  initial begin
    for (int b = 0; b < NBLK_P; b++)
      for (int c = 0; c < NCH_P; c++) bin_map[b][c] = '0;
  end

  always_ff @(posedge clk) begin
    if (cfg.valid && cfg.tbl == TBL_BIN && (32'(cfg.chan) >> CW) < NBLK_P)
      bin_map[cfg_blk][cfg_c] <= AW'(cfg.data);
  end

  always_ff @(posedge clk) begin
    if (in_valid) fbuf[wsel][in_bin] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel      <= 1'b0;
      reading   <= 1'b0;
      rc        <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (reading) begin
        for (int b = 0; b < NBLK_P; b++) out_data[b] <= fbuf[~wsel][bin_map[b][rc]];
        out_chan  <= rc;
        out_valid <= 1'b1;
        rc        <= rc + 1'b1;
        if (rc == CW'(NCH_P - 1)) reading <= 1'b0;
      end
      if (in_valid && in_last) begin
        wsel    <= ~wsel;
        reading <= 1'b1;
        rc      <= '0;
      end
    end
  end

  // A new frame must not complete while the previous one is still being read.
  assert property (@(posedge clk) disable iff (rst) (in_valid && in_last) |-> !reading || rc == CW'(NCH_P - 1));
endmodule
