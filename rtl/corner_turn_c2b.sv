// corner_turn_c2b: channel-to-bin corner turn of a polyphase up-converter.
//
// The NBLK_P baseband blocks deliver, in lock-step, one synthesised sample
// per channel per frame (channel c of every block on the same clock). Each
// sample is added into the subband the channel-to-subband table assigns to
// it; every block has its own accumulator memory, so NBLK_P additions per
// clock never collide. When channel NCH_P-1 has been added the frame is
// complete: the memories swap halves, and the finished half is read out in
// natural subband order 0..M-1, one subband per clock, as the sum over the
// blocks (saturated to 24 bits), clearing each entry as it is read. Several
// channels may share a subband; their samples add.
//
// Interface: table writes via cfg_wr_t (TBL_BIN, channel = blk*NCH_P + c);
// inputs valid/chan/data (one sample per block); output a contiguous frame of
// M samples starting the clock after the last channel, out_last on the
// last. Frames must be at least M clocks apart. The paper names this corner
// turn; the accumulate-and-sum organisation is this design's.
module corner_turn_c2b
  import rfice_pkg::*;
#(
  parameter int unsigned M      = 512,
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
  output iq_t                      out_data,
  output logic                     out_last
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned CW = $clog2(NCH_P);
  localparam int unsigned BW = (NBLK_P > 1) ? $clog2(NBLK_P) : 1;

  iq_t           acc     [NBLK_P][2][M];
  logic [AW-1:0] bin_map [NBLK_P][NCH_P];
  logic          wsel;
  logic          reading;
  logic [AW-1:0] rk;

  logic [BW-1:0] cfg_blk;
  assign cfg_blk = BW'(cfg.chan >> CW);
  // Unassigned channels read (and write) subband 0.
  initial begin
    for (int b = 0; b < NBLK_P; b++)
      for (int c = 0; c < NCH_P; c++) bin_map[b][c] = '0;
  end

  always_ff @(posedge clk) begin
    if (cfg.valid && cfg.tbl == TBL_BIN && (32'(cfg.chan) >> CW) < NBLK_P)
      bin_map[cfg_blk][CW'(cfg.chan)] <= AW'(cfg.data);
  end

  // Accumulate into the write half, clear the read half as it is read.
  always_ff @(posedge clk) begin
    for (int b = 0; b < NBLK_P; b++) begin
      if (in_valid) begin
        acc[b][wsel][bin_map[b][in_chan]].re <=
          sat_dw(64'(acc[b][wsel][bin_map[b][in_chan]].re) + 64'(in_data[b].re));
        acc[b][wsel][bin_map[b][in_chan]].im <=
          sat_dw(64'(acc[b][wsel][bin_map[b][in_chan]].im) + 64'(in_data[b].im));
      end
      if (reading) acc[b][~wsel][rk] <= '0;
    end
  end

  logic signed [DW+8:0] sum_re, sum_im;
  always_comb begin
    sum_re = '0;
    sum_im = '0;
    for (int b = 0; b < NBLK_P; b++) begin
      sum_re += (DW+9)'(acc[b][~wsel][rk].re);
      sum_im += (DW+9)'(acc[b][~wsel][rk].im);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wsel      <= 1'b0;
      reading   <= 1'b0;
      rk        <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= reading;
      out_last  <= reading && rk == AW'(M - 1);
      if (reading) begin
        out_data.re <= sat_dw(64'(sum_re));
        out_data.im <= sat_dw(64'(sum_im));
        rk <= rk + 1'b1;
        if (rk == AW'(M - 1)) reading <= 1'b0;
      end
      if (in_valid && in_chan == CW'(NCH_P - 1)) begin
        wsel    <= ~wsel;
        reading <= 1'b1;
        rk      <= '0;
      end
    end
  end

  initial begin
    for (int b = 0; b < NBLK_P; b++)
      for (int h = 0; h < 2; h++)
        for (int k = 0; k < M; k++) acc[b][h][k] = '0;
  end

  // The previous frame must be fully read before the next one completes.
  assert property (@(posedge clk) disable iff (rst)
    (in_valid && in_chan == CW'(NCH_P - 1)) |-> !reading || rk == AW'(M - 1));
endmodule
