// tb_channel_dds: block 1 of a 4-channel layout gets four frequency words
// (one write to block 0 must be ignored). Channels are then visited in turn
// for many frames, and each LO output is compared with cos/sin of the
// expected phase k*f (k = visit number), truncated to the table resolution,
// computed here in real arithmetic.
module tb_channel_dds;
  import rfice_pkg::*;
  localparam int NC = 4, NFR = 200;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, lo_valid;
  logic [1:0] in_chan, lo_chan;
  logic signed [COEF_W-1:0] lo_cos, lo_sin;

  channel_dds #(.NCH_P(NC), .BLK_ID(1)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned fw [NC];
  int visits [NC];

  always @(posedge clk) if (!rst && lo_valid) begin
    longint unsigned ph;
    real a, ec, es;
    int c;
    c = lo_chan;
    ph = (fw[c] * longint'(visits[c])) & 64'hFFFF_FFFF;
    a = 2.0 * 3.14159265358979 * real'(ph >> (32 - LUT_AW)) / real'(1 << LUT_AW);
    ec = $cos(a) * 131071.0; es = $sin(a) * 131071.0;
    checks++;
    if ((real'(lo_cos) - ec) > 1.0 || (ec - real'(lo_cos)) > 1.0 || (real'(lo_sin) - es) > 1.0 || (es - real'(lo_sin)) > 1.0) begin
      failures++;
      if (failures < 8) $display("FAIL ch %0d visit %0d got %0d,%0d exp %f,%f", c, visits[c], lo_cos, lo_sin, ec, es);
    end
    visits[c]++;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; in_valid = 0; in_chan = 0;
    fw[0] = 32'h0100_0000; fw[1] = 32'h1234_5678; fw[2] = 32'hF000_0000; fw[3] = 32'h0000_0000;
    for (int c = 0; c < NC; c++) visits[c] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < NC; c++) begin
      cfg.valid = 1; cfg.tbl = TBL_FREQ; cfg.chan = 12'(NC + c); cfg.data = 32'(fw[c]);
      @(negedge clk);
    end
    cfg.chan = 12'(0); cfg.data = 32'hDEAD_BEEF;   // block 0: not ours
    @(negedge clk);
    cfg.valid = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int c = 0; c < NC; c++) begin
        in_valid = 1; in_chan = 2'(c);
        @(negedge clk);
      end
      in_valid = 0;
      if (f % 3 == 0) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (visits[0] != NFR || visits[3] != NFR) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
