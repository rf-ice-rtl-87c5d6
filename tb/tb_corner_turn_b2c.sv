// tb_corner_turn_b2c: programs a random channel-to-subband table, then feeds
// frames in bit-reversed bin order (as the FFT delivers them) and checks that
// each block receives, for each channel in order, exactly the sample of the
// subband its table entry names, from the frame just completed.
module tb_corner_turn_b2c;
  import rfice_pkg::*;
  localparam int M = 16, NC = 4, NB = 2, NFR = 5;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_last, out_valid;
  iq_t in_data;
  logic [$clog2(M)-1:0] in_bin;
  logic [$clog2(NC)-1:0] out_chan;
  iq_t out_data [NB];

  corner_turn_b2c #(.M(M), .NCH_P(NC), .NBLK_P(NB)) dut (.*);

  int checks = 0, failures = 0;
  int map [NB][NC];
  int fr [NFR][M];
  int ofr = 0, opos = 0;

  function automatic int bitrev(int v);
    int r = 0;
    for (int i = 0; i < $clog2(M); i++) r |= ((v >> i) & 1) << ($clog2(M) - 1 - i);
    return r;
  endfunction

  always @(posedge clk) if (out_valid && !rst) begin
    checks++;
    if (out_chan != opos[$clog2(NC)-1:0]) failures++;
    for (int b = 0; b < NB; b++) begin
      iq_t g;
      g = out_data[b];
      checks++;
      if (int'(g.re) != fr[ofr][map[b][opos]] || int'(g.im) != -fr[ofr][map[b][opos]]) begin
        failures++;
        if (failures < 8) $display("FAIL fr %0d blk %0d ch %0d got %0d exp %0d", ofr, b, opos, g.re, fr[ofr][map[b][opos]]);
      end
    end
    opos++;
    if (opos == NC) begin opos = 0; ofr++; end
  end

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; in_valid = 0; in_last = 0; in_data = '0; in_bin = '0;
    for (int f = 0; f < NFR; f++) for (int k = 0; k < M; k++) fr[f][k] = int'($urandom_range(0, 100000)) - 50000;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++) begin
      map[b][c] = $urandom_range(0, M - 1);
      @(negedge clk);
      cfg.valid = 1; cfg.tbl = TBL_BIN; cfg.chan = 12'(b * NC + c); cfg.data = 32'(map[b][c]);
    end
    @(negedge clk); cfg.valid = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int k = 0; k < M; k++) begin
        @(negedge clk);
        in_valid = 1; in_bin = $clog2(M)'(bitrev(k));
        in_data.re = DW'(fr[f][bitrev(k)]); in_data.im = DW'(-fr[f][bitrev(k)]);
        in_last = (k == M - 1);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      repeat ($urandom_range(0, 4)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (ofr != NFR) begin failures++; $display("FAIL frames out %0d", ofr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
