// tb_corner_turn_c2b: two blocks of four channels are mapped onto eight
// subbands by a table with deliberate collisions (several channels in one
// subband, across and within blocks). For each of several frames of random
// channel samples the output frame must be, in subband order, the sum of the
// samples of the channels mapped there (and zero elsewhere), proving the
// accumulators are cleared between frames.
module tb_corner_turn_c2b;
  import rfice_pkg::*;
  localparam int M = 8, NC = 4, NB = 2, NFR = 6;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, out_valid, out_last;
  logic [1:0] in_chan;
  iq_t in_data [NB];
  iq_t out_data;

  corner_turn_c2b #(.M(M), .NCH_P(NC), .NBLK_P(NB)) dut (.*);

  int checks = 0, failures = 0;
  int map [NB][NC] = '{'{3, 3, 0, 7}, '{3, 5, 0, 1}};
  int xr [NFR][NB][NC];
  int ofr = 0, ok = 0;

  always @(posedge clk) if (!rst && out_valid) begin
    int er, ei;
    iq_t o;
    o = out_data;
    er = 0; ei = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++)
      if (map[b][c] == ok) begin er += xr[ofr][b][c]; ei -= 2 * xr[ofr][b][c]; end
    checks++;
    if (int'(o.re) != er || int'(o.im) != ei || out_last != (ok == M - 1)) begin
      failures++;
      if (failures < 8) $display("FAIL frame %0d bin %0d got %0d exp %0d", ofr, ok, o.re, er);
    end
    ok++;
    if (ok == M) begin ok = 0; ofr++; end
  end

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; in_valid = 0; in_chan = 0;
    for (int b = 0; b < NB; b++) in_data[b] = '0;
    for (int f = 0; f < NFR; f++) for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++)
      xr[f][b][c] = int'($urandom_range(0, 200000)) - 100000;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) for (int c = 0; c < NC; c++) begin
      cfg.valid = 1; cfg.tbl = TBL_BIN; cfg.chan = 12'(b * NC + c); cfg.data = 32'(map[b][c]);
      @(negedge clk);
    end
    cfg.valid = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int c = 0; c < NC; c++) begin
        in_valid = 1; in_chan = 2'(c);
        for (int b = 0; b < NB; b++) begin
          in_data[b].re = DW'(xr[f][b][c]); in_data[b].im = DW'(-2 * xr[f][b][c]);
        end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (M - NC + $urandom_range(0, 3)) @(negedge clk);
    end
    repeat (M + 4) @(negedge clk);
    checks++;
    if (ofr != NFR) begin failures++; $display("FAIL frames %0d", ofr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
