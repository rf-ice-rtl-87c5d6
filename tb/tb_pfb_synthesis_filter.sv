// tb_pfb_synthesis_filter: random frames (time samples delivered in
// bit-reversed order, as the inverse FFT produces them) go into a 16-point,
// 2-tap synthesis filter. Every output sample is compared with the gather
// sum y[n] = sum_j g[r + j*HOP] v_{F-j}[n mod M] computed here, including
// the sample count (HOP per frame once 2*TAPS frames are present) and
// that outputs of a block are on consecutive clocks.
module tb_pfb_synthesis_filter;
  import rfice_pkg::*;
  localparam int M = 16, T = 2, HOP = M / 2, NFR = 12;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid, in_last, out_valid;
  iq_t in_data;
  logic [3:0] in_idx;
  adc_iq_t out_data;

  pfb_synthesis_filter #(.M(M), .TAPS_P(T)) dut (.*);

  int checks = 0, failures = 0;
  int vr [NFR][M], vi [NFR][M];
  int nout = 0, gaps = 0;
  logic prev_valid = 0;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      int F, r, n;
      longint er, ei;
      adc_iq_t o;
      o = out_data;
      F = 2 * T - 1 + nout / HOP; r = nout % HOP; n = F * HOP + r;
      er = 0; ei = 0;
      for (int j = 0; j < 2 * T; j++) begin
        er += longint'(proto_coef(r + j * HOP, M, T)) * longint'(vr[F - j][n % M]);
        ei += longint'(proto_coef(r + j * HOP, M, T)) * longint'(vi[F - j][n % M]);
      end
      checks++;
      if (int'(o.re) != sat16(er >>> 17) || int'(o.im) != sat16(ei >>> 17)) begin
        failures++;
        if (failures < 8) $display("FAIL n %0d got %0d,%0d exp %0d,%0d", n, o.re, o.im, er >>> 17, ei >>> 17);
      end
      if (r != 0 && !prev_valid) gaps++;
      nout++;
    end
    prev_valid = out_valid;
  end

  function automatic int bitrev4(int v);
    return ((v & 1) << 3) | ((v & 2) << 1) | ((v & 4) >> 1) | ((v & 8) >> 3);
  endfunction

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_last = 0; in_data = '0; in_idx = 0;
    for (int f = 0; f < NFR; f++) for (int m = 0; m < M; m++) begin
      vr[f][m] = int'($urandom_range(0, 100000)) - 50000;
      vi[f][m] = int'($urandom_range(0, 100000)) - 50000;
    end
    vr[5][3] = 8000000;   // drives one block into saturation
    repeat (3) @(negedge clk);
    rst = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int k = 0; k < M; k++) begin
        in_valid = 1; in_idx = 4'(bitrev4(k));
        in_data.re = DW'(vr[f][bitrev4(k)]); in_data.im = DW'(vi[f][bitrev4(k)]);
        in_last = (k == M - 1);
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (M) @(negedge clk);
    checks++;
    if (nout != (NFR - 2 * T + 1) * HOP) begin failures++; $display("FAIL count %0d", nout); end
    checks++;
    if (gaps != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
