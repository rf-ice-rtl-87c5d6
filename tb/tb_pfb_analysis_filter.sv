// tb_pfb_analysis_filter: drives random complex samples, offered every clock
// (so the ready back-pressure is exercised) and later with gaps, and compares
// every output of every frame with the polyphase sum computed here from the
// stored input history: u[m'] = sum_t h[m+tM] x[n0+m+tM], m = (m'-n0) mod M,
// n0 = frame*M/2. Also checks that frames are M contiguous outputs and that
// the sustained input rate is one sample per two clocks.
module tb_pfb_analysis_filter;
  import rfice_pkg::*;
  localparam int M = 16, TAPS = 4, HOP = M / 2;
  localparam int NIN = 600;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_last;
  adc_iq_t in_data;
  iq_t out_data;
  logic [$clog2(M)-1:0] out_idx;

  pfb_analysis_filter #(.M(M), .TAPS_P(TAPS)) dut (.*);

  int checks = 0, failures = 0;
  int xr [NIN], xi [NIN];
  int nacc = 0, frame = 0, pos = 0, stalls = 0;
  int cyc = 0, acc_at_200 = 0, acc_at_400 = 0;

  always @(posedge clk) begin
    cyc++;
    if (cyc == 200) acc_at_200 = nacc;
    if (cyc == 400) acc_at_400 = nacc;
    if (in_valid && in_ready) nacc++;
    if (in_valid && !in_ready) stalls++;
    if (out_valid && !rst) begin
      longint er, ei;
      int m, n0;
      iq_t g;
      g = out_data;
      n0 = frame * HOP;
      m = (pos - n0) % M; if (m < 0) m += M;
      er = 0; ei = 0;
      for (int t = 0; t < TAPS; t++) begin
        er += longint'(xr[n0 + m + t*M]) * longint'(proto_coef(m + t*M, M, TAPS));
        ei += longint'(xi[n0 + m + t*M]) * longint'(proto_coef(m + t*M, M, TAPS));
      end
      er = er >>> 10; ei = ei >>> 10;
      checks++;
      if (out_idx != pos[$clog2(M)-1:0] || longint'(g.re) != er || longint'(g.im) != ei) begin
        failures++;
        if (failures < 10) $display("FAIL frame %0d pos %0d idx %0d got %0d,%0d exp %0d,%0d", frame, pos, out_idx, g.re, g.im, er, ei);
      end
      checks++;
      if (out_last != (pos == M - 1)) failures++;
      pos++;
      if (pos == M) begin pos = 0; frame++; end
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NIN; i++) begin
      xr[i] = int'($urandom_range(0, 65535)) - 32768;
      xi[i] = int'($urandom_range(0, 65535)) - 32768;
    end
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data.re = ADC_W'(xr[i]); in_data.im = ADC_W'(xi[i]);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      if (i > 450) begin @(negedge clk); in_valid = 0; repeat ($urandom_range(0, 3)) @(negedge clk); end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (100) @(posedge clk);
    checks++;
    if (frame != (NIN - TAPS*M) / HOP + 1) begin failures++; $display("FAIL frames %0d", frame); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    // Steady state: HOP inputs per M clocks.
    checks++;
    if (acc_at_400 - acc_at_200 < 200 * HOP / M - 2 || acc_at_400 - acc_at_200 > 200 * HOP / M + 2) begin
      failures++; $display("FAIL rate %0d", acc_at_400 - acc_at_200);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
