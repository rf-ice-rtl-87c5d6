// tb_pfb_upconverter: one channel (block 1, channel 2) is mapped to subband
// K and fed a sample sequence of amplitude A rotating by pi*D per frame;
// another channel is mapped to subband K2 with a constant sample. The
// output is correlated with complex exponentials: the first tone must appear
// at (K + D) subband spacings and the second at K2 with the expected
// amplitudes (about 2*A/M each, the 1/M of the scaled inverse FFT times the
// overlap gain of the 2x oversampled filter bank), while a frequency with no
// channel shows no tone. Output samples must come at HOP per frame.
module tb_pfb_upconverter;
  import rfice_pkg::*;
  localparam int M = 32, T = 4, NC = 4, NB = 2, HOP = M / 2, NFR = 120;
  localparam int K = 5, K2 = 12;
  localparam real D = 0.25;
  localparam real A = 200000.0, A2 = 100000.0;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, out_valid;
  logic [1:0] in_chan;
  iq_t in_data [NB];
  adc_iq_t out_data;

  pfb_upconverter #(.M(M), .TAPS_P(T), .NCH_P(NC), .NBLK_P(NB)) dut (.*);

  int checks = 0, failures = 0;
  int nout = 0;
  real c1r = 0, c1i = 0, c2r = 0, c2i = 0, c3r = 0, c3i = 0;
  real pi = 3.14159265358979;
  int skip = 3 * HOP * 2 * T;

  function automatic void corr(input real f, input int n, input real yr, input real yi, inout real cr, inout real ci);
    real a;
    a = -2.0 * pi * f * n / M;
    cr += yr * $cos(a) - yi * $sin(a);
    ci += yr * $sin(a) + yi * $cos(a);
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    adc_iq_t o;
    o = out_data;
    if (nout >= skip) begin
      corr(K + D, nout, real'(o.re), real'(o.im), c1r, c1i);
      corr(K2, nout, real'(o.re), real'(o.im), c2r, c2i);
      corr(20.5, nout, real'(o.re), real'(o.im), c3r, c3i);
    end
    nout++;
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real m1, m2, m3;
    int nc;
    cfg = '0; in_valid = 0; in_chan = 0;
    for (int b = 0; b < NB; b++) in_data[b] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int ch = 0; ch < NB * NC; ch++) begin
      cfg.valid = 1; cfg.tbl = TBL_BIN; cfg.chan = 12'(ch);
      cfg.data = (ch == NC + 2) ? 32'(K) : (ch == 1) ? 32'(K2) : 32'(0);
      @(negedge clk);
    end
    cfg.valid = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int c = 0; c < NC; c++) begin
        in_valid = 1; in_chan = 2'(c);
        for (int b = 0; b < NB; b++) in_data[b] = '0;
        if (c == 2) begin
          in_data[1].re = DW'(int'(A * $cos(pi * D * f)));
          in_data[1].im = DW'(int'(A * $sin(pi * D * f)));
        end
        if (c == 1) in_data[0].re = DW'(int'(A2));
        @(negedge clk);
      end
      in_valid = 0;
      repeat (M - NC) @(negedge clk);
    end
    repeat (3 * M) @(negedge clk);
    nc = nout - skip;
    m1 = $sqrt(c1r * c1r + c1i * c1i) / nc;
    m2 = $sqrt(c2r * c2r + c2i * c2i) / nc;
    m3 = $sqrt(c3r * c3r + c3i * c3i) / nc;
    $display("tone1 %f (2A/M %f)  tone2 %f (2A2/M %f)  empty %f  samples %0d", m1, 2*A/M, m2, 2*A2/M, m3, nout);
    checks++;
    if (m1 < 0.8 * 2 * A / M || m1 > 1.2 * 2 * A / M) failures++;
    checks++;
    if (m2 < 0.8 * 2 * A2 / M || m2 > 1.2 * 2 * A2 / M) failures++;
    checks++;
    if (m3 > 0.02 * 2 * A2 / M) failures++;
    checks++;
    // Output blocks begin once 2*T frames of the inverse FFT are present;
    // the inverse FFT holds back one frame.
    if (nout != (NFR - 1 - 2 * T + 1) * HOP) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
