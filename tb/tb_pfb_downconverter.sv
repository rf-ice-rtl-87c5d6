// tb_pfb_downconverter: a complex tone at (K + D) subband spacings enters a
// 32-subband downconverter at one sample per two clocks. Channel 1 of block 0
// is mapped to subband K, channel 0 of block 1 to subband K+1 (the tone also
// appears there, the bank being 2x oversampled) and channel 3 of block 1 to a
// far subband. After the filter has filled, channel 1 must rotate by pi*D
// per frame with a steady magnitude, the neighbour must carry the tone too,
// and the far channel must be nearly empty. One frame of channel samples
// per HOP input samples.
module tb_pfb_downconverter;
  import rfice_pkg::*;
  localparam int M = 32, T = 4, NC = 4, NB = 2, HOP = M / 2, NIN = 4000;
  localparam int K = 6;
  localparam real D = 0.3;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready, out_valid;
  adc_iq_t in_data;
  logic [1:0] out_chan;
  iq_t out_data [NB];

  pfb_downconverter #(.M(M), .TAPS_P(T), .NCH_P(NC), .NBLK_P(NB)) dut (.*);

  int checks = 0, failures = 0;
  int frames = 0;
  real pi = 3.14159265358979;
  real prev_ph = 0, prev_mag = 0;
  real nb_mag = 0, far_mag = 0;
  int ph_bad = 0, mag_bad = 0, nmeas = 0;

  always @(posedge clk) if (!rst && out_valid) begin
    iq_t a, b;
    a = out_data[0]; b = out_data[1];
    if (out_chan == 1) begin
      real ph, mag, dph;
      frames++;
      ph = $atan2(real'(a.im), real'(a.re));
      mag = $sqrt(real'(a.re) * real'(a.re) + real'(a.im) * real'(a.im));
      if (frames > 2 * T + 2) begin
        dph = ph - prev_ph;
        while (dph > pi) dph -= 2 * pi;
        while (dph < -pi) dph += 2 * pi;
        nmeas++;
        if (dph < pi * D - 0.01 || dph > pi * D + 0.01) ph_bad++;
        if (mag < 0.98 * prev_mag || mag > 1.02 * prev_mag) mag_bad++;
      end
      prev_ph = ph; prev_mag = mag;
    end
    if (out_chan == 0 && frames > 2 * T + 2) nb_mag = $sqrt(real'(b.re) * real'(b.re) + real'(b.im) * real'(b.im));
    if (out_chan == 3 && frames > 2 * T + 2) far_mag = $sqrt(real'(b.re) * real'(b.re) + real'(b.im) * real'(b.im));
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic map(int ch, int bin);
    cfg.valid = 1; cfg.tbl = TBL_BIN; cfg.chan = 12'(ch); cfg.data = 32'(bin);
    @(negedge clk);
    cfg.valid = 0;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    map(1, K); map(NC + 0, K + 1); map(NC + 3, K + 12);
    for (int n = 0; n < NIN; n++) begin
      in_valid = 1;
      in_data.re = ADC_W'(int'(20000.0 * $cos(2.0 * pi * (K + D) * n / M)));
      in_data.im = ADC_W'(int'(20000.0 * $sin(2.0 * pi * (K + D) * n / M)));
      @(negedge clk);
      in_valid = 0;
      @(negedge clk);
    end
    repeat (4 * M) @(negedge clk);
    $display("frames %0d mag %f neighbour %f far %f", frames, prev_mag, nb_mag, far_mag);
    checks++;
    if (nmeas < 200 || ph_bad != 0 || mag_bad != 0) begin failures++; $display("FAIL rotation: %0d bad phase, %0d bad mag of %0d", ph_bad, mag_bad, nmeas); end
    checks++;
    if (prev_mag < 0.5 * 20000 * 128 || prev_mag > 1.2 * 20000 * 128) failures++;
    checks++;
    if (nb_mag < 0.1 * prev_mag) failures++;
    checks++;
    if (far_mag > 0.001 * prev_mag) failures++;
    checks++;
    // The FFT holds back one frame.
    if (frames != (NIN - T * M) / HOP) begin failures++; $display("FAIL frame count %0d", frames); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
