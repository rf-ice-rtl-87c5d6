// tb_rfice_top_full: the board firmware at its full size (2 combs, 512
// subbands, 8 blocks of 128 channels per comb; no parameter overrides).
// The ADC strobe comes every second clock (500 MSPS against the 1 GHz
// processing clock of this design) and the Ethernet byte enable every
// eighth clock (1 Gb/s). With CIC2 at R=8 the science data fits the link.
//
// Comb 0 analyses an ADC tone placed at 0.2 subband spacings above subband
// 37, tracked by channel 300 (block 2). Comb 1 runs in carrier loopback with
// channel 1000 (block 7) on subband 400. The test checks per Ethernet
// frame: CRC-32, magic word, header (comb, block, 128 channels, rate), and
// then that the tone channels are steady and well above silent channels,
// that packets of a block arrive every 8 x 64 frames x 512 clocks = 262144
// clocks, and that nothing is dropped.
module tb_rfice_top_full;
  import rfice_pkg::*;
  localparam int NCB = NCOMB, MM = NFFT, NC = NCH, NB = NBLK;
  localparam int PKT_PERIOD = 8 * 64 * (NFFT / 2) * 2;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic bus_wr, bus_rd;
  logic [23:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [63:0] timestamp;
  logic adc_valid [NCB];
  adc_iq_t adc_data [NCB];
  logic car_dac_valid [NCB], nul_dac_valid [NCB];
  adc_iq_t car_dac_data [NCB], nul_dac_data [NCB];
  logic gmii_byte_en, gmii_tx_en;
  logic [7:0] gmii_txd;
  logic [31:0] frame_count;
  logic [31:0] in_drop_count [NCB];
  logic [31:0] in_slip_count [NCB];
  logic [31:0] pkt_drop_count [NCB];

  rfice_top dut (.*);

  int checks = 0, failures = 0;
  real pi = 3.14159265358979;

  byte unsigned fr [$];
  int npkt [NCB][NB];
  int lr_seen [NCB][NB];
  real val_re [NCB][NB][NC], val_im [NCB][NB][NC];
  int pkt_time [NCB][NB][$];
  int cyc = 0;
  int bad = 0;

  function automatic logic [31:0] crc32(byte unsigned b [$], int from, int to);
    logic [31:0] c;
    c = '1;
    for (int i = from; i < to; i++) begin
      c = c ^ 32'(b[i]);
      for (int k = 0; k < 8; k++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    end
    return ~c;
  endfunction

  function automatic logic [31:0] word_at(int i);
    return {fr[22 + 4*i], fr[23 + 4*i], fr[24 + 4*i], fr[25 + 4*i]};
  endfunction

  task automatic decode_frame();
    int n, cb, bk;
    logic [31:0] w1;
    n = fr.size();
    if (n != 8 + 14 + 4 * (PKT_HDR_WORDS + 2 * NC) + 4) begin bad++; return; end
    if ({fr[n-1], fr[n-2], fr[n-3], fr[n-4]} != crc32(fr, 8, n - 4)) begin bad++; return; end
    if (word_at(0) != PKT_MAGIC) begin bad++; return; end
    w1 = word_at(1);
    cb = w1[31:24]; bk = w1[23:16];
    if (cb >= NCB || bk >= NB || w1[7:0] != 8'(NC)) begin bad++; return; end
    npkt[cb][bk]++;
    lr_seen[cb][bk] = w1[10:8];
    pkt_time[cb][bk].push_back(cyc);
    for (int c = 0; c < NC; c++) begin
      val_re[cb][bk][c] = real'($signed(word_at(PKT_HDR_WORDS + 2*c)));
      val_im[cb][bk][c] = real'($signed(word_at(PKT_HDR_WORDS + 2*c + 1)));
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (!rst && gmii_byte_en) begin
      if (gmii_tx_en) fr.push_back(gmii_txd);
      else if (fr.size() > 0) begin decode_frame(); fr.delete(); end
    end
  end

  task automatic bus_write(logic [23:0] a, logic [31:0] d);
    @(negedge clk);
    bus_wr = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_wr = 0;
  endtask

  task automatic set_chan(int comb, int ch, int bin, real d, int amp);
    logic [31:0] fw;
    fw = 32'(longint'(d / 2.0 * 4294967296.0));
    bus_write(24'h10_0000 | 24'(2 << 18) | 24'(comb << 14) | 24'(ch << 2), 32'(bin));
    bus_write(24'h10_0000 | 24'(0 << 18) | 24'(comb << 14) | 24'(ch << 2), fw);
    bus_write(24'h10_0000 | 24'(1 << 18) | 24'(comb << 14) | 24'(ch << 2), 32'(amp));
  endtask

  function automatic real mag(int cb, int bk, int c);
    return $sqrt(val_re[cb][bk][c] * val_re[cb][bk][c] + val_im[cb][bk][c] * val_im[cb][bk][c]);
  endfunction

  localparam int ADC_K = 37;
  localparam real ADC_D = 0.2;
  int adc_n = 0, ph = 0;
  always @(negedge clk) begin
    if (rst) begin
      adc_valid[0] = 0; adc_valid[1] = 0; adc_data[0] = '0; adc_data[1] = '0;
      gmii_byte_en = 0;
    end else begin
      ph++;
      adc_valid[0] = ~adc_valid[0];
      adc_valid[1] = adc_valid[0];
      gmii_byte_en = (ph % 8 == 0);
      if (adc_valid[0]) begin
        adc_data[0].re = 16'(int'(8000.0 * $cos(2.0 * pi * (ADC_K + ADC_D) * adc_n / MM)));
        adc_data[0].im = 16'(int'(8000.0 * $sin(2.0 * pi * (ADC_K + ADC_D) * adc_n / MM)));
        adc_n++;
      end
      timestamp = timestamp + 1;
    end
  end

  task automatic wait_pkts(int cb, int bk, int n);
    int start;
    start = npkt[cb][bk];
    while (npkt[cb][bk] < start + n) @(posedge clk);
  endtask

  initial begin
    #6000000; failures++;
    $display("watchdog expired: frames %0d pkts %0d %0d bad %0d", frame_count, npkt[0][2], npkt[1][7], bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real a1, a2, c1, c2, sil0, sil1;
    bus_wr = 0; bus_rd = 0; bus_addr = 0; bus_wdata = 0; timestamp = 64'h1000;
    repeat (4) @(negedge clk);
    rst = 0;

    set_chan(0, 300, ADC_K, ADC_D, 0);
    set_chan(1, 1000, 400, -0.3, 20000);
    bus_write(24'h000000, 32'(SRC_ADC));
    bus_write(24'h000100, 32'(SRC_CARRIER));
    bus_write(24'h000008, 32'd3);
    bus_write(24'h000108, 32'd3);

    // The loopback comb settles later (synthesis filter, elastic buffer and
    // analysis filter are all in its loop), so it is measured later.
    wait_pkts(0, 2, 3);
    a1 = mag(0, 2, 300 % NC); sil0 = mag(0, 2, 5);
    wait_pkts(0, 2, 1);
    a2 = mag(0, 2, 300 % NC);
    while (npkt[1][7] < 4) @(posedge clk);
    c1 = mag(1, 7, 1000 % NC); sil1 = mag(1, 7, 5);
    wait_pkts(1, 7, 1);
    c2 = mag(1, 7, 1000 % NC);
    $display("adc channel %f -> %f (silent %f); carrier loopback channel %f -> %f (silent %f)", a1, a2, sil0, c1, c2, sil1);
    checks++;
    if (a1 < 1000.0 || a2 < 0.99 * a1 || a2 > 1.01 * a1 || sil0 > 0.01 * a1) begin failures++; $display("FAIL adc channel"); end
    checks++;
    if (c1 < 1000.0 || c2 < 0.99 * c1 || c2 > 1.01 * c1 || sil1 > 0.01 * c1) begin failures++; $display("FAIL carrier loopback channel"); end
    for (int cb = 0; cb < NCB; cb++) for (int bk = 0; bk < NB; bk++) begin
      int k;
      k = pkt_time[cb][bk].size();
      checks++;
      if (k < 2 || lr_seen[cb][bk] != 3) begin failures++; $display("FAIL comb %0d block %0d: %0d packets", cb, bk, k); end
      else begin
        checks++;
        if (pkt_time[cb][bk][k-1] - pkt_time[cb][bk][k-2] != PKT_PERIOD) begin
          failures++; $display("FAIL comb %0d block %0d packet spacing %0d", cb, bk, pkt_time[cb][bk][k-1] - pkt_time[cb][bk][k-2]);
        end
      end
    end
    checks++;
    if (bad != 0 || pkt_drop_count[0] != 0 || pkt_drop_count[1] != 0 || in_drop_count[0] != 0 || in_drop_count[1] != 0) begin
      failures++; $display("FAIL bad frames %0d, drops %0d %0d %0d %0d", bad, pkt_drop_count[0], pkt_drop_count[1], in_drop_count[0], in_drop_count[1]);
    end
    $display("frames %0d, cycles %0d", frame_count, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
