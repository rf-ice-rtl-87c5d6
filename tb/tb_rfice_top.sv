// tb_rfice_top: end-to-end test of the board firmware at reduced sizes
// (2 combs, 32 subbands, 2 blocks of 4 channels), driven only through its
// ports: the control bus, the ADC streams and the Ethernet byte interface.
//
// Comb 0 analyses its own carrier synthesiser (carrier loopback): two
// channels get a subband, an offset frequency and an amplitude; their science
// values must be steady and well above a silent channel. Comb 1 analyses an
// ADC tone placed at the frequency of one of its channels. Every Ethernet
// frame is checked (preamble, CRC-32) and its packet decoded. Then:
//   - CIC2 is switched from R=1 to R=4 on comb 0 (packets every 4x as long,
//     header shows the new rate),
//   - the Ethernet side is stalled so packets overflow and are dropped,
//   - comb 0 switches to the nuller loopback with the feedback loop as the
//     science source and a loop gain on one channel: the nuller DAC carries
//     the loop's tone, and with only the nuller looped back the feedback is
//     negative, so the loop state (the science values) decays.
// Each of these mechanisms is counted and must occur.
module tb_rfice_top;
  import rfice_pkg::*;
  localparam int NCB = 2, MM = 32, TT = 4, NC = 4, NB = 2;
  localparam int NSRC = NCB * NB;
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

  rfice_top #(.NCOMB_P(NCB), .M(MM), .TAPS_P(TT), .NCH_P(NC), .NBLK_P(NB)) dut (.*);

  int checks = 0, failures = 0;
  real pi = 3.14159265358979;

  // ---------------- Ethernet frame decoding ----------------
  byte unsigned fr [$];
  int npkt [NCB][NB];
  int lr_seen [NCB][NB];
  real val_re [NCB][NB][NC], val_im [NCB][NB][NC];
  int pkt_time [NCB][NB][$];
  int cyc = 0;
  logic [63:0] last_ts [NCB][NB];
  int ts_bad = 0, crc_bad = 0;

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
    if (n < 8 + 14 + 4 * (PKT_HDR_WORDS + 2 * NC) + 4) begin crc_bad++; return; end
    if ({fr[n-1], fr[n-2], fr[n-3], fr[n-4]} != crc32(fr, 8, n - 4)) begin crc_bad++; return; end
    if (word_at(0) != PKT_MAGIC) begin crc_bad++; return; end
    w1 = word_at(1);
    cb = w1[31:24]; bk = w1[23:16];
    if (cb >= NCB || bk >= NB || w1[7:0] != 8'(NC)) begin crc_bad++; return; end
    npkt[cb][bk]++;
    lr_seen[cb][bk] = w1[10:8];
    if ({word_at(3), word_at(4)} < last_ts[cb][bk]) ts_bad++;
    last_ts[cb][bk] = {word_at(3), word_at(4)};
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

  // ---------------- stimulus helpers ----------------
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

  // ADC of comb 1: tone at (ADC_K + ADC_D) subband spacings; comb 0 ADC silent.
  localparam int ADC_K = 9;
  localparam real ADC_D = 0.1;
  int adc_n = 0;
  always @(negedge clk) begin
    if (rst) begin
      adc_valid[0] = 0; adc_valid[1] = 0; adc_data[0] = '0; adc_data[1] = '0;
    end else begin
      adc_valid[0] = ~adc_valid[0];
      adc_valid[1] = adc_valid[0];
      if (adc_valid[1]) begin
        adc_data[1].re = 16'(int'(8000.0 * $cos(2.0 * pi * (ADC_K + ADC_D) * adc_n / MM)));
        adc_data[1].im = 16'(int'(8000.0 * $sin(2.0 * pi * (ADC_K + ADC_D) * adc_n / MM)));
        adc_n++;
      end
      timestamp = timestamp + 1;
    end
  end

  // Nuller DAC activity of comb 0.
  real nul_peak = 0;
  always @(posedge clk) if (!rst && nul_dac_valid[0]) begin
    real a;
    a = $sqrt(real'(nul_dac_data[0].re) ** 2 + real'(nul_dac_data[0].im) ** 2);
    if (a > nul_peak) nul_peak = a;
  end

  task automatic wait_pkts(int cb, int bk, int n);
    int start;
    start = npkt[cb][bk];
    while (npkt[cb][bk] < start + n) @(posedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    #400000; failures++;
    $display("watchdog expired: frames %0d npkt %0d %0d %0d %0d crc_bad %0d drops %0d %0d in_drops %0d %0d", frame_count, npkt[0][0], npkt[0][1], npkt[1][0], npkt[1][1], crc_bad, pkt_drop_count[0], pkt_drop_count[1], in_drop_count[0], in_drop_count[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_carrier_loop = 0, n_adc = 0, n_rate_switch = 0, n_overflow = 0, n_nuller_loop = 0, n_loop_sci = 0;

  initial begin
    real m1a, m1b, m6, msil, m3, m3b, mq, g0, g1;
    bus_wr = 0; bus_rd = 0; bus_addr = 0; bus_wdata = 0; timestamp = 64'h100;
    gmii_byte_en = 0;
    for (int c = 0; c < NCB; c++) for (int b = 0; b < NB; b++) begin npkt[c][b] = 0; last_ts[c][b] = 0; end
    repeat (4) @(negedge clk);
    rst = 0;
    fork forever begin @(negedge clk); gmii_byte_en = ~gmii_byte_en; end join_none

    // Identification.
    @(negedge clk); bus_rd = 1; bus_addr = 24'h000F00; @(negedge clk); bus_rd = 0;
    checks++; if (bus_rdata != PKT_MAGIC) failures++;

    // Comb 0: carrier loopback, channels 1 (block 0) and 6 (block 1).
    set_chan(0, 1, 5, 0.25, 20000);
    set_chan(0, 6, 11, -0.4, 10000);
    set_chan(0, 2, 20, 0.0, 0);
    bus_write(24'h000000, 32'(SRC_CARRIER));
    // Comb 1: ADC tone at channel 3.
    set_chan(1, 3, ADC_K, ADC_D, 0);
    set_chan(1, 2, 20, 0.0, 0);
    bus_write(24'h000100, 32'(SRC_ADC));

    // Let filters and integrators settle, then look at steady packets.
    wait_pkts(0, 0, 8);
    wait_pkts(1, 0, 1);
    m1a = mag(0, 0, 1);
    wait_pkts(0, 0, 2);
    m1b = mag(0, 0, 1); m6 = mag(0, 1, 2); msil = mag(0, 0, 2);
    m3 = mag(1, 0, 3);
    wait_pkts(1, 0, 2);
    m3b = mag(1, 0, 3); mq = mag(1, 0, 2);
    $display("carrier loopback: ch1 %f -> %f, ch6 %f, silent %f; adc channel %f -> %f, silent %f", m1a, m1b, m6, msil, m3, m3b, mq);
    checks++;
    if (m1a < 1000.0 || m1b < 0.99 * m1a || m1b > 1.01 * m1a) begin failures++; $display("FAIL carrier loopback unsteady"); end
    else n_carrier_loop++;
    checks++;
    if (m6 < 500.0 || msil > 0.01 * m1b) begin failures++; $display("FAIL second channel / silent channel"); end
    checks++;
    if (m3 < 1000.0 || m3b < 0.99 * m3 || m3b > 1.01 * m3 || mq > 0.01 * m3) begin failures++; $display("FAIL adc channel"); end
    else n_adc++;
    checks++;
    if (in_drop_count[0] != 0 || in_drop_count[1] != 0 || pkt_drop_count[0] != 0 || in_slip_count[0] > 1) begin
      failures++; $display("FAIL unexpected drops %0d %0d %0d", in_drop_count[0], in_drop_count[1], pkt_drop_count[0]);
    end

    // CIC2 rate switch on comb 0: R = 4.
    bus_write(24'h000008, 32'd2);
    wait_pkts(0, 0, 3);
    begin
      int k, d1, d2;
      k = pkt_time[0][0].size();
      d1 = pkt_time[0][0][k-1] - pkt_time[0][0][k-2];
      d2 = pkt_time[1][0][pkt_time[1][0].size()-1] - pkt_time[1][0][pkt_time[1][0].size()-2];
      $display("packet spacing comb0 %0d comb1 %0d, header log2r %0d", d1, d2, lr_seen[0][0]);
      checks++;
      if (lr_seen[0][0] != 2 || d1 < 4 * d2 - 40 || d1 > 4 * d2 + 40) begin failures++; $display("FAIL rate switch"); end
      else n_rate_switch++;
    end
    checks++;
    if (mag(0, 0, 1) < 0.99 * m1b || mag(0, 0, 1) > 1.01 * m1b) begin failures++; $display("FAIL level after rate switch %f", mag(0, 0, 1)); end

    // Overflow: stall the Ethernet side.
    disable fork;
    gmii_byte_en = 0;
    repeat (40 * MM * 64) @(negedge clk);
    checks++;
    if (pkt_drop_count[1] == 0) begin failures++; $display("FAIL no packet overflow"); end
    else n_overflow++;
    fork forever begin @(negedge clk); gmii_byte_en = ~gmii_byte_en; end join_none
    wait_pkts(1, 0, 2);

    // Nuller loopback with the feedback loop as science source on comb 0.
    bus_write(24'h000008, 32'd0);
    bus_write(24'h000004, 32'(SCI_LOOP));
    bus_write(24'h10_0000 | 24'(3 << 18) | 24'(0 << 14) | 24'(1 << 2), 32'd65536 / 64);
    bus_write(24'h000000, 32'(SRC_NULLER));
    wait_pkts(0, 0, 3);
    g0 = mag(0, 0, 1);
    wait_pkts(0, 0, 2);
    g1 = mag(0, 0, 1);
    $display("nuller loopback: loop output %f -> %f, nuller DAC peak %f", g0, g1, nul_peak);
    checks++;
    if (nul_peak < 100.0) begin failures++; $display("FAIL nuller DAC silent"); end
    else n_nuller_loop++;
    checks++;
    // With only the nuller looped back the feedback is negative: the loop
    // state (science output in SCI_LOOP mode) must decay but stay non-zero.
    if (g1 >= 0.95 * g0 || g1 < 1.0) begin failures++; $display("FAIL loop science not responding"); end
    else n_loop_sci++;

    checks++;
    if (crc_bad != 0 || ts_bad != 0) begin failures++; $display("FAIL %0d bad frames, %0d timestamp errors", crc_bad, ts_bad); end
    $display("mechanisms: carrier_loopback=%0d adc=%0d cic2_rate_switch=%0d packet_overflow=%0d nuller_loopback=%0d loop_science=%0d frames=%0d",
             n_carrier_loop, n_adc, n_rate_switch, n_overflow, n_nuller_loop, n_loop_sci, frame_count);
    checks++;
    if (n_carrier_loop == 0 || n_adc == 0 || n_rate_switch == 0 || n_overflow == 0 || n_nuller_loop == 0 || n_loop_sci == 0)
      failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
