// tb_readout_comb: one readout comb at reduced size (32 subbands, 2 blocks
// of 4 channels) with comb number 1, fed by an ADC strobe every second
// clock and with all packet outputs always ready.
//  - Configuration records addressed to comb 0 must be ignored: a large
//    carrier amplitude written for comb 0 must not appear.
//  - Carrier loopback: channel 5 (block 1) plays a tone 0.3 spacings above
//    subband 7 and analyses it; its science value must settle and stay
//    steady, a silent channel must stay near zero, and the carrier DAC must
//    deliver one sample per ADC strobe on average.
//  - ADC mode: a tone at subband 3 + 0.1 is tracked by channel 0.
//  - Packets: header comb and block fields, one packet per block every
//    64 frames x 16 samples x 2 clocks = 2048 clocks at CIC2 R=1.
module tb_readout_comb;
  import rfice_pkg::*;
  localparam int MM = 32, TT = 4, NC = 4, NB = 2;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  comb_ctrl_t ctrl;
  logic [63:0] timestamp;
  logic adc_valid;
  adc_iq_t adc_data;
  logic car_dac_valid, nul_dac_valid;
  adc_iq_t car_dac_data, nul_dac_data;
  logic pkt_valid [NB];
  logic pkt_ready [NB];
  pkt_word_t pkt_word [NB];
  logic [31:0] in_drop_count, in_slip_count;
  logic [31:0] pkt_drop_count [NB];

  readout_comb #(.M(MM), .TAPS_P(TT), .NCH_P(NC), .NBLK_P(NB), .COMB_ID(1)) dut (.*);

  int checks = 0, failures = 0;
  real pi = 3.14159265358979;
  int cyc = 0;

  // Packet capture per block.
  logic [31:0] words [NB][$];
  int npkt [NB];
  int hdr_bad = 0;
  int last_t [NB], period [NB];
  real val_re [NB][NC], val_im [NB][NC];

  always @(posedge clk) begin
    cyc++;
    if (!rst) for (int b = 0; b < NB; b++) if (pkt_valid[b] && pkt_ready[b]) begin
      pkt_word_t w;
      w = pkt_word[b];
      if (w.sop) words[b].delete();
      words[b].push_back(w.data);
      if (w.eop) begin
        if (words[b].size() != PKT_HDR_WORDS + 2 * NC || words[b][0] != PKT_MAGIC ||
            words[b][1][31:24] != 8'd1 || words[b][1][23:16] != 8'(b)) hdr_bad++;
        else begin
          for (int c = 0; c < NC; c++) begin
            val_re[b][c] = real'($signed(words[b][PKT_HDR_WORDS + 2*c]));
            val_im[b][c] = real'($signed(words[b][PKT_HDR_WORDS + 2*c + 1]));
          end
          period[b] = cyc - last_t[b];
          last_t[b] = cyc;
          npkt[b]++;
        end
      end
    end
  end

  function automatic real mag(int b, int c);
    return $sqrt(val_re[b][c] ** 2 + val_im[b][c] ** 2);
  endfunction

  // ADC strobe every second clock; tone only in the ADC phase.
  bit tone_on = 0;
  int adc_n = 0, n_strobe = 0, n_car = 0;
  real nul_peak = 0;
  always @(negedge clk) begin
    if (rst) begin
      adc_valid = 0; adc_data = '0;
    end else begin
      adc_valid = ~adc_valid;
      if (adc_valid) begin
        adc_data.re = tone_on ? 16'(int'(8000.0 * $cos(2.0 * pi * 3.1 * adc_n / MM))) : '0;
        adc_data.im = tone_on ? 16'(int'(8000.0 * $sin(2.0 * pi * 3.1 * adc_n / MM))) : '0;
        adc_n++;
      end
      timestamp = timestamp + 1;
    end
  end
  always @(posedge clk) if (!rst) begin
    adc_iq_t d;
    if (adc_valid) n_strobe++;
    if (car_dac_valid) n_car++;
    d = nul_dac_data;
    if (nul_dac_valid && (d.re != 0 || d.im != 0)) nul_peak = 1;
  end

  task automatic wr(tbl_e t, int comb, int ch, logic [31:0] d);
    @(negedge clk);
    cfg.valid = 1; cfg.tbl = t; cfg.comb = 4'(comb); cfg.chan = 12'(ch); cfg.data = d;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  task automatic wait_pkts(int b, int n);
    int s;
    s = npkt[b];
    while (npkt[b] < s + n) @(posedge clk);
  endtask

  initial begin
    #300000; failures++;
    $display("watchdog expired: packets %0d %0d", npkt[0], npkt[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real m1, m2, sil, t1, t2, ratio;
    int s0, c0;
    cfg = '0; timestamp = 0;
    ctrl.in_sel = SRC_CARRIER; ctrl.sci_sel = SCI_DOWNCONV; ctrl.cic2_log2r = 3'd0;
    for (int b = 0; b < NB; b++) begin pkt_ready[b] = 1; npkt[b] = 0; last_t[b] = 0; period[b] = 0; end
    repeat (4) @(negedge clk);
    rst = 0;
    // Channel 5 = block 1, channel 1: subband 7, offset 0.3, amplitude 20000.
    wr(TBL_BIN, 1, 5, 32'd7);
    wr(TBL_FREQ, 1, 5, 32'(longint'(0.3 / 2.0 * 4294967296.0)));
    wr(TBL_AMP, 1, 5, 32'd20000);
    // Records for comb 0: must be ignored by comb 1.
    wr(TBL_BIN, 0, 6, 32'd12);
    wr(TBL_AMP, 0, 6, 32'd30000);
    wr(TBL_BIN, 1, 6, 32'd12);

    wait_pkts(1, 10);
    m1 = mag(1, 1);
    s0 = n_strobe; c0 = n_car;
    wait_pkts(1, 2);
    m2 = mag(1, 1); sil = mag(1, 2);
    ratio = real'(n_car - c0) / real'(n_strobe - s0);
    $display("carrier loopback: %f -> %f, comb-0 channel %f, DAC/strobe ratio %f, period %0d", m1, m2, sil, ratio, period[1]);
    checks++;
    if (m1 < 1000.0 || m2 < 0.99 * m1 || m2 > 1.01 * m1) begin failures++; $display("FAIL loopback channel unsteady"); end
    checks++;
    if (sil > 0.01 * m1) begin failures++; $display("FAIL foreign configuration used"); end
    checks++;
    if (ratio < 0.98 || ratio > 1.02) begin failures++; $display("FAIL carrier DAC rate"); end
    checks++;
    if (period[0] != 2048 || period[1] != 2048) begin failures++; $display("FAIL packet period %0d %0d", period[0], period[1]); end
    checks++;
    if (nul_peak != 0) begin failures++; $display("FAIL nuller DAC active without gain"); end

    // ADC mode with a tone tracked by channel 0 (block 0).
    wr(TBL_BIN, 1, 0, 32'd3);
    wr(TBL_FREQ, 1, 0, 32'(longint'(0.1 / 2.0 * 4294967296.0)));
    ctrl.in_sel = SRC_ADC; tone_on = 1;
    wait_pkts(0, 10);
    t1 = mag(0, 0);
    wait_pkts(0, 2);
    t2 = mag(0, 0);
    $display("adc tone: %f -> %f, other channel %f", t1, t2, mag(0, 1));
    checks++;
    if (t1 < 1000.0 || t2 < 0.99 * t1 || t2 > 1.01 * t1 || mag(0, 1) > 0.01 * t1) begin failures++; $display("FAIL adc tone channel"); end
    checks++;
    if (hdr_bad != 0 || in_drop_count != 0 || pkt_drop_count[0] != 0 || pkt_drop_count[1] != 0) begin
      failures++; $display("FAIL bad packets %0d / drops", hdr_bad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
