// tb_baseband_processor: a 4-channel block. Channels 0-2 receive tones that
// rotate exactly at their DDS frequencies, so after the down-mix each is a
// constant of the tone's amplitude; the science packets (CIC1 /64, CIC2 /2)
// must then carry I ~= amplitude, Q ~= 0. Channel 3 has no input but a
// static carrier amplitude: its carrier output must equal amplitude * LO,
// with LO computed here from the frequency word. Then the science
// multiplexer is switched to the feedback loop with unity gain on channel 1:
// the nuller output magnitude must grow by the input amplitude every frame,
// and the packets must show the integrated value. Also checks the packet
// cadence: one packet per 128 frames.
module tb_baseband_processor;
  import rfice_pkg::*;
  localparam int NC = 4, NFR = 1300;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  sci_sel_e sci_sel;
  logic [2:0] cic2_log2r;
  logic [63:0] timestamp;
  logic in_valid, nul_valid, car_valid, out_valid, out_ready;
  logic [1:0] in_chan, nul_chan, car_chan;
  iq_t in_data, nul_data, car_data;
  pkt_word_t out_word;
  logic [31:0] drop_count;

  baseband_processor #(.NCH_P(NC), .BLK_ID(0), .COMB_ID(0)) dut (.*);

  int checks = 0, failures = 0;
  longint unsigned fw [NC];
  int amp_in [NC];
  int car_visits = 0;
  int pkts = 0, wpos = 0, frame = 0;
  int pkt_frame [$];
  int words [PKT_HDR_WORDS + 2*NC];
  int last_nul_mag = 0, nul_steps = 0, nul_bad = 0;
  real pi = 3.14159265358979;

  // Carrier output of channel 3: amplitude 40000 * LO / 2^11.
  always @(posedge clk) if (!rst && car_valid && car_chan == 3) begin
    longint unsigned ph;
    real a, er;
    iq_t o;
    o = car_data;
    ph = (fw[3] * longint'(car_visits)) & 64'hFFFF_FFFF;
    a = 2.0 * pi * real'(ph >> (32 - LUT_AW)) / real'(1 << LUT_AW);
    er = $cos(a) * 131071.0 * 40000.0 / 2048.0;
    checks++;
    if ((real'(o.re) - er) > 30.0 || (er - real'(o.re)) > 30.0) begin
      failures++;
      if (failures < 8) $display("FAIL carrier visit %0d got %0d exp %f", car_visits, o.re, er);
    end
    car_visits++;
  end

  // Nuller output of channel 1 in loop mode: magnitude grows by ~1000 per frame.
  always @(posedge clk) if (!rst && nul_valid && nul_chan == 1 && sci_sel == SCI_LOOP) begin
    iq_t o;
    int mag;
    o = nul_data;
    mag = int'($sqrt(real'(o.re) * real'(o.re) + real'(o.im) * real'(o.im)));
    if (last_nul_mag > 0 && mag < 8000000) begin
      nul_steps++;
      if (mag - last_nul_mag < 990 || mag - last_nul_mag > 1010) nul_bad++;
    end
    last_nul_mag = mag;
  end

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    words[wpos] = int'(out_word.data);
    wpos++;
    if (wpos == PKT_HDR_WORDS + 2*NC) begin
      wpos = 0; pkts++;
      pkt_frame.push_back(frame);
      if (pkts >= 3 && sci_sel == SCI_DOWNCONV) begin
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (words[6+2*c] < amp_in[c] - amp_in[c] / 100 || words[6+2*c] > amp_in[c] + amp_in[c] / 100 ||
              words[7+2*c] > amp_in[c] / 100 || words[7+2*c] < -amp_in[c] / 100) begin
            failures++;
            $display("FAIL science pkt %0d ch %0d got %0d,%0d exp %0d,0", pkts, c, words[6+2*c], words[7+2*c], amp_in[c]);
          end
        end
      end
      if (sci_sel == SCI_LOOP && pkts >= 4) begin
        // Loop output: integrated value, far above the single-frame amplitude.
        checks++;
        if (words[8] < 50 * amp_in[1] && words[9] < 50 * amp_in[1]) begin
          failures++; $display("FAIL loop science %0d", words[8]);
        end
      end
    end
  end

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(tbl_e t, int c, logic [31:0] d);
    cfg.valid = 1; cfg.tbl = t; cfg.chan = 12'(c); cfg.data = d;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  initial begin
    cfg = '0; in_valid = 0; in_chan = 0; in_data = '0; out_ready = 1;
    sci_sel = SCI_DOWNCONV; cic2_log2r = 1; timestamp = 0;
    fw[0] = 32'h0040_0000; fw[1] = 32'hFF00_0000; fw[2] = 32'h0123_4567; fw[3] = 32'h0800_0000;
    amp_in[0] = 1000000; amp_in[1] = 1000; amp_in[2] = 3000000; amp_in[3] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int c = 0; c < NC; c++) wr(TBL_FREQ, c, 32'(fw[c]));
    wr(TBL_AMP, 3, 32'd40000);
    for (int f = 0; f < NFR; f++) begin
      frame = f;
      if (f == 3 * 128 + 64) begin
        sci_sel = SCI_LOOP;
        wr(TBL_GAIN, 1, 32'd65536);
        pkts = 0;
      end
      for (int c = 0; c < NC; c++) begin
        longint unsigned ph;
        real a;
        ph = (fw[c] * longint'(f)) & 64'hFFFF_FFFF;
        a = 2.0 * pi * real'(ph) / 4294967296.0;
        in_valid = 1; in_chan = 2'(c);
        in_data.re = DW'(int'($cos(a) * amp_in[c]));
        in_data.im = DW'(int'($sin(a) * amp_in[c]));
        timestamp = timestamp + 1;
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
    end
    repeat (40) @(negedge clk);
    checks++;
    if (car_visits != NFR) failures++;
    checks++;
    if (nul_steps < 500 || nul_bad > 0) begin failures++; $display("FAIL nuller steps %0d bad %0d", nul_steps, nul_bad); end
    // Cadence: consecutive packets 128 frames apart.
    for (int i = 1; i < pkt_frame.size(); i++) begin
      checks++;
      if (pkt_frame[i] - pkt_frame[i-1] != 128 && pkt_frame[i] - pkt_frame[i-1] != 0) begin
        failures++; $display("FAIL cadence %0d", pkt_frame[i] - pkt_frame[i-1]);
      end
    end
    checks++;
    if (drop_count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
