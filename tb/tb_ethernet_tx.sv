// tb_ethernet_tx: three sources each queue packets (a short one that needs
// padding and longer ones); the byte enable is active every other clock.
// Every frame on the transmit interface is parsed: preamble and delimiter,
// addresses and EtherType, payload words equal to the next packet of the
// source named in the packet's first word, padding to 46 bytes, a correct
// CRC-32 (computed here bit by bit from the polynomial 0x04C11DB7, MSB-first
// on bit-reversed bytes), and an inter-frame gap of at least 12 byte times.
// All packets must arrive, and sources must be served in turn.
module tb_ethernet_tx;
  import rfice_pkg::*;
  localparam int NS = 3;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic src_valid [NS], src_ready [NS];
  pkt_word_t src_word [NS];
  logic byte_en, tx_en;
  logic [7:0] txd;
  logic [31:0] frame_count;

  ethernet_tx #(.NSRC(NS), .DST_MAC(48'h0011_2233_4455), .SRC_MAC(48'h0266_7788_99AA), .ETHERTYPE(16'h88B5)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] q [NS][$];     // words queued at each source
  int qlen [NS][$];           // packet lengths
  logic [31:0] exp_q [NS][$];
  int exp_len [NS][$];
  byte unsigned fr [$];
  int frames = 0, idle_run = 100, last_src = -1, order_bad = 0;

  // Sources.
  always_comb for (int s = 0; s < NS; s++) begin
    src_valid[s] = q[s].size() > 0;
    src_word[s].data = q[s].size() > 0 ? q[s][0] : 32'h0;
    src_word[s].sop = 0; src_word[s].eop = 0;
    if (q[s].size() > 0) begin
      src_word[s].sop = (qlen[s][0] < 0);
      src_word[s].eop = (qlen[s][0] == 1) || (qlen[s][0] == -1);
    end
  end
  always @(posedge clk) for (int s = 0; s < NS; s++) if (src_valid[s] && src_ready[s]) begin
    void'(q[s].pop_front());
    if (qlen[s][0] < 0) qlen[s][0] = -qlen[s][0];
    qlen[s][0]--;
    if (qlen[s][0] == 0) void'(qlen[s].pop_front());
    else if (qlen[s][0] < 0) qlen[s][0] = -qlen[s][0];
  end

  function automatic logic [31:0] crc_ref(byte unsigned b [$], int from, int to);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    for (int i = from; i < to; i++) begin
      logic [7:0] rb;
      for (int k = 0; k < 8; k++) rb[k] = b[i][7 - k];
      for (int k = 7; k >= 0; k--) begin
        logic fb;
        fb = c[31] ^ rb[k];
        c = {c[30:0], 1'b0};
        if (fb) c = c ^ 32'h04C1_1DB7;
      end
    end
    // reflect and invert
    begin
      logic [31:0] r;
      for (int k = 0; k < 32; k++) r[k] = c[31 - k];
      return ~r;
    end
  endfunction

  task automatic check_frame();
    int n, src, plen, len;
    logic [31:0] crc;
    n = fr.size();
    checks++;
    if (n < 8 + 14 + 46 + 4) begin failures++; $display("FAIL short frame %0d", n); return; end
    for (int i = 0; i < 7; i++) if (fr[i] != 8'h55) begin failures++; $display("FAIL preamble"); return; end
    if (fr[7] != 8'hD5) begin failures++; return; end
    checks++;
    if ({fr[8], fr[9], fr[10], fr[11], fr[12], fr[13]} != 48'h0011_2233_4455 ||
        {fr[14], fr[15], fr[16], fr[17], fr[18], fr[19]} != 48'h0266_7788_99AA ||
        {fr[20], fr[21]} != 16'h88B5) begin failures++; $display("FAIL header"); end
    src = fr[22];
    checks++;
    if (src >= NS || exp_q[src].size() == 0) begin failures++; $display("FAIL source %0d", src); return; end
    if (last_src >= 0 && src != (last_src + 1) % NS && exp_q[(last_src + 1) % NS].size() > 0) order_bad++;
    last_src = src;
    len = exp_len[src].pop_front();
    plen = (4 * len < 46) ? 46 : 4 * len;
    checks++;
    if (n != 22 + plen + 4) begin failures++; $display("FAIL length %0d exp %0d", n, 22 + plen + 4); end
    for (int wdx = 0; wdx < len; wdx++) begin
      logic [31:0] e;
      e = exp_q[src].pop_front();
      checks++;
      if ({fr[22 + 4*wdx], fr[23 + 4*wdx], fr[24 + 4*wdx], fr[25 + 4*wdx]} != e) begin
        failures++; $display("FAIL payload word %0d", wdx);
      end
    end
    crc = crc_ref(fr, 8, n - 4);
    checks++;
    if ({fr[n-1], fr[n-2], fr[n-3], fr[n-4]} != crc) begin failures++; $display("FAIL crc %h exp %h", {fr[n-1], fr[n-2], fr[n-3], fr[n-4]}, crc); end
    frames++;
  endtask

  always @(posedge clk) if (!rst && byte_en) begin
    if (tx_en) begin
      if (fr.size() == 0) begin
        checks++;
        if (idle_run < 12) begin failures++; $display("FAIL gap %0d", idle_run); end
      end
      fr.push_back(txd);
      idle_run = 0;
    end else begin
      if (fr.size() > 0) begin check_frame(); fr.delete(); end
      idle_run++;
    end
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int total;
    total = 0;
    byte_en = 0;
    repeat (3) @(negedge clk);
    for (int s = 0; s < NS; s++) for (int p = 0; p < 3; p++) begin
      int len;
      len = (p == 0) ? 3 : 20 + 7 * p + s;
      qlen[s].push_back(-len);
      exp_len[s].push_back(len);
      for (int i = 0; i < len; i++) begin
        logic [31:0] v;
        v = (i == 0) ? {8'(s), 8'(p), 16'h00AA} : $urandom;
        q[s].push_back(v);
        exp_q[s].push_back(v);
      end
      total++;
    end
    rst = 0;
    fork
      forever begin @(negedge clk); byte_en = ~byte_en; end
    join_none
    wait (frame_count == 32'(total));
    repeat (60) @(negedge clk);
    checks++;
    if (frames != total) begin failures++; $display("FAIL frames %0d", frames); end
    checks++;
    if (order_bad != 0) begin failures++; $display("FAIL round robin"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
