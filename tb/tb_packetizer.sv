// tb_packetizer: feeds sets of 4 channel samples with a running timestamp,
// while the consumer alternates between taking every word and stalling for
// long stretches, so that packets are dropped. Every received packet is
// checked word by word against the set its sequence number names (header,
// timestamp, samples); the number of missing sequence numbers must equal
// the drop counter, and drops must have happened.
module tb_packetizer;
  import rfice_pkg::*;
  localparam int NC = 4, NSET = 60, NW = PKT_HDR_WORDS + 2 * NC;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic [2:0] log2r;
  logic [63:0] timestamp;
  logic in_valid, out_valid, out_ready;
  logic [1:0] in_chan;
  iq_t in_data;
  pkt_word_t out_word;
  logic [31:0] drop_count;

  packetizer #(.NCH_P(NC), .BLK_ID(5), .COMB_ID(1)) dut (.*);

  int checks = 0, failures = 0;
  int sr [NSET][NC], si [NSET][NC];
  longint sts [NSET];
  int wpos = 0, pkts = 0, cur_seq = 0, max_seq = -1;
  logic [31:0] words [NW];

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    words[wpos] = out_word.data;
    checks++;
    if (out_word.sop != (wpos == 0) || out_word.eop != (wpos == NW - 1)) failures++;
    wpos++;
    if (wpos == NW) begin
      int s;
      wpos = 0; pkts++;
      s = int'(words[2]);
      checks++;
      if (words[0] != 32'h52464943 || words[1] != {8'd1, 8'd5, 5'b0, 3'd3, 8'd4} || s >= NSET || s <= max_seq) begin
        failures++; $display("FAIL header %h %h %0d", words[0], words[1], s);
      end else begin
        max_seq = s;
        checks++;
        if ({words[3], words[4]} != 64'(sts[s])) failures++;
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'(words[6 + 2*c]) != sr[s][c] || int'(words[7 + 2*c]) != si[s][c]) begin
            failures++; $display("FAIL data seq %0d ch %0d", s, c);
          end
        end
      end
    end
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    out_ready = 1;
    forever begin
      repeat (150) @(negedge clk);
      out_ready = 0;
      repeat (120) @(negedge clk);
      out_ready = 1;
    end
  end

  initial begin
    log2r = 3; timestamp = 64'h1234_5678_0000_0000;
    in_valid = 0; in_chan = 0; in_data = '0;
    for (int s = 0; s < NSET; s++) for (int c = 0; c < NC; c++) begin
      sr[s][c] = int'($urandom_range(0, 16000000)) - 8000000;
      si[s][c] = int'($urandom_range(0, 16000000)) - 8000000;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int s = 0; s < NSET; s++) begin
      sts[s] = longint'(timestamp);
      for (int c = 0; c < NC; c++) begin
        in_valid = 1; in_chan = 2'(c);
        in_data.re = DW'(sr[s][c]); in_data.im = DW'(si[s][c]);
        @(negedge clk);
        timestamp = timestamp + 1;
      end
      in_valid = 0;
      repeat (8) begin @(negedge clk); timestamp = timestamp + 1; end
    end
    in_valid = 0; out_ready = 1;
    repeat (300) @(negedge clk);
    checks++;
    if (pkts + int'(drop_count) != NSET) begin failures++; $display("FAIL pkts %0d drops %0d", pkts, drop_count); end
    checks++;
    if (drop_count == 0) begin failures++; $display("FAIL no overflow"); end
    $display("packets %0d dropped %0d", pkts, drop_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
