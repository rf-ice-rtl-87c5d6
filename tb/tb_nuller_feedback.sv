// tb_nuller_feedback: random gains (including negative and zero) and random
// inputs on 4 interleaved channels; each output is compared with an
// integer model of y <- sat24(y + floor(G*x / 2^16)) kept here. One gain is
// rewritten mid-run, which must clear that channel's accumulator. A large
// gain drives one channel into saturation.
module tb_nuller_feedback;
  import rfice_pkg::*;
  localparam int NC = 4, NFR = 400;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, out_valid;
  logic [1:0] in_chan, out_chan;
  iq_t in_data, out_data;

  nuller_feedback #(.NCH_P(NC), .BLK_ID(0)) dut (.*);

  int checks = 0, failures = 0, sat_seen = 0;
  longint g [NC];
  longint yr [NC], yi [NC];
  longint pend_r, pend_i;

  function automatic longint sat24(longint v);
    if (v > 8388607) return 8388607;
    if (v < -8388608) return -8388608;
    return v;
  endfunction

  function automatic longint fdiv(longint v);
    return (v >= 0) ? (v / 65536) : -((-v + 65535) / 65536);
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    iq_t o;
    o = out_data;
    checks++;
    if (longint'(o.re) != yr[out_chan] || longint'(o.im) != yi[out_chan]) begin
      failures++;
      if (failures < 8) $display("FAIL ch %0d got %0d,%0d exp %0d,%0d", out_chan, o.re, o.im, yr[out_chan], yi[out_chan]);
    end
    if (yr[out_chan] == 8388607 || yr[out_chan] == -8388608) sat_seen++;
  end

  task automatic set_gain(int c, longint v);
    cfg.valid = 1; cfg.tbl = TBL_GAIN; cfg.chan = 12'(c); cfg.data = 32'(v);
    g[c] = v; yr[c] = 0; yi[c] = 0;
    @(negedge clk);
    cfg.valid = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0; in_valid = 0; in_chan = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    set_gain(0, 65536 / 8); set_gain(1, -65536 / 3); set_gain(2, 0); set_gain(3, 131071);
    for (int f = 0; f < NFR; f++) begin
      if (f == 200) set_gain(1, 65536 / 2);
      for (int c = 0; c < NC; c++) begin
        longint xr, xi;
        xr = longint'($urandom_range(0, 2000000)) - 1000000;
        xi = longint'($urandom_range(0, 2000000)) - 1000000;
        if (c == 3) begin xr = 900000; xi = -900000; end
        in_valid = 1; in_chan = 2'(c); in_data.re = DW'(xr); in_data.im = DW'(xi);
        yr[c] = sat24(yr[c] + fdiv(g[c] * xr));
        yi[c] = sat24(yi[c] + fdiv(g[c] * xi));
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
