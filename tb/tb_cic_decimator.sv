// tb_cic_decimator: three decimators with R = 1, 4 and 64 (ORDER 3) receive
// the same interleaved random channel streams. Each output is compared with
// a direct FIR model computed here: the R^ORDER-tap kernel of ORDER
// cascaded length-R boxcars, applied at input frames mR+R-1 and divided by
// R^ORDER with flooring. Output counts per channel check the decimation rate.
// A fourth instance switches its rate from 8 to 2 mid-run and must change its
// output rate accordingly.
module tb_cic_decimator;
  import rfice_pkg::*;
  localparam int NC = 4, ORD = 3, NFR = 300;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid;
  logic [1:0] in_chan;
  iq_t in_data;
  logic [2:0] lr [4];
  logic ov [4];
  logic [1:0] oc [4];
  iq_t od [4];

  for (genvar i = 0; i < 4; i++) begin : g_dut
    cic_decimator #(.NCH_P(NC), .ORDER(ORD), .MAX_LOG2R(6)) dut (
      .clk, .rst, .log2r(lr[i]), .in_valid, .in_chan, .in_data,
      .out_valid(ov[i]), .out_chan(oc[i]), .out_data(od[i]));
  end

  int checks = 0, failures = 0;
  int xr [NFR][NC], xi [NFR][NC];
  int nout [4][NC];
  int sw_before = 0, sw_after = 0, frame_now = 0;
  longint h [];

  function automatic longint ref_out(int R, int m, int c, bit im);
    longint kern [];
    longint acc;
    int L;
    L = ORD * (R - 1) + 1;
    kern = new[L];
    for (int k = 0; k < L; k++) kern[k] = 0;
    kern[0] = 1;
    for (int o = 0; o < ORD; o++) begin
      longint tmp [];
      tmp = new[L];
      for (int k = 0; k < L; k++) begin
        tmp[k] = 0;
        for (int j = 0; j < R; j++) if (k - j >= 0) tmp[k] += kern[k - j];
      end
      kern = tmp;
    end
    acc = 0;
    for (int k = 0; k < L; k++) begin
      int n;
      n = m * R + R - 1 - k;
      if (n >= 0) acc += kern[k] * longint'(im ? xi[n][c] : xr[n][c]);
    end
    return acc >>> (ORD * $clog2(R));
  endfunction

  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < 3; i++) if (ov[i]) begin
      int R, c;
      iq_t g;
      g = od[i];
      R = (i == 0) ? 1 : (i == 1) ? 4 : 64;
      c = oc[i];
      checks++;
      if (longint'(g.re) != ref_out(R, nout[i][c], c, 0) || longint'(g.im) != ref_out(R, nout[i][c], c, 1)) begin
        failures++;
        if (failures < 8) $display("FAIL R=%0d ch %0d out %0d got %0d exp %0d", R, c, nout[i][c], g.re, ref_out(R, nout[i][c], c, 0));
      end
      nout[i][c]++;
    end
    if (ov[3] && oc[3] == 0) begin
      if (frame_now < 150) sw_before++; else if (frame_now >= 152) sw_after++;
    end
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    lr[0] = 0; lr[1] = 2; lr[2] = 6; lr[3] = 3;
    for (int i = 0; i < 4; i++) for (int c = 0; c < NC; c++) nout[i][c] = 0;
    for (int f = 0; f < NFR; f++) for (int c = 0; c < NC; c++) begin
      xr[f][c] = int'($urandom_range(0, 16000000)) - 8000000;
      xi[f][c] = int'($urandom_range(0, 16000000)) - 8000000;
    end
    in_valid = 0; in_chan = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int f = 0; f < NFR; f++) begin
      frame_now = f;
      if (f == 150) lr[3] = 1;
      for (int c = 0; c < NC; c++) begin
        in_valid = 1; in_chan = 2'(c);
        in_data.re = DW'(xr[f][c]); in_data.im = DW'(xi[f][c]);
        @(negedge clk);
      end
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      checks += 3;
      if (nout[0][c] != NFR) failures++;
      if (nout[1][c] != NFR / 4) failures++;
      if (nout[2][c] != NFR / 64) failures++;
    end
    checks += 2;
    if (sw_before < 18 || sw_before > 19) begin failures++; $display("FAIL before switch %0d", sw_before); end
    if (sw_after < 73 || sw_after > 74) begin failures++; $display("FAIL after switch %0d", sw_after); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
