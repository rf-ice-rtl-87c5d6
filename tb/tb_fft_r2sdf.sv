// tb_fft_r2sdf: checks the streaming FFT against a direct DFT computed in
// real arithmetic. Random frames (and a single-tone frame) are pushed back to
// back, some with idle cycles between samples; every output bin of every
// frame is compared with DFT/N within a small tolerance. Both the forward and
// the inverse transform are instantiated. Also checks the output ordering
// tags and the pipeline latency (out of first frame starts N-1 samples late).
module tb_fft_r2sdf;
  import rfice_pkg::*;
  localparam int N = 64;
  localparam int NFR = 6;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic in_valid;
  iq_t  in_data;
  logic ov [2];
  iq_t  od [2];
  logic [$clog2(N)-1:0] ob [2];
  logic ol [2];

  fft_r2sdf #(.N(N), .INVERSE(1'b0)) dut_f (.clk, .rst, .in_valid, .in_data,
    .out_valid(ov[0]), .out_data(od[0]), .out_bin(ob[0]), .out_last(ol[0]));
  fft_r2sdf #(.N(N), .INVERSE(1'b1)) dut_i (.clk, .rst, .in_valid, .in_data,
    .out_valid(ov[1]), .out_data(od[1]), .out_bin(ob[1]), .out_last(ol[1]));

  int checks = 0, failures = 0;
  int xr [NFR+1][N];
  int xi [NFR+1][N];
  int ocount [2];
  int frame_o [2];
  int in_count = 0;
  int first_out_at = -1;

  task automatic check_out(int w);
    real er, ei, a;
    int f, k, gr, gi;
    iq_t g;
    f = frame_o[w]; k = ob[w];
    g = od[w]; gr = int'(g.re); gi = int'(g.im);
    er = 0; ei = 0;
    for (int n = 0; n < N; n++) begin
      a = (w == 0 ? -1.0 : 1.0) * 2.0 * 3.14159265358979 * k * n / N;
      er += xr[f][n] * $cos(a) - xi[f][n] * $sin(a);
      ei += xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
    end
    er /= N; ei /= N;
    checks++;
    if ((er - gr) > 200 || (gr - er) > 200 || (ei - gi) > 200 || (gi - ei) > 200) begin
      failures++;
      if (failures < 10) $display("FAIL inv=%0d frame %0d bin %0d got %h exp %f,%f", w, f, k, od[w], er, ei);
    end
  endtask

  always @(posedge clk) begin
    for (int w = 0; w < 2; w++) if (ov[w] && frame_o[w] < NFR) begin
      if (w == 0 && first_out_at < 0) first_out_at = in_count;
      check_out(w);
      ocount[w]++;
      checks++;
      if (ol[w] != (ocount[w] % N == 0)) failures++;
      if (ol[w]) frame_o[w]++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = '0;
    ocount = '{0, 0}; frame_o = '{0, 0};
    for (int f = 0; f <= NFR; f++)
      for (int n = 0; n < N; n++) begin
        if (f == 1) begin
          xr[f][n] = int'(2000000.0 * $cos(2.0 * 3.14159265358979 * 5 * n / N));
          xi[f][n] = int'(2000000.0 * $sin(2.0 * 3.14159265358979 * 5 * n / N));
        end else begin
          xr[f][n] = int'($urandom_range(0, 8000000)) - 4000000;
          xi[f][n] = int'($urandom_range(0, 8000000)) - 4000000;
        end
      end
    repeat (4) @(posedge clk);
    rst <= 0;
    for (int f = 0; f <= NFR; f++)
      for (int n = 0; n < N; n++) begin
        @(posedge clk);
        in_valid <= 1; in_data.re <= DW'(xr[f][n]); in_data.im <= DW'(xi[f][n]);
        in_count++;
        if (f >= 3 && ($urandom_range(0, 3) == 0)) begin
          @(posedge clk); in_valid <= 0;
        end
      end
    @(posedge clk); in_valid <= 0;
    repeat (50) @(posedge clk);
    checks++;
    if (frame_o[0] != NFR || frame_o[1] != NFR) begin failures++; $display("FAIL frames %0d %0d", frame_o[0], frame_o[1]); end
    // Latency: first output appears after N-1 further input samples (plus registers).
    checks++;
    if (first_out_at < N || first_out_at > N + 12) begin failures++; $display("FAIL latency %0d", first_out_at); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
