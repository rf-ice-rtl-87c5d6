// fft_r2sdf: streaming N-point FFT (forward or inverse), radix-2
// single-path delay feedback, one complex sample per clock.
//
// log2(N) fft_sdf_stage instances are chained. Frames enter in natural order,
// back to back or with gaps (in_valid low), and must start on a frame
// boundary after reset. Results leave in bit-reversed order; out_bin gives
// the natural bin (or, for the inverse, time) index of each output and
// out_last marks the last output of a frame. The result is DFT/N
// (each stage halves). Latency is N-1 samples of input plus one register per
// stage; the last frame is pushed out by the first samples of the next one.
//
// The paper calls for FFTs inside the polyphase down- and up-converters; the
// pipeline architecture, scaling and output order are choices of this design.
module fft_r2sdf
  import rfice_pkg::*;
#(
  parameter int unsigned N       = 512,
  parameter bit          INVERSE = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  iq_t                  in_data,
  output logic                 out_valid,
  output iq_t                  out_data,
  output logic [$clog2(N)-1:0] out_bin,
  output logic                 out_last
);
  localparam int unsigned L = $clog2(N);

  logic v   [L+1];
  iq_t  d   [L+1];
  assign v[0] = in_valid;
  assign d[0] = in_data;

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(.N(N), .STAGE(s), .INVERSE(INVERSE)) u_stage (
      .clk, .rst,
      .in_valid(v[s]), .in_data(d[s]),
      .out_valid(v[s+1]), .out_data(d[s+1])
    );
  end

  logic [L-1:0] ocnt;
  always_ff @(posedge clk) begin
    if (rst) ocnt <= '0;
    else if (v[L]) ocnt <= ocnt + 1'b1;
  end

  always_comb begin
    for (int i = 0; i < L; i++) out_bin[i] = ocnt[L-1-i];
  end
  assign out_valid = v[L];
  assign out_data  = d[L];
  assign out_last  = v[L] && (ocnt == '1);
endmodule
