// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipelined FFT.
//
// The stage works on blocks of 2*D samples, D = N >> (STAGE+1). During the
// first D samples of a block it stores the inputs in a D-deep delay line and
// emits the differences held over from the previous block, multiplied by the
// twiddle factor W_N^(k*2^STAGE). During the second D samples it forms the
// butterfly: the sum (a+b)/2 goes out at once and the difference (a-b)/2
// goes into the delay line. Each butterfly halves its result, so a chain of
// log2(N) stages computes the DFT divided by N and cannot overflow.
//
// Interface: one sample per in_valid, no back-pressure. The first D inputs
// only fill the delay line; after that every input produces one output,
// registered (one cycle), so the output stream is the input stream delayed by
// D samples. Twiddles come from a table computed at elaboration. INVERSE
// selects conjugate twiddles (inverse transform, same 1/N scaling).
// The SDF structure is a standard choice; the paper names only "FFT".
module fft_sdf_stage
  import rfice_pkg::*;
#(
  parameter int unsigned N       = 512,
  parameter int unsigned STAGE   = 0,
  parameter bit          INVERSE = 1'b0
) (
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  iq_t  in_data,
  output logic out_valid,
  output iq_t  out_data
);
  localparam int unsigned D  = N >> (STAGE + 1);
  localparam int unsigned DA = (D > 1) ? $clog2(D) : 1;

  iq_t               dline [D];
  logic [DA-1:0]     ptr;
  logic [DA:0]       cnt;      // position within the 2*D block
  logic              primed;
  logic signed [COEF_W-1:0] tw_re [D];
  logic signed [COEF_W-1:0] tw_im [D];

  for (genvar k = 0; k < D; k++) begin : g_tw
    localparam logic signed [COEF_W-1:0] CR = cos_q17(k * (1 << STAGE), N);
    localparam logic signed [COEF_W-1:0] CI = sin_q17(k * (1 << STAGE), N);
    // forward: W = cos - j sin ; inverse: cos + j sin
    assign tw_re[k] = CR;
    assign tw_im[k] = INVERSE ? CI : -CI;
  end

  logic  second_half;
  logic [DA-1:0] k_idx;
  iq_t   a, sum_h, dif_h, rot;

  assign second_half = (cnt >= (DA+1)'(D));
  assign a           = dline[ptr];
  assign k_idx       = (D > 1) ? cnt[DA-1:0] : '0;

  always_comb begin
    sum_h.re = DW'((33'(a.re) + 33'(in_data.re)) >>> 1);
    sum_h.im = DW'((33'(a.im) + 33'(in_data.im)) >>> 1);
    dif_h.re = DW'((33'(a.re) - 33'(in_data.re)) >>> 1);
    dif_h.im = DW'((33'(a.im) - 33'(in_data.im)) >>> 1);
    rot      = cmul_q17(a, tw_re[k_idx], tw_im[k_idx], 1'b0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr       <= '0;
      cnt       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (D > 1) ptr <= (ptr == DA'(D - 1)) ? '0 : ptr + 1'b1;
        cnt <= (cnt == (DA+1)'(2 * D - 1)) ? '0 : cnt + 1'b1;
        if (second_half) begin
          dline[ptr] <= dif_h;
          out_data   <= sum_h;
          out_valid  <= 1'b1;
          primed     <= 1'b1;
        end else begin
          dline[ptr] <= in_data;
          out_data   <= rot;
          out_valid  <= primed;
        end
      end
    end
  end
endmodule
