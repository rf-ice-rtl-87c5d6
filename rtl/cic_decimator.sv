// cic_decimator: multichannel cascaded integrator-comb decimator, used as
// CIC1 (fixed decimation by 64) and CIC2 (decimation by 1, 2, 4 ... 64).
//
// NCH_P channels arrive interleaved, one per clock, channel 0 first; each
// channel has ORDER integrators and ORDER comb delays held in per-channel
// state memories, so one set of adders serves all channels. Every sample
// runs through the integrator cascade; once every R = 2^log2r frames (a
// frame is one sample of every channel) the channel's integrator output also
// runs through the comb cascade and leaves, divided by the DC gain R^ORDER
// (an arithmetic shift of ORDER*log2r), so the filter has unity DC gain.
// Internal width is DW + ORDER*MAX_LOG2R bits; wrap-around in the integrators
// is harmless, as usual for CIC filters.
//
// Interface: in_valid/in_chan/in_data, out_valid/out_chan/out_data one clock
// later. log2r may change at any time; the decimation phase restarts and the
// next output of each channel is a transient. The paper gives the two
// decimators and their rates; the order (3) and the widths are assumed.
module cic_decimator
  import rfice_pkg::*;
#(
  parameter int unsigned NCH_P     = 128,
  parameter int unsigned ORDER     = 3,
  parameter int unsigned MAX_LOG2R = 6
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [2:0]               log2r,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_chan,
  input  iq_t                      in_data,
  output logic                     out_valid,
  output logic [$clog2(NCH_P)-1:0] out_chan,
  output iq_t                      out_data
);
  localparam int unsigned CW = $clog2(NCH_P);
  localparam int unsigned AW = DW + ORDER * MAX_LOG2R;
  localparam int unsigned MW = (MAX_LOG2R > 0) ? MAX_LOG2R : 1;

  typedef struct packed {
    logic signed [AW-1:0] re;
    logic signed [AW-1:0] im;
  } wide_t;

  wide_t integ [ORDER][NCH_P];
  wide_t dly   [ORDER][NCH_P];

  logic [MW-1:0] dec_cnt;
  logic [2:0]    log2r_q;
  logic [MW-1:0] mask;
  logic          emit;
  logic [2:0]    lr;

  assign lr   = (log2r > 3'(MAX_LOG2R)) ? 3'(MAX_LOG2R) : log2r;
  assign mask = MW'((1 << lr) - 1);
  assign emit = (dec_cnt & mask) == mask;

  wide_t i_new [ORDER];   // new integrator states
  wide_t c_src [ORDER];   // input of each comb stage (= its next delay value)
  wide_t run_i, run_c, c_last;
  always_comb begin
    run_i.re = AW'(in_data.re);
    run_i.im = AW'(in_data.im);
    for (int k = 0; k < ORDER; k++) begin
      run_i.re = integ[k][in_chan].re + run_i.re;
      run_i.im = integ[k][in_chan].im + run_i.im;
      i_new[k] = run_i;
    end
    run_c = run_i;
    for (int k = 0; k < ORDER; k++) begin
      c_src[k] = run_c;
      run_c.re = run_c.re - dly[k][in_chan].re;
      run_c.im = run_c.im - dly[k][in_chan].im;
    end
    c_last = run_c;
  end

  logic signed [AW-1:0] sh_re, sh_im;
  assign sh_re = c_last.re >>> (ORDER * lr);
  assign sh_im = c_last.im >>> (ORDER * lr);

  always_ff @(posedge clk) begin
    if (rst) begin
      dec_cnt   <= '0;
      log2r_q   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      log2r_q   <= lr;
      if (lr != log2r_q) dec_cnt <= '0;
      else if (in_valid && in_chan == CW'(NCH_P - 1)) dec_cnt <= dec_cnt + 1'b1;
      if (in_valid) begin
        for (int k = 0; k < ORDER; k++) integ[k][in_chan] <= i_new[k];
        if (emit) begin
          for (int k = 0; k < ORDER; k++)
            dly[k][in_chan] <= c_src[k];
          out_valid   <= 1'b1;
          out_chan    <= in_chan;
          out_data.re <= sat_dw(64'(sh_re));
          out_data.im <= sat_dw(64'(sh_im));
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < ORDER; k++)
      for (int c = 0; c < NCH_P; c++) begin
        integ[k][c] = '0;
        dly[k][c]   = '0;
      end
  end
endmodule
