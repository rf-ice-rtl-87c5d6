// input_mux: selects what the polyphase downconverter of a comb analyses:
// the ADC stream, or a loopback of the comb's own carrier or nuller
// synthesiser output (for testing the signal path without analog
// hardware).
//
// The ADC sample strobe always sets the timing: the signal path downstream
// is paced by the converter, also in loopback, so the synthesiser (itself
// paced by the analysis frames) and the analyser stay in step. The
// synthesiser delivers HOP samples per frame in a burst, so loopback samples
// pass through an elastic buffer of DEPTH samples; after a selection change
// or an underrun the buffer first fills to PREFILL samples, and until then
// zeros are analysed. On every ADC strobe one sample (ADC data, or the
// buffer's oldest sample) goes into a one-sample output stage with a
// valid/ready handshake to the analysis filter.
//
// None of the sources can be stalled: a sample that finds the output stage
// or the buffer full is dropped and counted (drop_count, an input overflow);
// a buffer underrun while draining is counted in slip_count.
// Interface: three valid-qualified 16-bit complex sources, sel (in_sel_e),
// out_valid/out_ready/out_data one clock after the ADC strobe. The paper
// shows the multiplexer and its three inputs; the elastic buffer, handshake
// and counters are this design's.
module input_mux
  import rfice_pkg::*;
#(
  parameter int unsigned DEPTH   = 512,
  parameter int unsigned PREFILL = 128
) (
  input  logic        clk,
  input  logic        rst,
  input  in_sel_e     sel,
  input  logic        adc_valid,
  input  adc_iq_t     adc_data,
  input  logic        car_valid,
  input  adc_iq_t     car_data,
  input  logic        nul_valid,
  input  adc_iq_t     nul_data,
  output logic        out_valid,
  input  logic        out_ready,
  output adc_iq_t     out_data,
  output logic [31:0] drop_count,
  output logic [31:0] slip_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  adc_iq_t       fifo [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   level;
  logic          primed;
  in_sel_e       sel_q;

  logic    lb_valid;
  adc_iq_t lb_data;
  always_comb begin
    unique case (sel)
      SRC_CARRIER: begin lb_valid = car_valid; lb_data = car_data; end
      SRC_NULLER:  begin lb_valid = nul_valid; lb_data = nul_data; end
      default:     begin lb_valid = 1'b0;      lb_data = car_data; end
    endcase
  end

  logic    push, pop, full;
  adc_iq_t s_data;
  assign full = level == (AW+1)'(DEPTH);
  assign push = lb_valid && !full && sel == sel_q;
  assign pop  = adc_valid && sel != SRC_ADC && primed && level != '0;
  assign s_data = (sel == SRC_ADC) ? adc_data : (pop ? fifo[rp] : '0);

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= lb_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp         <= '0;
      rp         <= '0;
      level      <= '0;
      primed     <= 1'b0;
      sel_q      <= SRC_ADC;
      out_valid  <= 1'b0;
      drop_count <= '0;
      slip_count <= '0;
    end else begin
      sel_q <= sel;
      if (sel != sel_q) begin
        // New source: start the buffer afresh.
        wp     <= '0;
        rp     <= '0;
        level  <= '0;
        primed <= 1'b0;
      end else begin
        if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
        if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
        level <= level + (AW+1)'(push) - (AW+1)'(pop);
        if (!primed && level >= (AW+1)'(PREFILL)) primed <= 1'b1;
        if (adc_valid && sel != SRC_ADC && primed && level == '0) begin
          primed     <= 1'b0;
          slip_count <= slip_count + 1;
        end
      end
      if (lb_valid && full) drop_count <= drop_count + 1;

      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adc_valid) begin
        if (!out_valid || out_ready) begin
          out_valid <= 1'b1;
          out_data  <= s_data;
        end else begin
          drop_count <= drop_count + 1;
        end
      end
    end
  end
endmodule
