// tb_input_mux: checks the input multiplexer with a small elastic buffer
// (DEPTH 16, PREFILL 4). The ADC strobe comes every second clock, as the
// converter does relative to the processing clock.
//  - ADC mode: every strobe passes the ADC sample, in order.
//  - Carrier and nuller loopback: the selected source delivers bursts of 8
//    samples every 16 clocks (like the synthesis filter). The output must be
//    zeros until the buffer is primed, then the source's counting pattern
//    with no gap or repeat, one sample per strobe; the other source is
//    ignored.
//  - When the loopback source stops, exactly one underrun is counted and
//    zeros follow; a burst longer than the buffer is counted as drops.
//  - With the consumer stalled, the output stage holds one sample and the
//    rest are counted as drops.
module tb_input_mux;
  import rfice_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  in_sel_e sel;
  logic adc_valid, car_valid, nul_valid, out_valid, out_ready;
  adc_iq_t adc_data, car_data, nul_data, out_data;
  logic [31:0] drop_count, slip_count;

  input_mux #(.DEPTH(16), .PREFILL(4)) dut (.*);

  int checks = 0, failures = 0;
  int outs [$];

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    adc_iq_t o;
    o = out_data;
    outs.push_back(int'(o.re));
  end

  initial begin
    #40000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Runs NCYC clocks: ADC strobe every 2nd clock; loopback source bursts
  // of 8 samples at the start of every 16 clocks (if lb_on).
  task automatic run(int ncyc, bit lb_on, ref int adc_n, ref int car_n, ref int nul_n);
    for (int t = 0; t < ncyc; t++) begin
      adc_valid = (t % 2 == 0);
      adc_data.re = 16'(1000 + adc_n);
      if (adc_valid) adc_n++;
      car_valid = lb_on && (t % 16 < 8);
      nul_valid = lb_on && (t % 16 < 8);
      car_data.re = 16'(20000 + car_n);
      nul_data.re = -16'(1 + nul_n);
      if (car_valid) car_n++;
      if (nul_valid) nul_n++;
      @(negedge clk);
    end
    adc_valid = 0; car_valid = 0; nul_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic check_loop(string name, int first, int step, int nstrobe);
    int i = 0, zeros = 0, exp_v;
    // Leading zeros until primed, then an unbroken pattern.
    while (i < outs.size() && outs[i] == 0) begin zeros++; i++; end
    checks++;
    if (zeros < 1 || zeros > 8) begin failures++; $display("FAIL %s: %0d leading zeros", name, zeros); end
    exp_v = first;
    checks++;
    if (outs.size() != nstrobe) begin failures++; $display("FAIL %s: %0d outputs for %0d strobes", name, outs.size(), nstrobe); end
    for (; i < outs.size(); i++) begin
      checks++;
      if (outs[i] != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL %s: out %0d = %0d exp %0d", name, i, outs[i], exp_v);
      end
      exp_v += step;
    end
    $display("%s: %0d zeros then %0d looped samples", name, zeros, outs.size() - zeros);
    outs.delete();
  endtask

  initial begin
    int adc_n = 0, car_n = 0, nul_n = 0;
    sel = SRC_ADC; adc_valid = 0; car_valid = 0; nul_valid = 0; out_ready = 1;
    adc_data = '0; car_data = '0; nul_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;

    // ADC mode.
    run(100, 1, adc_n, car_n, nul_n);
    checks++;
    if (outs.size() != 50) begin failures++; $display("FAIL adc: %0d outputs", outs.size()); end
    foreach (outs[i]) begin
      checks++;
      if (outs[i] != 1000 + i) begin failures++; $display("FAIL adc out %0d = %0d", i, outs[i]); end
    end
    outs.delete();

    // Carrier loopback.
    sel = SRC_CARRIER; @(negedge clk);
    car_n = 0;
    run(320, 1, adc_n, car_n, nul_n);
    check_loop("carrier", 20000, 1, 160);
    checks++;
    if (slip_count != 0 || drop_count != 0) begin failures++; $display("FAIL carrier: slips %0d drops %0d", slip_count, drop_count); end

    // Nuller loopback.
    sel = SRC_NULLER; @(negedge clk);
    nul_n = 0;
    run(320, 1, adc_n, car_n, nul_n);
    check_loop("nuller", -1, -1, 160);
    checks++;
    if (slip_count != 0 || drop_count != 0) begin failures++; $display("FAIL nuller: slips %0d drops %0d", slip_count, drop_count); end

    // Source stops: the buffer drains, one underrun, then zeros.
    run(64, 0, adc_n, car_n, nul_n);
    checks++;
    if (slip_count != 1) begin failures++; $display("FAIL underrun count %0d", slip_count); end
    checks++;
    if (outs.size() != 32 || outs[31] != 0) begin failures++; $display("FAIL underrun output"); end
    outs.delete();

    // Overflow: 20 loopback samples without strobes into a 16-deep buffer.
    for (int i = 0; i < 20; i++) begin
      nul_valid = 1; nul_data.re = 16'(i);
      @(negedge clk);
    end
    nul_valid = 0;
    @(negedge clk);
    checks++;
    if (drop_count != 4) begin failures++; $display("FAIL overflow drops %0d", drop_count); end

    // Stall in ADC mode: the output stage holds one sample.
    sel = SRC_ADC; @(negedge clk);
    outs.delete();
    out_ready = 0;
    for (int i = 0; i < 10; i++) begin
      adc_valid = 1; adc_data.re = 16'(5000 + i);
      @(negedge clk);
    end
    adc_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (drop_count != 4 + 9) begin failures++; $display("FAIL stall drops %0d", drop_count); end
    checks++;
    if (outs.size() != 1 || outs[0] != 5000) begin failures++; $display("FAIL stall output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
