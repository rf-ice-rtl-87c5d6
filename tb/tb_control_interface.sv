// tb_control_interface: writes and reads back the mode registers of both
// combs (including the clamp of CIC2 log2(R) at 6 and the reserved input
// selection), reads the identification word, and checks that channel-table
// writes appear one clock later as cfg_wr_t records with the table, comb,
// channel and data decoded from the address.
module tb_control_interface;
  import rfice_pkg::*;
  logic clk = 0, rst = 1;
  always #1 clk = ~clk;

  logic bus_wr, bus_rd;
  logic [23:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  cfg_wr_t cfg;
  comb_ctrl_t ctrl [2];

  control_interface #(.NCOMB_P(2)) dut (.*);

  int checks = 0, failures = 0;

  task automatic wr(logic [23:0] a, logic [31:0] d);
    bus_wr = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_wr = 0;
  endtask

  task automatic rd_check(logic [23:0] a, logic [31:0] e);
    bus_rd = 1; bus_addr = a;
    @(negedge clk);
    bus_rd = 0;
    checks++;
    if (bus_rdata != e) begin failures++; $display("FAIL read %h got %h exp %h", a, bus_rdata, e); end
  endtask

  task automatic tbl_check(int t, int comb, int ch, logic [31:0] d);
    bus_wr = 1; bus_addr = 24'h10_0000 | 24'(t << 18) | 24'(comb << 14) | 24'(ch << 2); bus_wdata = d;
    @(negedge clk);
    bus_wr = 0;
    checks++;
    if (!cfg.valid || cfg.tbl != tbl_e'(t) || cfg.comb != 4'(comb) || cfg.chan != 12'(ch) || cfg.data != d) begin
      failures++; $display("FAIL table write t%0d c%0d ch%0d", t, comb, ch);
    end
    @(negedge clk);
    checks++;
    if (cfg.valid) failures++;
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bus_wr = 0; bus_rd = 0; bus_addr = 0; bus_wdata = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    checks++;
    if (ctrl[0].in_sel != SRC_ADC || ctrl[1].cic2_log2r != 0 || cfg.valid) failures++;
    wr(24'h000000, 32'd1); wr(24'h000104, 32'd1); wr(24'h000008, 32'd4); wr(24'h000108, 32'd9);
    wr(24'h000100, 32'd3);
    checks++;
    if (ctrl[0].in_sel != SRC_CARRIER || ctrl[1].sci_sel != SCI_LOOP || ctrl[0].cic2_log2r != 4 ||
        ctrl[1].cic2_log2r != 6 || ctrl[1].in_sel != SRC_ADC || ctrl[0].sci_sel != SCI_DOWNCONV) begin
      failures++; $display("FAIL mode registers");
    end
    rd_check(24'h000000, 32'd1);
    rd_check(24'h000108, 32'd6);
    rd_check(24'h000104, 32'd1);
    rd_check(24'h000F00, 32'h52464943);
    tbl_check(0, 1, 1023, 32'h1234_5678);
    tbl_check(2, 0, 5, 32'd300);
    tbl_check(3, 1, 77, 32'hFFFF_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
