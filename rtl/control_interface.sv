// control_interface: register interface between the board's control
// processor and the signal paths.
//
// A simple synchronous bus (write strobe, read strobe, 24-bit byte address,
// 32-bit data, read data one clock later) is decoded into
//   * per-comb mode registers, address 0x0000_0000 + comb*0x100:
//       +0x00 input select (in_sel_e), +0x04 science source (sci_sel_e),
//       +0x08 CIC2 log2(R), 0..6 (larger values are clamped to 6);
//   * channel-table writes, address 0x10_0000 | table<<18 | comb<<14 | chan<<2,
//     broadcast to the combs as one cfg_wr_t record (one clock later).
//   * 0x00_0F00: read-only identification word 0x52464943.
// Mode registers read back; table entries are write-only. The paper says
// the processor turns requests into register-level accesses to the FPGA; the
// bus and the register map are this design's.
module control_interface
  import rfice_pkg::*;
#(
  parameter int unsigned NCOMB_P = 2
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        bus_wr,
  input  logic        bus_rd,
  input  logic [23:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output cfg_wr_t     cfg,
  output comb_ctrl_t  ctrl [NCOMB_P]
);
  localparam logic [31:0] ID_WORD = PKT_MAGIC;
  localparam int unsigned CBW = (NCOMB_P > 1) ? $clog2(NCOMB_P) : 1;

  logic       is_tbl;
  logic [3:0] g_comb;
  logic [7:0] g_reg;
  assign is_tbl = bus_addr[23:20] == 4'h1;
  assign g_comb = bus_addr[11:8];
  assign g_reg  = bus_addr[7:0];
  logic [CBW-1:0] ci;
  assign ci = CBW'(g_comb);

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg <= '0;
      for (int c = 0; c < NCOMB_P; c++) ctrl[c] <= '{in_sel: SRC_ADC, sci_sel: SCI_DOWNCONV, cic2_log2r: 3'd0};
      bus_rdata <= '0;
    end else begin
      cfg.valid <= 1'b0;
      if (bus_wr && is_tbl) begin
        cfg.valid <= 1'b1;
        cfg.tbl   <= tbl_e'(bus_addr[19:18]);
        cfg.comb  <= bus_addr[17:14];
        cfg.chan  <= bus_addr[13:2];
        cfg.data  <= bus_wdata;
      end
      if (bus_wr && !is_tbl && bus_addr[23:12] == '0 && 32'(g_comb) < NCOMB_P) begin
        unique case (g_reg)
          8'h00: ctrl[ci].in_sel     <= (bus_wdata[1:0] == 2'd3) ? SRC_ADC : in_sel_e'(bus_wdata[1:0]);
          8'h04: ctrl[ci].sci_sel    <= sci_sel_e'(bus_wdata[0]);
          8'h08: ctrl[ci].cic2_log2r <= (bus_wdata > 32'd6) ? 3'd6 : bus_wdata[2:0];
          default: ;
        endcase
      end
      if (bus_rd) begin
        bus_rdata <= '0;
        if (bus_addr == 24'h000F00) bus_rdata <= ID_WORD;
        else if (!is_tbl && bus_addr[23:12] == '0 && 32'(g_comb) < NCOMB_P) begin
          unique case (g_reg)
            8'h00: bus_rdata <= 32'(ctrl[ci].in_sel);
            8'h04: bus_rdata <= 32'(ctrl[ci].sci_sel);
            8'h08: bus_rdata <= 32'(ctrl[ci].cic2_log2r);
            default: ;
          endcase
        end
      end
    end
  end
endmodule
