// ethernet_tx: combines the science packet streams of all baseband blocks
// and sends them as Ethernet frames on a byte-wide (GMII-style) 1 Gb/s
// transmit interface.
//
// A round-robin arbiter picks the next source that has a packet waiting
// and sends one whole packet as one frame: preamble (7 x 0x55), start
// delimiter 0xD5, destination MAC, source MAC, EtherType, the packet's
// 32-bit words most significant byte first, zero padding up to the 46-byte
// minimum payload, the frame check sequence (CRC-32, IEEE 802.3, sent least
// significant byte first) and a 12-byte inter-frame gap.
//
// Interface: NSRC packet word streams (valid/ready, sop/eop flags); byte_en
// is the byte-clock enable (one byte per asserted cycle: 125 MHz of a faster
// core clock), txd/tx_en are the GMII transmit data and enable;
// frame_count counts frames sent. The paper combines the blocks' packets onto
// one 1 Gb/s link; framing details (raw EtherType, addresses) are this
// design's. The Ethernet PHY itself is outside the FPGA.
module ethernet_tx
  import rfice_pkg::*;
#(
  parameter int unsigned NSRC      = 16,
  parameter logic [47:0] DST_MAC   = 48'hFFFF_FFFF_FFFF,
  parameter logic [47:0] SRC_MAC   = 48'h02_00_00_00_00_01,
  parameter logic [15:0] ETHERTYPE = 16'h88B5
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        src_valid [NSRC],
  output logic        src_ready [NSRC],
  input  pkt_word_t   src_word  [NSRC],
  input  logic        byte_en,
  output logic [7:0]  txd,
  output logic        tx_en,
  output logic [31:0] frame_count
);
  localparam int unsigned SW = (NSRC > 1) ? $clog2(NSRC) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_HDR, S_PAY, S_PAD, S_FCS, S_IFG} state_e;
  state_e        st;
  logic [SW-1:0] cur, rr;
  logic [4:0]    bcnt;     // byte counter within a state
  logic [1:0]    wb;       // byte within the current word
  logic [15:0]   plen;     // payload bytes sent
  logic [31:0]   crc;

  function automatic logic [31:0] crc_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r;
    r = c ^ 32'(d);
    for (int i = 0; i < 8; i++) r = r[0] ? ((r >> 1) ^ 32'hEDB8_8320) : (r >> 1);
    return r;
  endfunction

  logic [111:0] hdr;
  assign hdr = {DST_MAC, SRC_MAC, ETHERTYPE};

  // Round-robin choice among sources at a packet start.
  logic          pick_ok;
  logic [SW-1:0] pick;
  always_comb begin
    pick_ok = 1'b0;
    pick    = rr;
    for (int i = NSRC - 1; i >= 0; i--) begin
      int unsigned s;
      s = (int'(rr) + i) % NSRC;
      if (src_valid[s] && src_word[s].sop) begin
        pick_ok = 1'b1;
        pick    = SW'(s);
      end
    end
  end

  pkt_word_t w;
  assign w = src_word[cur];
  logic [7:0] pay_byte;
  always_comb begin
    unique case (wb)
      2'd0: pay_byte = w.data[31:24];
      2'd1: pay_byte = w.data[23:16];
      2'd2: pay_byte = w.data[15:8];
      default: pay_byte = w.data[7:0];
    endcase
  end

  always_comb begin
    for (int i = 0; i < NSRC; i++) src_ready[i] = 1'b0;
    src_ready[cur] = byte_en && st == S_PAY && wb == 2'd3;
  end

  logic [31:0] fcs;
  assign fcs = ~crc;

  always_ff @(posedge clk) begin
    if (rst) begin
      st          <= S_IDLE;
      cur         <= '0;
      rr          <= '0;
      bcnt        <= '0;
      wb          <= '0;
      plen        <= '0;
      crc         <= '1;
      tx_en       <= 1'b0;
      txd         <= '0;
      frame_count <= '0;
    end else if (byte_en) begin
      unique case (st)
        S_IDLE: begin
          tx_en <= 1'b0;
          txd   <= '0;
          if (pick_ok) begin
            cur  <= pick;
            rr   <= (int'(pick) == NSRC - 1) ? '0 : pick + 1'b1;
            st   <= S_PRE;
            bcnt <= '0;
          end
        end
        S_PRE: begin
          tx_en <= 1'b1;
          txd   <= (bcnt == 5'd7) ? 8'hD5 : 8'h55;
          bcnt  <= bcnt + 1'b1;
          if (bcnt == 5'd7) begin st <= S_HDR; bcnt <= '0; crc <= '1; end
        end
        S_HDR: begin
          txd  <= hdr[111 - 8 * bcnt -: 8];
          crc  <= crc_byte(crc, hdr[111 - 8 * bcnt -: 8]);
          bcnt <= bcnt + 1'b1;
          if (bcnt == 5'd13) begin st <= S_PAY; wb <= '0; plen <= '0; end
        end
        S_PAY: begin
          txd  <= pay_byte;
          crc  <= crc_byte(crc, pay_byte);
          plen <= plen + 1'b1;
          wb   <= wb + 1'b1;
          if (wb == 2'd3 && w.eop) begin
            st   <= (plen + 1'b1 < 16'd46) ? S_PAD : S_FCS;
            bcnt <= '0;
          end
        end
        S_PAD: begin
          txd  <= '0;
          crc  <= crc_byte(crc, 8'h00);
          plen <= plen + 1'b1;
          if (plen + 1'b1 == 16'd46) begin st <= S_FCS; bcnt <= '0; end
        end
        S_FCS: begin
          txd  <= fcs[8 * bcnt[1:0] +: 8];
          bcnt <= bcnt + 1'b1;
          if (bcnt == 5'd3) begin st <= S_IFG; bcnt <= '0; frame_count <= frame_count + 1; end
        end
        default: begin  // S_IFG
          tx_en <= 1'b0;
          txd   <= '0;
          bcnt  <= bcnt + 1'b1;
          if (bcnt == 5'd11) st <= S_IDLE;
        end
      endcase
    end
  end

  // A packet in flight is sent word by word without gaps from its source.
  assert property (@(posedge clk) disable iff (rst) (st == S_PAY) |-> src_valid[cur]);
endmodule
