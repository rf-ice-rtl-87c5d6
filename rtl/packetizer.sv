// packetizer: packs the CIC2 output of one baseband block into science
// packets.
//
// Every time CIC2 delivers a new sample for all NCH_P channels (channel 0
// first), the samples are written into one of two packet slots; the
// IRIG-B time, a sequence number and the decimation setting are latched when
// channel 0 arrives. A full slot is sent as a stream of 32-bit words:
//   word 0  magic "RFIC" (0x52464943)
//   word 1  {comb id[7:0], block id[7:0], 5'b0, log2(R)[2:0], channels[7:0]}
//   word 2  sequence number (counts every packet, sent or dropped)
//   word 3  timestamp[63:32]      word 4  timestamp[31:0]
//   word 5  number of packets dropped so far
//   then    I, Q of channel 0 .. NCH_P-1, each sign-extended to 32 bits.
// If both slots are still waiting when a new set begins, that set is dropped
// (overflow) and counted; the sequence number shows the gap.
//
// Interface: CIC output stream in; out_valid/out_ready/out_word (with
// start/end of packet flags) out. The paper says each block packetizes its
// CIC2 stream with an IRIG-B timestamp; the packet layout is this design's.
module packetizer
  import rfice_pkg::*;
#(
  parameter int unsigned NCH_P   = 128,
  parameter int unsigned BLK_ID  = 0,
  parameter int unsigned COMB_ID = 0
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [2:0]               log2r,
  input  logic [63:0]              timestamp,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_chan,
  input  iq_t                      in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output pkt_word_t                out_word,
  output logic [31:0]              drop_count
);
  localparam int unsigned CW    = $clog2(NCH_P);
  localparam int unsigned NWORD = PKT_HDR_WORDS + 2 * NCH_P;
  localparam int unsigned WW    = $clog2(NWORD);

  iq_t         slot_mem [2][NCH_P];
  logic [63:0] slot_ts  [2];
  logic [31:0] slot_seq [2];
  logic [2:0]  slot_lr  [2];
  logic [1:0]  full;
  logic        wslot, rslot;
  logic        dropping;
  logic [31:0] seq;
  logic [WW-1:0] widx;

  logic set_full, clr_full;
  assign set_full = in_valid && !dropping && in_chan == CW'(NCH_P - 1) && !(in_chan == '0 && full[wslot]);
  assign clr_full = out_valid && out_ready && widx == WW'(NWORD - 1);

  // Write side.
  always_ff @(posedge clk) begin
    if (rst) begin
      wslot      <= 1'b0;
      dropping   <= 1'b0;
      seq        <= '0;
      drop_count <= '0;
    end else if (in_valid) begin
      if (in_chan == '0) begin
        seq <= seq + 1;
        if (full[wslot]) begin
          dropping   <= 1'b1;
          drop_count <= drop_count + 1;
        end else begin
          dropping        <= 1'b0;
          slot_ts[wslot]  <= timestamp;
          slot_seq[wslot] <= seq;
          slot_lr[wslot]  <= log2r;
          slot_mem[wslot][in_chan] <= in_data;
          if (NCH_P == 1) wslot <= ~wslot;
        end
      end else if (!dropping) begin
        slot_mem[wslot][in_chan] <= in_data;
        if (in_chan == CW'(NCH_P - 1)) wslot <= ~wslot;
      end
    end
  end

  // Slot occupancy.
  always_ff @(posedge clk) begin
    if (rst) full <= '0;
    else begin
      if (set_full) full[wslot] <= 1'b1;
      if (clr_full) full[rslot] <= 1'b0;
    end
  end

  // Read side.
  always_ff @(posedge clk) begin
    if (rst) begin
      rslot <= 1'b0;
      widx  <= '0;
    end else if (out_valid && out_ready) begin
      if (widx == WW'(NWORD - 1)) begin
        widx  <= '0;
        rslot <= ~rslot;
      end else begin
        widx <= widx + 1'b1;
      end
    end
  end

  assign out_valid = full[rslot];

  iq_t   cur;
  logic [CW-1:0] ch_rd;
  assign ch_rd = CW'((32'(widx) - PKT_HDR_WORDS) >> 1);
  assign cur   = slot_mem[rslot][ch_rd];

  always_comb begin
    out_word.sop = (widx == '0);
    out_word.eop = (widx == WW'(NWORD - 1));
    unique case (widx)
      WW'(0):  out_word.data = PKT_MAGIC;
      WW'(1):  out_word.data = {8'(COMB_ID), 8'(BLK_ID), 5'b0, slot_lr[rslot], 8'(NCH_P)};
      WW'(2):  out_word.data = slot_seq[rslot];
      WW'(3):  out_word.data = slot_ts[rslot][63:32];
      WW'(4):  out_word.data = slot_ts[rslot][31:0];
      WW'(5):  out_word.data = drop_count;
      default: out_word.data = widx[0] ? 32'(cur.im) : 32'(cur.re);
    endcase
  end

  assert property (@(posedge clk) disable iff (rst) !(set_full && clr_full && wslot == rslot));
endmodule
