// rfice_pkg: types and constants shared by the readout firmware.
//
// One readout comb digitises a 500 MHz wide band as complex 16-bit samples,
// splits it into 512 subbands with a 2x oversampled polyphase filter bank
// (one output frame every 256 input samples), and processes 1024 baseband
// channels in 8 blocks of 128. Baseband samples are 24-bit I and 24-bit Q.
// These numbers are the defaults of every module's parameters; the widths
// below are fixed for the whole design.
//
// The configuration write record (cfg_wr_t) and the per-comb control record
// (comb_ctrl_t) are this design's own register-level interface; the packet
// word record carries science packets to the Ethernet transmitter.
package rfice_pkg;

  // Widths: converters are 16 bit, baseband signals 24 bit per component.
  localparam int unsigned ADC_W   = 16;
  localparam int unsigned DW      = 24;
  localparam int unsigned COEF_W  = 18;   // filter, twiddle and LO coefficients, Q1.17
  localparam int unsigned PHASE_W = 32;   // DDS phase accumulator
  localparam int unsigned LUT_AW  = 10;   // DDS sine table address bits
  localparam int unsigned GAIN_W  = 18;   // feedback-loop gain, Q2.16 (signed)
  localparam int unsigned AMP_W   = 16;   // static carrier amplitude, unsigned

  // Default sizes of one comb.
  localparam int unsigned NFFT    = 512;  // subbands
  localparam int unsigned NCH     = 128;  // channels per baseband block
  localparam int unsigned NBLK    = 8;    // baseband blocks per comb
  localparam int unsigned TAPS    = 4;    // prototype filter length / NFFT
  localparam int unsigned CIC1_LOG2R   = 6;  // CIC1 decimates by 64
  localparam int unsigned CIC2_MAXLOG2 = 6;  // CIC2 decimates by 1..64
  localparam int unsigned CIC_ORDER    = 3;
  localparam int unsigned NCOMB   = 2;

  typedef struct packed {
    logic signed [ADC_W-1:0] re;
    logic signed [ADC_W-1:0] im;
  } adc_iq_t;

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } iq_t;

  // Input multiplexer selections.
  typedef enum logic [1:0] {
    SRC_ADC      = 2'd0,
    SRC_CARRIER  = 2'd1,
    SRC_NULLER   = 2'd2
  } in_sel_e;

  // Which signal feeds CIC1: the downconverted channel, or the feedback-loop output.
  typedef enum logic {
    SCI_DOWNCONV = 1'b0,
    SCI_LOOP     = 1'b1
  } sci_sel_e;

  // Per-channel tables.
  typedef enum logic [1:0] {
    TBL_FREQ = 2'd0,   // DDS phase increment per subband sample
    TBL_AMP  = 2'd1,   // static carrier amplitude
    TBL_BIN  = 2'd2,   // subband that carries the channel
    TBL_GAIN = 2'd3    // feedback-loop gain (writing it also clears the loop state)
  } tbl_e;

  typedef struct packed {
    logic        valid;
    tbl_e        tbl;
    logic [3:0]  comb;
    logic [11:0] chan;   // channel number within the comb, blk*NCH + c
    logic [31:0] data;
  } cfg_wr_t;

  typedef struct packed {
    in_sel_e    in_sel;
    sci_sel_e   sci_sel;
    logic [2:0] cic2_log2r;
  } comb_ctrl_t;

  typedef struct packed {
    logic [31:0] data;
    logic        sop;
    logic        eop;
  } pkt_word_t;

  localparam logic [31:0] PKT_MAGIC = 32'h5246_4943;
  localparam int unsigned PKT_HDR_WORDS = 6;

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [63:0] v);
    if (v > 64'sd8388607)       return 24'sh7FFFFF;
    else if (v < -64'sd8388608) return 24'sh800000;
    else                        return v[DW-1:0];
  endfunction

  // Prototype low-pass of the filter bank: sinc with zeros every NFFT samples,
  // Hann-windowed over TAPS*NFFT samples, scaled to Q1.17.
  function automatic logic signed [COEF_W-1:0] proto_coef(input int n, input int m, input int taps);
    real pi, x, s, w, l;
    pi = 3.14159265358979;
    l  = real'(m * taps);
    x  = (real'(n) - (l - 1.0) / 2.0) / real'(m);
    s  = (x == 0.0) ? 1.0 : $sin(pi * x) / (pi * x);
    w  = 0.5 - 0.5 * $cos(2.0 * pi * (real'(n) + 0.5) / l);
    return COEF_W'($rtoi(s * w * 131071.0 + ((s * w) >= 0.0 ? 0.5 : -0.5)));
  endfunction

  // cos / sin of 2*pi*i/n in Q1.17.
  function automatic logic signed [COEF_W-1:0] cos_q17(input int i, input int n);
    real v;
    v = $cos(2.0 * 3.14159265358979 * real'(i) / real'(n)) * 131071.0;
    return COEF_W'($rtoi(v + (v >= 0.0 ? 0.5 : -0.5)));
  endfunction

  function automatic logic signed [COEF_W-1:0] sin_q17(input int i, input int n);
    real v;
    v = $sin(2.0 * 3.14159265358979 * real'(i) / real'(n)) * 131071.0;
    return COEF_W'($rtoi(v + (v >= 0.0 ? 0.5 : -0.5)));
  endfunction

  // Complex multiply by a Q1.17 coefficient, result back in DW bits.
  function automatic iq_t cmul_q17(input iq_t a, input logic signed [COEF_W-1:0] cr,
                                   input logic signed [COEF_W-1:0] ci, input logic conj_c);
    logic signed [63:0] pr, pi_;
    logic signed [COEF_W-1:0] c_im;
    iq_t r;
    c_im = conj_c ? -ci : ci;
    pr  = 64'(a.re) * 64'(cr) - 64'(a.im) * 64'(c_im);
    pi_ = 64'(a.re) * 64'(c_im) + 64'(a.im) * 64'(cr);
    r.re = sat_dw(pr >>> (COEF_W - 1));
    r.im = sat_dw(pi_ >>> (COEF_W - 1));
    return r;
  endfunction

endpackage
