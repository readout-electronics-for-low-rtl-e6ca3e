// pat_pkg: types and constants shared by the PAT card read-out firmware.
//
// The PAT (power, aggregation and timing) card collects zero-suppressed hits
// from 56 front-end cards (FECs), each carrying two daisy-chained SAMPA
// chips on one serial link, and merges them into one 32-bit word stream that
// is read out over IPbus. This package holds the word format of that stream,
// the SAMPA header layout and the IPbus bus structs.
//
// From the paper: 50-bit SAMPA header, 10-bit samples, 32-bit internal
// stream, 64-bit DUNE timestamp, 56 FECs in seven groups of eight, three
// FEC clock rates (320/160/80 MHz). Our own choices: the bit layout of the
// SAMPA header (taken from the SAMPA chip's published serial format, which
// the paper does not spell out), the packing of three samples per 32-bit
// word, and all header word layouts below.
package pat_pkg;

  // ---- sizes from the paper ----
  localparam int unsigned WORD_W        = 32;  // internal stream width
  localparam int unsigned SAMPLE_W      = 10;  // SAMPA ADC sample width
  localparam int unsigned HDR_W         = 50;  // SAMPA packet header width
  localparam int unsigned TS_W          = 64;  // DUNE timestamp width
  localparam int unsigned SAMPLES_PER_WORD = 3; // 3 x 10 bit in a 32-bit word

  // ---- SAMPA header fields (bit 0 is the first bit on the wire) ----
  typedef struct packed {
    logic        data_parity;   // [49]
    logic [19:0] bx_count;      // [48:29] bunch-crossing / sample counter
    logic [3:0]  chip_addr;     // [28:25]
    logic [4:0]  channel;       // [24:20]
    logic [9:0]  num_words;     // [19:10] number of 10-bit payload words
    logic [2:0]  pkt_type;      // [9:7]
    logic        hdr_parity;    // [6]
    logic [5:0]  hamming;       // [5:0]
  } sampa_hdr_t;

  // SAMPA packet types (3-bit field)
  typedef enum logic [2:0] {
    PKT_HEARTBEAT      = 3'd0,
    PKT_DATA_TRUNC     = 3'd1,
    PKT_SYNC           = 3'd2,
    PKT_TRIG_EARLY_TR  = 3'd3,
    PKT_DATA           = 3'd4,
    PKT_NUMW_OVERFLOW  = 3'd5,
    PKT_TRIG_EARLY     = 3'd6,
    PKT_TRIG_EARLY_OVF = 3'd7
  } sampa_pkt_t;

  // The SAMPA sync packet header: the decoder hunts for it bit by bit to
  // find the packet boundary.
  localparam logic [HDR_W-1:0] SAMPA_SYNC_HDR = 50'h1555540F00113;

  // ---- internal hit stream ----
  // Word 0 of every hit leaving a decoder (D0).
  typedef struct packed {
    logic [5:0] fec_id;    // [31:26]
    logic [3:0] chip_addr; // [25:22]
    logic [4:0] channel;   // [21:17]
    logic [9:0] num_words; // [16:7]  number of 10-bit payload words
    logic [2:0] pkt_type;  // [6:4]
    logic [3:0] flags;     // [3:0]   reserved, written as 0
  } hit_hdr_t;

  // One word of a stream with its end-of-packet mark.
  typedef struct packed {
    logic              last;
    logic [WORD_W-1:0] data;
  } stream_word_t;

  // Header word of an Ethernet sample (E0), written by the packet formatter.
  localparam logic [3:0] SAMPLE_MAGIC = 4'hA;
  typedef struct packed {
    logic [3:0] magic;     // [31:28]
    logic [5:0] fec_id;    // [27:22]
    logic [3:0] chip_addr; // [21:18]
    logic [4:0] channel;   // [17:13]
    logic [9:0] length;    // [12:3] words of the decoder hit that follow E2
    logic [2:0] pkt_type;  // [2:0]
  } sample_hdr_t;

  // Words a decoder hit occupies: D0, D1 (bx counter) and the packed payload.
  function automatic logic [9:0] hit_words(input logic [9:0] num_samples);
    return 10'd2 + 10'((11'(num_samples) + 11'd2) / 11'd3);
  endfunction

  // ---- IPbus slave bus (ipbus-firmware ipb_wbus / ipb_rbus) ----
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        strobe;
    logic        write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        ack;
    logic        err;
  } ipb_rbus_t;

  // FEC clock rate select (Table "IPbus register list": clock rate control)
  typedef enum logic [1:0] {
    RATE_320 = 2'd0,
    RATE_160 = 2'd1,
    RATE_80  = 2'd2
  } clk_rate_t;

endpackage
