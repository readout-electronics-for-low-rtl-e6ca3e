// sampa_decoder: SAMPA serial stream decoder, one per front-end card.
//
// A front-end card sends the output of its two daisy-chained SAMPA chips as
// one serial bit stream. Each SAMPA packet is a 50-bit header followed by N
// 10-bit payload words, N being a header field. This decoder is a small
// state machine: it first hunts, bit by bit, for the SAMPA sync packet
// header to find the packet boundary (HUNT), then reads headers (HEADER)
// and payloads (PAYLOAD) back to back. Sync packets and header-only packets
// (heartbeats, N = 0) are counted but produce no output. Every other packet
// becomes one hit on a 32-bit stream:
//   D0  hit_hdr_t: FEC number, chip address, channel, N, packet type
//   D1  {12'b0, 20-bit SAMPA bunch-crossing counter}
//   D2+ payload, three 10-bit words per 32-bit word {2'b0, s2, s1, s0},
//       the last word zero-padded; the last word of the hit has last = 1.
// The packet types of the SAMPA's trigger and streaming modes all share
// this layout, so the decoder passes them through alike with their type.
//
// Interface: one serial bit per clock where bit_valid is high (the LVDS
// receiver / deserialiser in front of it is outside this module); bit 0 of
// the header is the first bit received. The output has no ready: a link
// cannot be stalled, so the L0 buffer behind the decoder drops whole hits
// when it is full. D0 appears the cycle the last header bit is taken, D1
// the next cycle, each payload word the cycle its last sample bit is taken.
//
// From the paper: the FSM decoder, the 50-bit header with a 10-bit word
// count, N 10-bit words, the 32-bit output carrying channel, timestamp and
// payload. Our own choices: header bit layout and sync pattern (SAMPA
// format, pat_pkg), LSB-first order, the D0/D1 layout and the packing.
module sampa_decoder
  import pat_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic [5:0]   fec_id,      // number of this FEC on the PAT card
  input  logic         bit_valid,
  input  logic         bit_in,
  output logic         out_valid,
  output stream_word_t out_word,
  output logic         locked,      // sync header found
  output logic [15:0]  hit_count,   // hits written out (wraps)
  output logic [15:0]  sync_count   // sync packets seen after lock (wraps)
);

  typedef enum logic [1:0] {S_HUNT, S_HEADER, S_PAYLOAD} state_t;

  state_t               state;
  logic [HDR_W-1:0]     shreg;
  logic [HDR_W-1:0]     shnext;
  logic [5:0]           bitcnt;       // bit index within header or sample
  logic [9:0]           samples_left; // payload words still to read
  logic [1:0]           slot;         // position of the sample in the word
  logic [2*SAMPLE_W-1:0] pack;        // s0, s1 of the word being built
  logic [31:0]          bx_word;
  logic                 d1_pending;
  sampa_hdr_t           hdr;

  assign shnext = {bit_in, shreg[HDR_W-1:1]};
  assign hdr    = sampa_hdr_t'(shnext);
  assign locked = (state != S_HUNT);

  // current sample: the 10 newest bits of the shift register
  logic [SAMPLE_W-1:0] sample;
  assign sample = shnext[HDR_W-1 -: SAMPLE_W];

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_HUNT;
      shreg        <= '0;
      bitcnt       <= '0;
      samples_left <= '0;
      slot         <= '0;
      pack         <= '0;
      bx_word      <= '0;
      d1_pending   <= 1'b0;
      out_valid    <= 1'b0;
      out_word     <= '0;
      hit_count    <= '0;
      sync_count   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (d1_pending) begin
        out_valid      <= 1'b1;
        out_word.data  <= bx_word;
        out_word.last  <= 1'b0;
        d1_pending     <= 1'b0;
      end
      if (bit_valid) begin
        shreg <= shnext;
        unique case (state)
          S_HUNT: begin
            if (shnext == SAMPA_SYNC_HDR) begin
              state  <= S_HEADER;
              bitcnt <= '0;
            end
          end
          S_HEADER: begin
            if (bitcnt == 6'(HDR_W - 1)) begin
              bitcnt <= '0;
              if (hdr.pkt_type == PKT_SYNC) begin
                sync_count <= sync_count + 16'd1;
              end else if (hdr.num_words != '0) begin
                out_valid      <= 1'b1;
                out_word.last  <= 1'b0;
                out_word.data  <= hit_hdr_t'{fec_id:    fec_id,
                                             chip_addr: hdr.chip_addr,
                                             channel:   hdr.channel,
                                             num_words: hdr.num_words,
                                             pkt_type:  hdr.pkt_type,
                                             flags:     4'h0};
                bx_word        <= {12'h000, hdr.bx_count};
                d1_pending     <= 1'b1;
                samples_left   <= hdr.num_words;
                slot           <= '0;
                state          <= S_PAYLOAD;
              end
            end else begin
              bitcnt <= bitcnt + 6'd1;
            end
          end
          S_PAYLOAD: begin
            if (bitcnt == 6'(SAMPLE_W - 1)) begin
              bitcnt       <= '0;
              samples_left <= samples_left - 10'd1;
              if (slot == 2'd2 || samples_left == 10'd1) begin
                out_valid     <= 1'b1;
                out_word.last <= (samples_left == 10'd1);
                unique case (slot)
                  2'd0:    out_word.data <= {22'h0, sample};
                  2'd1:    out_word.data <= {12'h0, sample, pack[SAMPLE_W-1:0]};
                  default: out_word.data <= {2'b00, sample, pack[2*SAMPLE_W-1:SAMPLE_W],
                                             pack[SAMPLE_W-1:0]};
                endcase
                slot <= '0;
                if (samples_left == 10'd1) begin
                  state     <= S_HEADER;
                  hit_count <= hit_count + 16'd1;
                end
              end else begin
                if (slot == 2'd0) pack[SAMPLE_W-1:0]          <= sample;
                else              pack[2*SAMPLE_W-1:SAMPLE_W] <= sample;
                slot <= slot + 2'd1;
              end
            end else begin
              bitcnt <= bitcnt + 6'd1;
            end
          end
          default: state <= S_HUNT;
        endcase
      end
    end
  end

endmodule
