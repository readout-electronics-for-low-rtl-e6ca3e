// packet_formatter: turns each hit into an output Ethernet sample.
//
// Reads hits from the L2 buffer and puts three words in front of each:
//   E0  sample_hdr_t: magic 4'hA, FEC, chip, channel, length, packet type,
//       copied from the hit's D0 word; length = words of the hit that follow
//   E1  DUNE timestamp [63:32]
//   E2  DUNE timestamp [31:0]
// then passes the hit itself (D0, D1, payload) unchanged, with its
// end-of-hit mark. The timestamp is the DUNE timing system's 64-bit time,
// sampled when E0 is accepted.
//
// Interface: valid/ready in and out, no extra latency (E0 is built from the
// waiting D0, which is only consumed after E2). Throughput: one word per
// clock plus three header words per hit.
//
// From the paper: a 32-bit header with part of the SAMPA header and the
// 64-bit DUNE timestamp added to the 32-bit stream. Our own choices: the
// E0 layout, word order, and sampling the timestamp at read-out.
module packet_formatter
  import pat_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic [63:0]  dune_ts,
  input  logic         in_valid,
  input  stream_word_t in_word,
  output logic         in_ready,
  output logic         out_valid,
  output stream_word_t out_word,
  input  logic         out_ready,
  output logic [15:0]  sample_count
);

  typedef enum logic [1:0] {F_E0, F_E1, F_E2, F_PASS} fstate_t;

  fstate_t     state;
  logic [63:0] ts_q;
  hit_hdr_t    d0;

  assign d0 = hit_hdr_t'(in_word.data);

  always_comb begin
    out_valid     = 1'b0;
    out_word      = '0;
    in_ready      = 1'b0;
    unique case (state)
      F_E0: begin
        out_valid     = in_valid;
        out_word.data = sample_hdr_t'{magic:     SAMPLE_MAGIC,
                                      fec_id:    d0.fec_id,
                                      chip_addr: d0.chip_addr,
                                      channel:   d0.channel,
                                      length:    hit_words(d0.num_words),
                                      pkt_type:  d0.pkt_type};
      end
      F_E1: begin
        out_valid     = 1'b1;
        out_word.data = ts_q[63:32];
      end
      F_E2: begin
        out_valid     = 1'b1;
        out_word.data = ts_q[31:0];
      end
      default: begin
        out_valid = in_valid;
        out_word  = in_word;
        in_ready  = out_ready;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= F_E0;
      ts_q         <= '0;
      sample_count <= '0;
    end else if (out_valid && out_ready) begin
      unique case (state)
        F_E0: begin
          ts_q  <= dune_ts;
          state <= F_E1;
        end
        F_E1: state <= F_E2;
        F_E2: state <= F_PASS;
        default: if (in_word.last) begin
          state        <= F_E0;
          sample_count <= sample_count + 16'd1;
        end
      endcase
    end
  end

endmodule
