// l0_buffer: L0 buffer stage, one per front-end card.
//
// A packet FIFO between a SAMPA decoder and the first round-robin stage.
// Words are written at a tentative write pointer; a hit becomes visible to
// the reader only when its last word has been written (store and forward).
// If the memory fills up while a hit is being written, that hit is dropped:
// the tentative pointer is rolled back to the last committed hit, the rest
// of the hit is discarded up to its last word, and drop_count counts it. The
// reader therefore only ever sees whole hits, so the round-robin stage that
// reads it never waits in the middle of one.
//
// Interface: write side has no ready (the serial link cannot be stalled);
// read side is valid/ready, first-word-fall-through, a word moves when
// rd_valid && rd_ready. level counts committed words, the "memory content"
// monitor of the IPbus register list. Latency: a hit can be read the cycle
// after its last word is written.
//
// From the paper: a buffer stage per decoder (56 of them, part of the 64
// buffers). Our own choices: depth (512 words holds the longest hit, 343
// words), store and forward, and dropping whole hits on overflow.
module l0_buffer
  import pat_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
)(
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_valid,
  input  stream_word_t wr_word,
  output logic         rd_valid,
  output stream_word_t rd_word,
  input  logic         rd_ready,
  output logic [AW:0]  level,
  output logic [15:0]  drop_count
);

  stream_word_t mem [DEPTH];
  logic [AW:0]  wptr_tmp, wptr, rptr;
  logic         dropping;
  logic         full;

  assign full     = (wptr_tmp - rptr) == (AW+1)'(DEPTH);
  assign rd_valid = (rptr != wptr);
  assign rd_word  = mem[rptr[AW-1:0]];
  assign level    = wptr - rptr;

  always_ff @(posedge clk) begin
    if (wr_valid && !dropping && !full)
      mem[wptr_tmp[AW-1:0]] <= wr_word;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr_tmp   <= '0;
      wptr       <= '0;
      rptr       <= '0;
      dropping   <= 1'b0;
      drop_count <= '0;
    end else begin
      if (rd_valid && rd_ready) rptr <= rptr + 1'b1;
      if (wr_valid) begin
        if (dropping) begin
          if (wr_word.last) dropping <= 1'b0;
        end else if (full) begin
          wptr_tmp   <= wptr;
          drop_count <= drop_count + 16'd1;
          dropping   <= !wr_word.last;
        end else if (wr_word.last) begin
          wptr_tmp <= wptr_tmp + 1'b1;
          wptr     <= wptr_tmp + 1'b1;
        end else begin
          wptr_tmp <= wptr_tmp + 1'b1;
        end
      end
    end
  end

endmodule
