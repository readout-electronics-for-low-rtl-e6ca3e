// stream_fifo: L1 and L2 buffer stages.
//
// A plain synchronous word FIFO with valid/ready on both sides, used for the
// L1 buffer behind each first-level round-robin and for the single L2 buffer
// behind the second-level round-robin. It carries the end-of-hit mark with
// each word. Unlike the L0 buffer it forwards words as soon as they are
// written (cut-through): its writer, a round-robin stage reading whole hits
// from L0 buffers, never leaves a hit unfinished.
//
// Interface: in_ready = not full; out_valid = not empty, first word falls
// through; level = words held. One cycle from write to read.
//
// From the paper: the L1 and L2 buffer stages. Our own choices: depths
// (1024 and 2048 words in the top), cut-through operation.
module stream_fifo
  import pat_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
)(
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  stream_word_t in_word,
  output logic         in_ready,
  output logic         out_valid,
  output stream_word_t out_word,
  input  logic         out_ready,
  output logic [AW:0]  level
);

  stream_word_t mem [DEPTH];
  logic [AW:0]  wptr, rptr;

  assign level     = wptr - rptr;
  assign in_ready  = level != (AW+1)'(DEPTH);
  assign out_valid = (wptr != rptr);
  assign out_word  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_word;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

endmodule
