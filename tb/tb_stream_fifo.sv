// tb_stream_fifo: self-checking test of the L1/L2 stream FIFO.
//
// Random writes and random reads are compared word by word with a queue
// model; in_ready must drop exactly when DEPTH words are held, level must
// match the model, and a written word must be readable one clock later.
module tb_stream_fifo;
  import pat_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  stream_word_t in_word = '0, out_word;
  logic [4:0] level;

  int checks = 0, failures = 0;
  logic [32:0] model[$];

  stream_fifo #(.DEPTH(DEPTH)) dut (.clk, .rst, .in_valid, .in_word, .in_ready,
                                    .out_valid, .out_word, .out_ready, .level);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (!rst) begin
      checks++;
      if (level != 5'(model.size()) || in_ready != (model.size() < DEPTH) ||
          out_valid != (model.size() != 0)) begin
        failures++;
        $display("state: level %0d model %0d in_ready %0d out_valid %0d", level, model.size(),
                 in_ready, out_valid);
      end
      if (out_valid && out_ready) begin
        logic [32:0] e;
        e = model.pop_front();
        checks++;
        if ({out_word.last, out_word.data} !== e) begin
          failures++; $display("read %h exp %h", {out_word.last, out_word.data}, e);
        end
      end
      if (in_valid && in_ready) model.push_back({in_word.last, in_word.data});
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int phase = 0; phase < 3; phase++) begin
      repeat (1500) begin
        @(negedge clk);
        // phase 0: mostly writing (fills), 1: balanced, 2: mostly reading
        in_valid  = ($urandom_range(0, 9) < (phase == 0 ? 8 : phase == 1 ? 5 : 2));
        in_word   = stream_word_t'({1'($urandom), 32'($urandom)});
        out_ready = ($urandom_range(0, 9) < (phase == 0 ? 2 : phase == 1 ? 5 : 8));
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (40) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
