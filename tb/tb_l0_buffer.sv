// tb_l0_buffer: self-checking test of the L0 packet buffer.
//
// Phase 1: random hits written while the reader drains with a random
// ready; every hit must come out whole and in order, and a hit must not be
// readable before its last word is written. Phase 2: the reader stops, hits
// are written until the buffer overflows; the hit that overflows and all
// later ones that do not fit must be dropped whole (drop_count), the
// committed ones read back intact, and level must equal the words held.
module tb_l0_buffer;
  import pat_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst = 1;
  logic wr_valid = 0;
  stream_word_t wr_word = '0;
  logic rd_valid, rd_ready = 0;
  stream_word_t rd_word;
  logic [6:0] level;
  logic [15:0] drop_count;

  int checks = 0, failures = 0;
  logic [32:0] exp_q[$];
  int drops_expected = 0;

  l0_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst, .wr_valid, .wr_word, .rd_valid, .rd_word,
                                  .rd_ready, .level, .drop_count);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (!rst && rd_valid && rd_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected read %h", rd_word); end
      else begin
        logic [32:0] e;
        e = exp_q.pop_front();
        if ({rd_word.last, rd_word.data} !== e) begin
          failures++; $display("read %h exp %h", {rd_word.last, rd_word.data}, e);
        end
      end
    end
  end

  // write one hit of n words; keep = expected to be stored
  task automatic write_hit(input int n, input bit keep);
    logic [32:0] w[$];
    for (int i = 0; i < n; i++) w.push_back({(i == n - 1), 32'($urandom)});
    if (keep) foreach (w[i]) exp_q.push_back(w[i]);
    foreach (w[i]) begin
      @(negedge clk);
      wr_valid = 1; wr_word = stream_word_t'(w[i]);
    end
    @(negedge clk);
    wr_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // store and forward: nothing visible until the last word
    @(negedge clk); wr_valid = 1; wr_word = '{last: 0, data: 32'h1111};
    @(negedge clk); wr_word = '{last: 0, data: 32'h2222};
    @(negedge clk); wr_valid = 0;
    checks++; if (rd_valid) begin failures++; $display("partial hit visible"); end
    @(negedge clk); wr_valid = 1; wr_word = '{last: 1, data: 32'h3333};
    @(negedge clk); wr_valid = 0;
    checks++; if (!rd_valid || level != 7'd3) begin failures++; $display("hit not committed, level %0d", level); end
    exp_q.push_back({1'b0, 32'h1111}); exp_q.push_back({1'b0, 32'h2222}); exp_q.push_back({1'b1, 32'h3333});
    // phase 1: random traffic with random read ready
    fork
      begin
        for (int k = 0; k < 200; k++) begin
          while (level > 7'(DEPTH - 20)) @(negedge clk);
          write_hit($urandom_range(1, 12), 1);
        end
      end
      begin
        repeat (6000) begin @(negedge clk); rd_ready = ($urandom_range(0, 1) == 1); end
      end
    join
    rd_ready = 1;
    repeat (100) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words lost", exp_q.size()); end
    rd_ready = 0;
    // phase 2: overflow; 5 hits of 12 fit in 64, the 6th (ends at 72) overflows
    for (int k = 0; k < 5; k++) write_hit(12, 1);
    write_hit(12, 0); drops_expected++;
    write_hit(3, 1);      // 63 words: fits
    write_hit(2, 0); drops_expected++;   // 65: dropped
    write_hit(1, 1);      // 64: fits exactly
    write_hit(1, 0); drops_expected++;
    checks++; if (drop_count != 16'(drops_expected)) begin failures++; $display("drop_count %0d exp %0d", drop_count, drops_expected); end
    checks++; if (level != 7'd64) begin failures++; $display("level %0d exp 64", level); end
    rd_ready = 1;
    repeat (80) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("%0d words lost after overflow", exp_q.size()); end
    checks++; if (level != 0 || rd_valid) begin failures++; $display("not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
