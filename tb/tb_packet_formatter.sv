// tb_packet_formatter: self-checking test of the packet formatter.
//
// Feeds decoder-format hits (D0, D1, payload) with random gaps and random
// output back-pressure. For each hit the output must be E0 (magic, FEC,
// chip, channel, length = 2 + ceil(N/3), type), E1/E2 = the DUNE timestamp
// at the cycle E0 was accepted, then the hit's words unchanged with the
// end mark only on the last. With no back-pressure and a hit waiting, a
// hit of W words must take exactly W + 3 cycles.
module tb_packet_formatter;
  import pat_pkg::*;

  logic clk = 0, rst = 1;
  logic [63:0] dune_ts = 64'h0123_4567_0000_0000;
  logic in_valid, in_ready, out_valid, out_ready = 1;
  stream_word_t in_word, out_word;
  logic [15:0] sample_count;

  int checks = 0, failures = 0;
  logic [32:0] src[$];
  logic [32:0] exp_q[$];    // hit words; E0..E2 checked separately
  int pos = 0;              // word index within the current sample
  logic [31:0] e0_exp[$];
  logic [63:0] ts_at_e0;
  int hits = 0;
  logic gap = 0;

  packet_formatter dut (.clk, .rst, .dune_ts, .in_valid, .in_word, .in_ready,
                        .out_valid, .out_word, .out_ready, .sample_count);

  always #5 clk = ~clk;
  always @(posedge clk) dune_ts <= dune_ts + 64'd1;

  assign in_valid = (src.size() != 0) && !gap;
  assign in_word  = (src.size() != 0) ? stream_word_t'(src[0]) : '0;

  always @(posedge clk) begin
    if (!rst) begin
      if (in_valid && in_ready) void'(src.pop_front());
      if (out_valid && out_ready) begin
        checks++;
        if (pos == 0) begin
          logic [31:0] e;
          e = e0_exp.pop_front();
          ts_at_e0 = dune_ts;
          if (out_word.data !== e || out_word.last) begin failures++; $display("E0 %h exp %h", out_word.data, e); end
        end else if (pos == 1) begin
          if (out_word.data !== ts_at_e0[63:32]) begin failures++; $display("E1 %h exp %h", out_word.data, ts_at_e0[63:32]); end
        end else if (pos == 2) begin
          if (out_word.data !== ts_at_e0[31:0]) begin failures++; $display("E2 %h exp %h", out_word.data, ts_at_e0[31:0]); end
        end else begin
          logic [32:0] e;
          e = exp_q.pop_front();
          if ({out_word.last, out_word.data} !== e) begin failures++; $display("word %h exp %h", {out_word.last, out_word.data}, e); end
        end
        pos = out_word.last ? 0 : pos + 1;
      end
    end
  end

  task automatic add_hit(input int n);
    logic [31:0] d0;
    int words;
    d0 = {6'($urandom), 4'($urandom), 5'($urandom), 10'(n), 3'($urandom), 4'h0};
    words = 2 + (n + 2) / 3;
    e0_exp.push_back({4'hA, d0[31:26], d0[25:22], d0[21:17], 10'(words), d0[6:4]});
    src.push_back({1'b0, d0}); exp_q.push_back({1'b0, d0});
    src.push_back({1'b0, 32'($urandom)}); exp_q.push_back(src[$]);
    for (int k = 0; k < words - 2; k++) begin
      src.push_back({(k == words - 3), 32'($urandom)});
      exp_q.push_back(src[$]);
    end
    hits++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // timing: one hit of N=7 (5 words) must take 8 cycles
    add_hit(7);
    begin
      int c = 0;
      #1;
      while (out_valid) begin @(negedge clk); c++; end
      checks++;
      if (c != 8) begin failures++; $display("hit took %0d cycles, expected 8", c); end
    end
    fork
      repeat (100) begin add_hit($urandom_range(1, 40)); repeat ($urandom_range(0, 10)) @(negedge clk); end
      repeat (4000) begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); gap = ($urandom_range(0, 4) == 0); end
    join
    out_ready = 1; gap = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || e0_exp.size() != 0) begin failures++; $display("%0d words never came out", exp_q.size()); end
    checks++;
    if (sample_count != 16'(hits)) begin failures++; $display("sample_count %0d exp %0d", sample_count, hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
