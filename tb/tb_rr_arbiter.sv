// tb_rr_arbiter: self-checking test of the round-robin stage.
//
// Four inputs hold queues of hits (one queue per input, like L0 buffers).
// Checks: hits leave whole and unmixed, each input's hits in order; with all
// inputs busy the grants rotate 0,1,2,3,0,...; the first word of a hit goes
// out in the cycle of its grant (back-to-back hits with no idle cycle); a
// vetoed input is never granted; with enable low no hit starts, but a hit
// in flight finishes; the output stalls with out_ready.
module tb_rr_arbiter;
  import pat_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst = 1;
  logic enable = 1;
  logic [N-1:0] veto = '0;
  logic [N-1:0] in_valid, in_ready;
  stream_word_t in_word [N];
  logic out_valid, out_ready = 1;
  stream_word_t out_word;
  logic [15:0] grant_count;

  int checks = 0, failures = 0;
  logic [32:0] src[N][$];       // words still to send per input
  logic [32:0] exp_in[N][$];    // expected words per input
  int cur_src = -1;             // input of the hit in flight at the output
  int grants[$];
  int idle_gaps = 0;

  rr_arbiter #(.N(N)) dut (.clk, .rst, .enable, .veto, .in_valid, .in_word, .in_ready,
                           .out_valid, .out_word, .out_ready, .grant_count);

  always #5 clk = ~clk;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      in_valid[i] = (src[i].size() != 0);
      in_word[i]  = in_valid[i] ? stream_word_t'(src[i][0]) : '0;
    end
  end

  // identify the source of each word: data[31:30] carries the input number
  always @(posedge clk) begin
    if (!rst) begin
      for (int i = 0; i < N; i++)
        if (in_valid[i] && in_ready[i]) void'(src[i].pop_front());
      if (out_valid && out_ready) begin
        int s;
        logic [32:0] e;
        s = int'(out_word.data[31:30]);
        checks++;
        if (cur_src == -1) begin
          grants.push_back(s);
          cur_src = s;
        end else if (s != cur_src) begin
          failures++; $display("hits interleaved: %0d inside %0d", s, cur_src);
        end
        e = exp_in[s].pop_front();
        if ({out_word.last, out_word.data} !== e) begin
          failures++; $display("word %h exp %h", {out_word.last, out_word.data}, e);
        end
        if (out_word.last) cur_src = -1;
      end
    end
  end

  task automatic add_hit(input int i, input int n);
    for (int k = 0; k < n; k++) begin
      logic [32:0] w;
      w = {(k == n - 1), 2'(i), 30'($urandom)};
      src[i].push_back(w);
      exp_in[i].push_back(w);
    end
  endtask

  task automatic drain();
    int t = 0;
    while (t < 2000) begin
      int left = 0;
      for (int i = 0; i < N; i++) left += src[i].size();
      if (left == 0 && cur_src == -1) break;
      @(negedge clk); t++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // 1: all inputs busy, rotation, no idle cycles between hits
    for (int r = 0; r < 3; r++) for (int i = 0; i < N; i++) add_hit(i, 1 + (i + r) % 3);
    begin
      int total = 0, busy_cycles = 0;
      foreach (src[i]) total += src[i].size();
      #1;
      while (out_valid) begin @(negedge clk); busy_cycles++; end
      checks++;
      if (busy_cycles != total) begin failures++; $display("took %0d cycles for %0d words", busy_cycles, total); end
    end
    drain();
    checks++;
    if (grants.size() != 12) begin failures++; $display("grants %0d", grants.size()); end
    else for (int k = 0; k < 12; k++) if (grants[k] != k % N) begin
      failures++; $display("grant %0d went to %0d", k, grants[k]);
    end
    // 2: veto input 2
    grants.delete();
    veto = 4'b0100;
    for (int i = 0; i < N; i++) add_hit(i, 2);
    repeat (30) @(negedge clk);
    checks++;
    if (grants.size() != 3 || grants.sum() with (int'(item == 2)) != 0) begin
      failures++; $display("veto not honoured: %0d grants", grants.size());
    end
    veto = '0;
    drain();
    // 3: enable low: hit in flight completes, no new one starts
    add_hit(0, 6); add_hit(1, 2);
    @(negedge clk); @(negedge clk);
    enable = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (src[0].size() != 0 || src[1].size() != 2) begin
      failures++; $display("enable: src0 %0d src1 %0d left", src[0].size(), src[1].size());
    end
    enable = 1;
    // 4: random traffic with output back-pressure
    fork
      repeat (60) begin add_hit($urandom_range(0, N - 1), $urandom_range(1, 8)); repeat ($urandom_range(0, 6)) @(negedge clk); end
      repeat (800) begin @(negedge clk); out_ready = ($urandom_range(0, 2) != 0); end
    join
    out_ready = 1;
    drain();
    for (int i = 0; i < N; i++) begin
      checks++;
      if (exp_in[i].size() != 0) begin failures++; $display("input %0d: %0d words lost", i, exp_in[i].size()); end
    end
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
