// tb_sampa_decoder: self-checking test of the SAMPA stream decoder.
//
// Sends random bits (the decoder must stay unlocked), then a sync packet,
// then a random mix of data packets from chip 0 and chip 1 of a daisy
// chain, heartbeats (N = 0), sync packets and a longest packet (N = 1023),
// with bit_valid sometimes gapped. Every output word is compared with the
// reference model of sampa_stim_pkg, and the cycle of each D0 is checked:
// one clock after its last header bit is taken.
module tb_sampa_decoder;
  import pat_pkg::*;
  import sampa_stim_pkg::*;

  logic clk = 0;
  logic rst = 1;
  logic bit_valid = 0, bit_in = 0;
  logic out_valid, locked;
  stream_word_t out_word;
  logic [15:0] hit_count, sync_count;

  int checks = 0, failures = 0;
  longint cycle = 0;

  sampa_decoder dut (.clk, .rst, .fec_id(6'd37), .bit_valid, .bit_in,
                     .out_valid, .out_word, .locked, .hit_count, .sync_count);

  always #5 clk = ~clk;
  logic cur_hdr_end = 0;

  bit          wire_q[$];
  bit          hdr_end_q[$];   // marks the last header bit of a data packet
  logic [32:0] exp_q[$];
  longint      d0_due[$];
  int          n_hits = 0, n_sync = 1;

  task automatic add_data(input logic [3:0] chip, input int n, input logic [2:0] t);
    logic [9:0]  s[$];
    logic [49:0] h;
    for (int i = 0; i < n; i++) s.push_back(10'($urandom));
    h = make_hdr(t, 10'(n), 5'($urandom), chip, 20'($urandom));
    for (int i = 0; i < 50; i++) hdr_end_q.push_back(i == 49);
    for (int i = 0; i < n * 10; i++) hdr_end_q.push_back(0);
    push_packet(wire_q, h, s);
    expect_hit(exp_q, 6'd37, h, s);
    n_hits++;
  endtask

  task automatic add_nodata(input logic [49:0] h);
    logic [9:0] s[$];
    push_packet(wire_q, h, s);
    for (int i = 0; i < 50; i++) hdr_end_q.push_back(0);
  endtask

  // monitor
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected word %h", out_word);
      end else begin
        logic [32:0] e;
        e = exp_q.pop_front();
        if ({out_word.last, out_word.data} !== e) begin
          failures++;
          $display("word mismatch: got %h exp %h", {out_word.last, out_word.data}, e);
        end
        // D0 timing
        if (d0_due.size() != 0 && d0_due[0] == cycle) begin
          void'(d0_due.pop_front());
          checks++;
          if (e[31:26] != 6'd37) begin failures++; $display("D0 late/early at %0d", cycle); end
        end
      end
    end
    if (!rst && bit_valid && cur_hdr_end) d0_due.push_back(cycle + 1);
    cycle++;
  end

  initial begin
    int gap_mode;
    // random line noise before lock
    for (int i = 0; i < 300; i++) wire_q.push_back(bit'($urandom));
    add_nodata(SYNC_HDR);
    add_data(4'd0, 5, 3'd4);
    add_data(4'd1, 1, 3'd4);
    add_nodata(make_hdr(3'd0, 10'd0, 5'd3, 4'd0, 20'h12345));  // heartbeat
    add_nodata(SYNC_HDR); n_sync++;
    for (int k = 0; k < 40; k++) begin
      int r = $urandom_range(0, 9);
      if (r == 0) begin add_nodata(SYNC_HDR); n_sync++; end
      else if (r == 1) add_nodata(make_hdr(3'd0, 10'd0, 5'($urandom), 4'd1, 20'($urandom)));
      else add_data(4'($urandom_range(0, 1)), $urandom_range(1, 12), 3'($urandom_range(3, 7)));
    end
    add_data(4'd1, 1023, 3'd5);
    add_data(4'd0, 2, 3'd4);
    // pad hdr_end marks for the noise
    for (int i = 0; i < 300; i++) hdr_end_q.push_front(0);

    repeat (3) @(negedge clk);
    rst = 0;
    // the decoder must not lock on noise
    gap_mode = 0;
    while (wire_q.size() != 0) begin
      @(negedge clk);
      if (gap_mode == 1 && ($urandom_range(0, 3) == 0)) begin
        bit_valid = 0;
        cur_hdr_end = 0;
      end else begin
        bit_valid = 1;
        bit_in = wire_q.pop_front();
        cur_hdr_end = hdr_end_q.pop_front();
      end
      if (wire_q.size() == 2000) gap_mode = 1;
      if (wire_q.size() == 400) gap_mode = 0;
    end
    @(negedge clk); bit_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    checks++;
    if (hit_count != 16'(n_hits)) begin failures++; $display("hit_count %0d exp %0d", hit_count, n_hits); end
    checks++;
    if (sync_count != 16'(n_sync - 1)) begin failures++; $display("sync_count %0d exp %0d", sync_count, n_sync - 1); end
    checks++;
    if (d0_due.size() != 0) begin failures++; $display("%0d D0 words not at expected cycle", d0_due.size()); end
    checks++;
    if (!locked) begin failures++; $display("not locked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // not locked during noise
  initial begin
    repeat (200) @(posedge clk);
    checks++;
    if (locked) begin failures++; $display("locked on noise"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
