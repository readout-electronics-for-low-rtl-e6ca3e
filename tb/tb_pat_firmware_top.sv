// tb_pat_firmware_top: end-to-end test of the PAT read-out firmware at its
// full size (56 FECs in 7 groups of 8, default buffer depths).
//
// Every FEC link carries line noise, a SAMPA sync packet, then random hits
// from both chips of its daisy chain mixed with heartbeats, sync packets and
// hits of the trigger-mode packet types. The test reads the output the way
// the DAQ does, through the IPbus data port, parses the Ethernet samples
// (E0 header, 64-bit timestamp, hit) and compares each hit with a
// reference model, FEC by FEC in order. It also drives the control side:
// firmware id, sync and trigger pulses, FEC clock rate and enable, the I2C
// and SPI masters, round-robin veto and enable, a logic reset, unmapped
// addresses, and the telemetry registers: decoder hit and sync counts per
// FEC, round-robin grant counts, formatter sample count, L1 fill level.
//
// Mechanisms that must each happen at least once (counted, a failure if
// never): decoder lock on all links, hits from every FEC through both
// round-robin levels, back-pressure from the L2 buffer into the round-robin
// stages while the DAQ is not reading, L0 overflow with whole hits dropped
// (a vetoed FEC), a veto holding hits back until lifted, a disabled
// round-robin stage, a round-robin reset, a logic reset flushing the L0
// buffers, sync and trigger pulses, a FEC clock rate change, a disabled FEC
// clock, an I2C transfer, an SPI byte (MISO looped back to MOSI).
module tb_pat_firmware_top;
  import pat_pkg::*;
  import sampa_stim_pkg::*;

  localparam int G = 7, K = 8, NF = G * K;
  localparam int VETO_FEC = 5;          // group 0, input 5
  localparam int L0_DEPTH = 512;

  logic clk = 0, rst = 1, clk_ref = 0, rst_ref = 1;
  logic [NF-1:0] fec_bit_valid = '0, fec_bit = '0;
  logic [G-1:0] fec_clk, fec_sync, fec_trig;
  logic [63:0] dune_ts = 64'h0000_0100_0000_0000;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  logic [15:0] link_status = 16'h0001, link_ctrl;
  logic scl_oe, sda_oe;
  logic spi_sck, spi_mosi, spi_cs_n;
  logic [NF-1:0] fec_locked;

  pat_firmware_top dut (
    .clk, .rst, .clk_ref, .rst_ref, .fec_bit_valid, .fec_bit,
    .fec_clk, .fec_sync, .fec_trig, .dune_ts, .ipb_in, .ipb_out,
    .link_status, .link_ctrl, .scl_oe, .sda_oe, .scl_i(!scl_oe), .sda_i(!sda_oe),
    .spi_sck, .spi_mosi, .spi_cs_n, .spi_miso(spi_mosi),
    .fec_locked);

  always #5 clk = ~clk;
  always #1 clk_ref = ~clk_ref;
  always @(posedge clk) dune_ts <= dune_ts + 64'd1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- stimulus ----------------
  bit          wire_q [NF][$];
  logic [32:0] exp_q  [NF][$];
  int          hits_sent [NF];
  int          syncs_sent [NF];
  int          l0_model_words = 0;   // words committed in the vetoed FEC's L0
  int          model_drops = 0;

  task automatic add_hit(input int f, input int n, input logic [2:0] t, input bit track_l0);
    logic [9:0]  s[$];
    logic [49:0] h;
    logic [32:0] e[$];
    for (int i = 0; i < n; i++) s.push_back(10'($urandom));
    h = make_hdr(t, 10'(n), 5'($urandom), 4'($urandom_range(0, 1)), 20'($urandom));
    push_packet(wire_q[f], h, s);
    expect_hit(e, 6'(f), h, s);
    if (track_l0) begin
      // nothing drains while vetoed: a hit is kept only if it fits
      if (l0_model_words + e.size() <= L0_DEPTH) begin
        l0_model_words += e.size();
        foreach (e[i]) exp_q[f].push_back(e[i]);
      end else model_drops++;
    end else foreach (e[i]) exp_q[f].push_back(e[i]);
    hits_sent[f]++;
  endtask

  task automatic add_idle(input int f);
    logic [9:0] s[$];
    if ($urandom_range(0, 1)) begin
      push_packet(wire_q[f], SYNC_HDR, s);
      syncs_sent[f]++;
    end
    else push_packet(wire_q[f], make_hdr(3'd0, 10'd0, 5'($urandom), 4'd1, 20'($urandom)), s);
  endtask

  // serialisers: one bit per clock on every link that has bits queued
  always @(negedge clk) begin
    for (int f = 0; f < NF; f++) begin
      if (!rst && wire_q[f].size() != 0) begin
        fec_bit_valid[f] <= 1'b1;
        fec_bit[f]       <= wire_q[f].pop_front();
      end else begin
        fec_bit_valid[f] <= 1'b0;
      end
    end
  end

  function automatic bit links_idle();
    for (int f = 0; f < NF; f++) if (wire_q[f].size() != 0) return 0;
    return 1;
  endfunction

  // ---------------- IPbus master ----------------
  task automatic ipb(input logic w, input logic [31:0] addr, input logic [31:0] d,
                     output logic [31:0] r, output logic err);
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: d, strobe: 1'b1, write: w};
    #1;
    while (!ipb_out.ack && !ipb_out.err) @(negedge clk);
    r = ipb_out.rdata;
    err = ipb_out.err;
    @(negedge clk);
    ipb_in.strobe = 0;
  endtask
  task automatic wr(input logic [31:0] addr, input logic [31:0] d);
    logic [31:0] r; logic e; ipb(1'b1, addr, d, r, e);
  endtask
  task automatic rd(input logic [31:0] addr, output logic [31:0] r);
    logic e; ipb(1'b0, addr, 32'h0, r, e);
  endtask

  // ---------------- read-out parser ----------------
  int samples_read = 0, words_read = 0;
  int fec_seen [NF];
  bit group_seen [G];
  logic [63:0] last_ts = '0;

  // read until the port is empty for a while; returns samples parsed
  task automatic read_out(input int max_words);
    logic [31:0] w;
    int empties = 0;
    int n = 0;
    while (empties < 40 && n < max_words) begin
      rd(32'h04, w);
      if (w == 32'h0) begin empties++; continue; end
      empties = 0;
      begin
        sample_hdr_t e0;
        logic [31:0] ts_hi, ts_lo;
        int f;
        e0 = sample_hdr_t'(w);
        check(e0.magic == SAMPLE_MAGIC, $sformatf("E0 magic in %h", w));
        if (e0.magic != SAMPLE_MAGIC) return;
        rd(32'h04, ts_hi);
        rd(32'h04, ts_lo);
        check({ts_hi, ts_lo} >= last_ts && ts_hi == 32'h0000_0100, "timestamp order");
        last_ts = {ts_hi, ts_lo};
        f = int'(e0.fec_id);
        check(f < NF, "FEC id range");
        fec_seen[f]++;
        group_seen[f / K] = 1;
        for (int i = 0; i < int'(e0.length); i++) begin
          logic [32:0] e;
          rd(32'h04, w);
          words_read++;
          if (exp_q[f].size() == 0) begin
            check(0, $sformatf("FEC %0d: unexpected word %h", f, w));
          end else begin
            e = exp_q[f].pop_front();
            check(w == e[31:0], $sformatf("FEC %0d word %0d: %h exp %h", f, i, w, e[31:0]));
            if (i == 0) begin
              hit_hdr_t d0;
              d0 = hit_hdr_t'(w);
              check(d0.fec_id == e0.fec_id && d0.chip_addr == e0.chip_addr &&
                    d0.channel == e0.channel && e0.length == hit_words(d0.num_words) &&
                    d0.pkt_type == e0.pkt_type, "E0 fields agree with D0");
            end
            if (i == int'(e0.length) - 1) check(e[32], "hit ends where E0 says");
          end
        end
        samples_read++;
        n++;
      end
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_sync = 0, n_trig = 0, n_scl = 0, n_clk_rise_g3 = 0, n_sck = 0;
  logic psck = 0;
  always @(posedge clk) begin
    if (!rst && spi_sck && !psck && !spi_cs_n) n_sck++;
    psck = spi_sck;
  end
  always @(posedge clk) begin
    if (!rst && dut.l2_in_valid && !dut.l2_in_ready) n_stall++;
    if (!rst && (dut.l1_in_valid[0] && !dut.l1_in_ready[0])) n_stall++;
  end
  logic [G-1:0] psync = '0, ptrig = '0, pclk = '0;
  logic pscl = 1;
  always @(posedge clk_ref) begin
    if (rst_ref) ;
    else if (fec_sync[4] && !psync[4]) n_sync++;
    if (!rst_ref && fec_trig[1] && !ptrig[1]) n_trig++;
    if (!rst_ref && fec_clk[3] && !pclk[3]) n_clk_rise_g3++;
    psync = fec_sync; ptrig = fec_trig; pclk = fec_clk;
    if (!rst && scl_oe && pscl) n_scl++;
    pscl = !scl_oe;
  end

  int period_meas;
  task automatic measure_period(input int g, output int p);
    int t0, t1;
    @(posedge fec_clk[g]); t0 = $time;
    @(posedge fec_clk[g]); t1 = $time;
    p = (t1 - t0) / 2;      // in reference clock (640 MHz) cycles
  endtask

  initial begin
    logic [31:0] r;
    logic e;
    int stuck_hits, p160, p80, rises;
    foreach (fec_seen[f]) begin fec_seen[f] = 0; hits_sent[f] = 0; syncs_sent[f] = 0; end
    foreach (group_seen[g]) group_seen[g] = 0;

    // link noise, sync, and the first traffic
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < 100 + f; i++) wire_q[f].push_back(bit'($urandom));
      push_packet(wire_q[f], SYNC_HDR, '{});
    end
    repeat (4) @(negedge clk);
    rst = 0; rst_ref = 0;

    // ---- control side ----
    rd(32'h00, r);
    check(r == 32'h5041_5401, "firmware id");
    ipb(1'b0, 32'h3F, 32'h0, r, e);
    check(e, "unmapped address gives err");
    ipb(1'b0, 32'h400, 32'h0, r, e);
    check(e, "address outside every slave gives err");
    rd(32'h02, r);
    check(r[31:16] == 16'h0001, "serial link status");
    wr(32'h10 + 4, 32'h1);          // sync to group 4
    wr(32'h10 + 1, 32'h2);          // trigger to group 1
    measure_period(3, p160);
    wr(32'h01, 32'h2);              // 80 MHz
    repeat (10) @(negedge clk);
    measure_period(3, p80);
    check(p160 == 4 && p80 == 8, $sformatf("FEC clock period %0d/%0d, expected 4/8", p160, p80));
    wr(32'h08 + 3, 32'h0);          // group 3 clock off
    repeat (10) @(negedge clk);
    rises = n_clk_rise_g3;
    repeat (20) @(negedge clk);
    check(n_clk_rise_g3 == rises, "disabled FEC clock is still");
    wr(32'h08 + 3, 32'h1);
    // I2C: prescale 2, START + write 0xA0 + STOP (no slave: NACK)
    wr(32'h100, 32'd2);
    wr(32'h101, 32'h0000_0BA0);
    do rd(32'h102, r); while (r[0]);
    check(r[1] == 1'b1, "I2C NACK from empty bus");
    // SPI: select the flash, send 0x9F (read-id opcode), loop back
    wr(32'h200, 32'd1);
    wr(32'h201, 32'd1);
    check(!spi_cs_n, "SPI chip select");
    wr(32'h202, 32'h9F);
    do rd(32'h202, r); while (r[8]);
    check(r[7:0] == 8'h9F, $sformatf("SPI loop-back byte %02h", r[7:0]));
    wr(32'h201, 32'd0);
    check(spi_cs_n, "SPI chip deselected");

    // ---- veto FEC 5 in group 0's round-robin, then load every link ----
    wr(32'h18 + 0, {16'h0, 8'(1 << VETO_FEC), 8'h01});
    for (int f = 0; f < NF; f++) begin
      int nh;
      nh = (f == VETO_FEC) ? 60 : $urandom_range(6, 10);
      for (int k = 0; k < nh; k++) begin
        if ($urandom_range(0, 4) == 0) add_idle(f);
        if (f == VETO_FEC) add_hit(f, 30, 3'd4, 1);
        else add_hit(f, $urandom_range(1, 60), ($urandom_range(0, 3) == 0) ? 3'd6 : 3'd4, 0);
      end
    end
    // the DAQ does not read until every link has sent everything
    while (!links_idle()) @(negedge clk);
    repeat (50) @(negedge clk);
    check(&fec_locked, "all decoders locked");
    check(n_stall > 0, "back-pressure into the round-robin stages");
    rd(32'h40 + VETO_FEC, r);
    check(r[31:16] == 16'(model_drops) && model_drops > 0,
          $sformatf("L0 drops %0d, model %0d", r[31:16], model_drops));
    check(r[15:0] == 16'(l0_model_words), $sformatf("L0 level %0d, model %0d", r[15:0], l0_model_words));
    rd(32'h03, r);
    check(r[31] && r[15:0] != 0, "words waiting at the data port");
    rd(32'h30 + 0, r);
    check(r[15:0] != 0, $sformatf("group 0 L1 buffer holds words (%0d)", r[15:0]));

    // ---- read everything but the vetoed FEC ----
    read_out(100000);
    check(fec_seen[VETO_FEC] == 0, "vetoed FEC held back");
    for (int f = 0; f < NF; f++)
      if (f != VETO_FEC) check(exp_q[f].size() == 0, $sformatf("FEC %0d: %0d words missing", f, exp_q[f].size()));
    // lift the veto
    wr(32'h18 + 0, 32'h0000_0001);
    read_out(100000);
    check(exp_q[VETO_FEC].size() == 0, "vetoed FEC's kept hits read after veto lifted");
    for (int f = 0; f < NF; f++) check(fec_seen[f] > 0, $sformatf("FEC %0d never seen", f));
    for (int g = 0; g < G; g++) check(group_seen[g], $sformatf("group %0d never seen", g));

    // ---- disable group 2's stage, send hits, flush L0 with a logic reset ----
    wr(32'h18 + 2, 32'h0000_0000);
    for (int f = 16; f < 24; f++) begin
      push_packet(wire_q[f], make_hdr(3'd4, 10'd3, 5'd1, 4'd0, 20'd5), '{10'd1, 10'd2, 10'd3});
    end
    while (!links_idle()) @(negedge clk);
    repeat (10) @(negedge clk);
    rd(32'h40 + 16, r);
    stuck_hits = int'(r[15:0]);
    check(stuck_hits == 3, $sformatf("hit held by disabled stage (level %0d)", stuck_hits));
    wr(32'h20 + 1, 32'h1);            // logic reset: L0 buffers
    repeat (4) @(negedge clk);
    rd(32'h40 + 16, r);
    check(r[15:0] == 0, "logic reset flushed L0");
    wr(32'h18 + 2, 32'h0000_0001);
    read_out(100);
    check(samples_read > 0, "samples read");
    for (int f = 0; f < NF; f++) check(exp_q[f].size() == 0, $sformatf("FEC %0d leftovers", f));

    // telemetry counters
    for (int f = 0; f < NF; f++) begin
      int hx;
      hx = hits_sent[f] + ((f >= 16 && f < 24) ? 1 : 0);
      rd(32'h80 + f, r);
      check(r[15:0] == 16'(hx) && r[31:16] == 16'(syncs_sent[f]),
            $sformatf("FEC %0d decoder counters hits %0d syncs %0d, sent %0d/%0d",
                      f, r[15:0], r[31:16], hx, syncs_sent[f]));
    end
    rd(32'h05, r);
    check(r[15:0] == 16'(samples_read), $sformatf("formatter count %0d, read %0d", r[15:0], samples_read));
    begin
      int sum_l0rr;
      sum_l0rr = 0;
      for (int g = 0; g < G; g++) begin rd(32'h28 + g, r); sum_l0rr += int'(r[15:0]); end
      check(sum_l0rr == samples_read, $sformatf("first-level grants %0d, read %0d", sum_l0rr, samples_read));
      rd(32'h28 + G, r);
      check(int'(r[15:0]) == samples_read, $sformatf("second-level grants %0d, read %0d", r[15:0], samples_read));
    end

    // ---- reset the 7:1 stage through its RR control register ----
    wr(32'h18 + G, 32'h0000_0003);    // enable, reset pulse
    rd(32'h28 + G, r);
    check(r[15:0] == 0, $sformatf("RR reset cleared the grant count (%0d)", r[15:0]));
    rd(32'h18 + G, r);
    check(r[1:0] == 2'b01, "RR reset bit self-clears");
    add_hit(40, 7, 3'd4, 0);
    while (!links_idle()) @(negedge clk);
    repeat (20) @(negedge clk);
    read_out(100);
    check(exp_q[40].size() == 0, "hit passes after RR reset");
    rd(32'h28 + G, r);
    check(r[15:0] == 1, $sformatf("one grant after RR reset (%0d)", r[15:0]));

    check(n_sync == 1, $sformatf("sync pulses on group 4: %0d", n_sync));
    check(n_trig == 1, $sformatf("trigger pulses on group 1: %0d", n_trig));
    check(n_scl >= 9, "I2C clock ran");
    check(n_sck == 8, $sformatf("SPI clock edges %0d, expected 8", n_sck));
    $display("mechanisms: stalls=%0d drops=%0d syncs=%0d triggers=%0d scl_pulses=%0d sck_pulses=%0d samples=%0d words=%0d",
             n_stall, model_drops, n_sync, n_trig, n_scl, n_sck, samples_read, words_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
