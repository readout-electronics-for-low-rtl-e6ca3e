// tb_noise_run: the triggered noise run of a full PAT card, at full size.
//
// Reproduces the noise measurement the design was used for: software fires
// a trigger to every FEC group through the sync control registers, and
// every channel of every FEC answers with one 500-sample waveform (25 us at
// 20 MHz). That is 55 FECs x 64 channels = 3520 hits of 500 samples, 172
// read-out words each, about 605,000 words in all, far more than the
// buffers hold, so the run works only because the read-out drains the card
// while the links are still sending.
//
// Stimulus: a FEC starts sending once the trigger pulse of its group has
// been seen on fec_trig. As on the busiest PAT card of the test stand, 55
// of the 56 links are cabled: link 55 stays silent and must never lock.
// Each FEC sends its 64 channels (chip 0 channels 0-31, then chip 1), one
// SAMPA data packet each, with baseline-plus-noise samples. The links run
// at one bit every LINK_DIV core clocks, a rate chosen here so that the
// links together deliver fewer words than the IPbus data port removes; the
// packets are generated on the fly as each link's queue runs dry.
//
// Checks: one trigger pulse per group; every word read through the data
// port equals the reference model, FEC by FEC in order; every hit is the
// full 172-word Ethernet sample; all 3520 waveforms arrive; no L0 buffer
// drops a hit; the sum and sum of squares of all samples read (the inputs
// of a per-channel RMS) equal those sent. The run takes about 2.6 million
// core clocks, set by the link rate.
module tb_noise_run;
  import pat_pkg::*;
  import sampa_stim_pkg::*;

  localparam int G = 7, K = 8, NF = G * K;
  localparam int N_ACTIVE   = 55;       // FECs cabled; link 55 stays silent
  localparam int CH_PER_FEC = 64;       // two SAMPAs x 32 channels
  localparam int N_SAMPLES  = 500;      // 25 us at 20 MHz
  localparam int LINK_DIV   = 8;        // core clocks per link bit
  localparam int HIT_WORDS  = 3 + 2 + (N_SAMPLES + 2) / 3;  // E0..E2 + hit

  logic clk = 0, rst = 1, clk_ref = 0, rst_ref = 1;
  logic [NF-1:0] fec_bit_valid = '0, fec_bit = '0;
  logic [G-1:0] fec_clk, fec_sync, fec_trig;
  logic [63:0] dune_ts = 64'h0000_0200_0000_0000;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  logic [15:0] link_ctrl;
  logic scl_oe, sda_oe, spi_sck, spi_mosi, spi_cs_n;
  logic [NF-1:0] fec_locked;

  pat_firmware_top dut (
    .clk, .rst, .clk_ref, .rst_ref, .fec_bit_valid, .fec_bit,
    .fec_clk, .fec_sync, .fec_trig, .dune_ts, .ipb_in, .ipb_out,
    .link_status(16'h0001), .link_ctrl, .scl_oe, .sda_oe,
    .scl_i(!scl_oe), .sda_i(!sda_oe),
    .spi_sck, .spi_mosi, .spi_cs_n, .spi_miso(1'b0),
    .fec_locked);

  always #5 clk = ~clk;
  always #1 clk_ref = ~clk_ref;
  always @(posedge clk) dune_ts <= dune_ts + 64'd1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- trigger detection ----------------
  int  n_trig [G];
  bit  triggered [G];
  logic [G-1:0] ptrig = '0;
  always @(posedge clk_ref) begin
    for (int g = 0; g < G; g++)
      if (!rst_ref && fec_trig[g] && !ptrig[g]) begin
        n_trig[g]++;
        triggered[g] = 1;
      end
    ptrig = fec_trig;
  end

  // ---------------- links ----------------
  bit          wire_q [NF][$];
  logic [32:0] exp_q  [NF][$];
  int          ch_sent [NF];
  longint      sum_sent = 0, sumsq_sent = 0;

  // next channel's waveform of FEC f onto its link, and into the model
  task automatic next_packet(input int f);
    logic [9:0]  s[$];
    logic [49:0] h;
    logic [32:0] e[$];
    int c;
    c = ch_sent[f];
    for (int i = 0; i < N_SAMPLES; i++) begin
      logic [9:0] v;
      v = 10'(60 + f + $urandom_range(0, 12));    // baseline + noise
      s.push_back(v);
      sum_sent   += longint'(v);
      sumsq_sent += longint'(v) * longint'(v);
    end
    h = make_hdr(3'd4, 10'(N_SAMPLES), 5'(c % 32), 4'(c / 32), 20'(1000));
    push_packet(wire_q[f], h, s);
    expect_hit(e, 6'(f), h, s);
    foreach (e[i]) exp_q[f].push_back(e[i]);
    ch_sent[f]++;
  endtask

  int div = 0;
  longint cycles = 0;
  always @(posedge clk) if (!rst) cycles++;
  always @(negedge clk) begin
    div = (div + 1) % LINK_DIV;
    for (int f = 0; f < NF; f++) begin
      if (!rst && f < N_ACTIVE && wire_q[f].size() == 0 && triggered[f / K] && ch_sent[f] < CH_PER_FEC)
        next_packet(f);
      if (!rst && div == 0 && wire_q[f].size() != 0) begin
        fec_bit_valid[f] <= 1'b1;
        fec_bit[f]       <= wire_q[f].pop_front();
      end else begin
        fec_bit_valid[f] <= 1'b0;
      end
    end
  end

  // ---------------- IPbus master ----------------
  task automatic ipb(input logic w, input logic [31:0] addr, input logic [31:0] d,
                     output logic [31:0] r);
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: d, strobe: 1'b1, write: w};
    #1;
    while (!ipb_out.ack && !ipb_out.err) @(negedge clk);
    r = ipb_out.rdata;
    @(negedge clk);
    ipb_in.strobe = 0;
  endtask

  // ---------------- run ----------------
  int     hits_read = 0, hits_per_fec [NF];
  longint sum_read = 0, sumsq_read = 0;

  initial begin
    logic [31:0] r, w;
    int empties;
    foreach (ch_sent[f]) begin ch_sent[f] = 0; hits_per_fec[f] = 0; end
    foreach (n_trig[g]) begin n_trig[g] = 0; triggered[g] = 0; end
    for (int f = 0; f < N_ACTIVE; f++) begin
      for (int i = 0; i < 60 + f; i++) wire_q[f].push_back(bit'($urandom));
      push_packet(wire_q[f], SYNC_HDR, '{});
    end
    repeat (4) @(negedge clk);
    rst = 0; rst_ref = 0;
    // wait for every link to lock, then fire the trigger on all groups
    while (!(&fec_locked[N_ACTIVE-1:0])) @(negedge clk);
    for (int g = 0; g < G; g++) ipb(1'b1, 32'h10 + g, 32'h2, r);

    // the DAQ: read the data port until every waveform is in
    empties = 0;
    while (hits_read < N_ACTIVE * CH_PER_FEC && empties < 20000) begin
      ipb(1'b0, 32'h04, 32'h0, w);
      if (w == 32'h0) begin empties++; continue; end
      empties = 0;
      begin
        sample_hdr_t e0;
        logic [31:0] ts_hi, ts_lo;
        int f;
        e0 = sample_hdr_t'(w);
        check(e0.magic == SAMPLE_MAGIC, $sformatf("E0 magic in %h", w));
        check(int'(e0.length) + 3 == HIT_WORDS, $sformatf("sample length %0d", e0.length));
        ipb(1'b0, 32'h04, 32'h0, ts_hi);
        ipb(1'b0, 32'h04, 32'h0, ts_lo);
        check(ts_hi == 32'h0000_0200, "timestamp high word");
        f = int'(e0.fec_id);
        check(f < NF, "FEC id range");
        if (f >= NF) f = 0;
        hits_per_fec[f]++;
        for (int i = 0; i < int'(e0.length); i++) begin
          logic [32:0] e;
          ipb(1'b0, 32'h04, 32'h0, w);
          if (exp_q[f].size() == 0) begin
            check(0, $sformatf("FEC %0d: unexpected word %h", f, w));
          end else begin
            e = exp_q[f].pop_front();
            check(w == e[31:0], $sformatf("FEC %0d word %0d: %h exp %h", f, i, w, e[31:0]));
            if (i == int'(e0.length) - 1) check(e[32], "hit ends where E0 says");
          end
          if (i >= 2) begin
            for (int k = 0; k < 3; k++) begin
              if ((i - 2) * 3 + k < N_SAMPLES) begin
                longint v;
                v = longint'(w[10*k +: 10]);
                sum_read   += v;
                sumsq_read += v * v;
              end
            end
          end
        end
        hits_read++;
      end
    end

    for (int g = 0; g < G; g++) check(n_trig[g] == 1, $sformatf("group %0d: %0d trigger pulses", g, n_trig[g]));
    check(hits_read == N_ACTIVE * CH_PER_FEC, $sformatf("%0d waveforms read, %0d sent", hits_read, N_ACTIVE * CH_PER_FEC));
    check(fec_locked[NF-1:N_ACTIVE] == '0, "silent links stay unlocked");
    for (int f = 0; f < NF; f++) begin
      check(hits_per_fec[f] == (f < N_ACTIVE ? CH_PER_FEC : 0), $sformatf("FEC %0d: %0d waveforms", f, hits_per_fec[f]));
      check(exp_q[f].size() == 0, $sformatf("FEC %0d: %0d words missing", f, exp_q[f].size()));
      ipb(1'b0, 32'h40 + f, 32'h0, r);
      check(r[31:16] == 16'h0, $sformatf("FEC %0d: %0d hits dropped", f, r[31:16]));
    end
    check(sum_read == sum_sent && sumsq_read == sumsq_sent, "sample sums");
    $display("noise run: %0d waveforms, %0d samples in %0d clocks, mean %0.3f, rms %0.3f ADC",
             hits_read, hits_read * N_SAMPLES, cycles,
             real'(sum_read) / real'(hits_read * N_SAMPLES),
             $sqrt(real'(sumsq_read) / real'(hits_read * N_SAMPLES) -
                   (real'(sum_read) / real'(hits_read * N_SAMPLES)) ** 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired: %0d waveforms read", hits_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
