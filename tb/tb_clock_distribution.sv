// tb_clock_distribution: self-checking test of the FEC clock, sync and
// trigger generation.
//
// For each rate (320, 160, 80 MHz from a 640 MHz reference) checks the FEC
// clock period (2, 4, 8 reference cycles) and 50 % duty on enabled groups,
// that disabled groups stay low, and that every high and low phase seen
// across rate and enable changes is a whole half period of one of the rates
// (no glitch). A sync or trigger request (a toggle) must give, on its group
// only, one pulse exactly one FEC clock period long that contains exactly
// one rising FEC clock edge.
module tb_clock_distribution;
  import pat_pkg::*;

  localparam int G = 7;
  logic clk_ref = 0, rst_ref = 1;
  clk_rate_t rate = RATE_160;
  logic [G-1:0] clk_en = '1, sync_tgl = '0, trig_tgl = '0;
  logic [G-1:0] fec_clk, fec_sync, fec_trig;

  int checks = 0, failures = 0;

  clock_distribution #(.N_GROUPS(G)) dut (.clk_ref, .rst_ref, .rate, .clk_en, .sync_tgl,
                                          .trig_tgl, .fec_clk, .fec_sync, .fec_trig);

  always #1 clk_ref = ~clk_ref;

  // per-group phase length measurement on the reference clock
  int hi_len [G], lo_len [G], last_hi [G], last_lo [G], bad_phase = 0;
  int sync_len [G], sync_edges [G], sync_pulses [G], sync_edge_cnt [G], sync_width [G];
  int trig_pulses [G];
  logic [G-1:0] prev_clk = '0, prev_sync = '0, prev_trig = '0;
  logic monitor_on = 0;

  always @(posedge clk_ref) begin
    for (int g = 0; g < G; g++) begin
      if (monitor_on) begin
        if (fec_clk[g]) hi_len[g]++; else lo_len[g]++;
        if (fec_clk[g] && !prev_clk[g]) begin
          if (!(lo_len[g] inside {1, 2, 4}) && lo_len[g] < 8) bad_phase++;  // longer: group was off
          last_lo[g] = lo_len[g]; lo_len[g] = 0;
          if (fec_sync[g]) sync_edge_cnt[g]++;
        end
        if (!fec_clk[g] && prev_clk[g]) begin
          if (!(hi_len[g] inside {1, 2, 4})) bad_phase++;
          last_hi[g] = hi_len[g]; hi_len[g] = 0;
        end
        if (fec_sync[g]) sync_len[g]++;
        if (!fec_sync[g] && prev_sync[g]) begin
          sync_pulses[g]++; sync_width[g] = sync_len[g]; sync_len[g] = 0;
          sync_edges[g] = sync_edge_cnt[g]; sync_edge_cnt[g] = 0;
        end
        if (fec_trig[g] && !prev_trig[g]) trig_pulses[g]++;
      end
      prev_clk[g] = fec_clk[g]; prev_sync[g] = fec_sync[g]; prev_trig[g] = fec_trig[g];
    end
  end

  task automatic check_rate(input clk_rate_t r, input int half);
    rate = r;
    repeat (60) @(negedge clk_ref);
    for (int g = 0; g < G; g++) begin
      checks++;
      if (clk_en[g]) begin
        if (last_hi[g] != half || last_lo[g] != half) begin
          failures++; $display("rate %0d group %0d: high %0d low %0d, expected %0d", r, g, last_hi[g], last_lo[g], half);
        end
      end else if (fec_clk[g] || hi_len[g] != 0) begin
        failures++; $display("disabled group %0d toggles", g);
      end
    end
  endtask

  task automatic check_sync(input int g, input int period);
    int p0 [G];
    p0 = sync_pulses;
    sync_tgl[g] = !sync_tgl[g];
    repeat (40) @(negedge clk_ref);
    for (int k = 0; k < G; k++) begin
      checks++;
      if ((sync_pulses[k] - p0[k]) != (k == g ? 1 : 0)) begin
        failures++; $display("sync to %0d: group %0d got %0d pulses", g, k, sync_pulses[k] - p0[k]);
      end
    end
    checks++;
    if (sync_width[g] != period || sync_edges[g] != 1) begin
      failures++; $display("sync width %0d (exp %0d) with %0d clock edges", sync_width[g], period, sync_edges[g]);
    end
  endtask

  initial begin
    for (int g = 0; g < G; g++) begin
      hi_len[g] = 0; lo_len[g] = 0; last_hi[g] = 0; last_lo[g] = 0; sync_len[g] = 0;
      sync_edges[g] = 0; sync_pulses[g] = 0; sync_edge_cnt[g] = 0; sync_width[g] = 0; trig_pulses[g] = 0;
    end
    repeat (4) @(negedge clk_ref);
    rst_ref = 0;
    repeat (10) @(negedge clk_ref);
    monitor_on = 1;
    check_rate(RATE_160, 2);
    check_rate(RATE_320, 1);
    check_rate(RATE_80, 4);
    clk_en = 7'b1011011;
    repeat (20) @(negedge clk_ref);
    for (int g = 0; g < G; g++) begin hi_len[g] = 0; end
    check_rate(RATE_80, 4);
    check_rate(RATE_320, 1);
    clk_en = '1;
    check_rate(RATE_160, 2);
    check_sync(3, 4);
    rate = RATE_80; repeat (30) @(negedge clk_ref);
    check_sync(0, 8);
    rate = RATE_320; repeat (30) @(negedge clk_ref);
    check_sync(6, 2);
    // trigger on group 2 only
    trig_tgl[2] = 1;
    repeat (40) @(negedge clk_ref);
    for (int g = 0; g < G; g++) begin
      checks++;
      if (trig_pulses[g] != (g == 2 ? 1 : 0)) begin failures++; $display("trigger group %0d pulses %0d", g, trig_pulses[g]); end
    end
    checks++;
    if (bad_phase != 0) begin failures++; $display("%0d glitches", bad_phase); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_ref);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
