// tb_ccm_regs: self-checking test of the control and monitoring registers.
//
// Drives IPbus accesses and checks: firmware id; clock rate and serial link
// registers read back; per-group clock enables; sync/trigger writes toggle
// only their group's line; RR control enable/veto read back and the reset
// bit gives a one-clock pulse; logic reset bits give one-clock pulses;
// memory content returns {drops, level} of the addressed FEC; the data port
// returns the waiting words in order, one per read, then 0 when empty; data
// count; the telemetry registers (formatter, round-robin, L1 level and
// decoder counters) read their inputs; err on an unmapped address; every
// access acked one clock after strobe.
module tb_ccm_regs;
  import pat_pkg::*;

  localparam int G = 7, F = 56, R = 8, B = 7;
  logic clk = 0, rst = 1;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  clk_rate_t clk_rate;
  logic [G-1:0] clk_en, sync_tgl, trig_tgl;
  logic [15:0] link_ctrl, link_status = 16'hBEEF;
  logic [R-1:0] rr_enable, rr_reset;
  logic [R-1:0][7:0] rr_veto;
  logic [B-1:0] blk_reset;
  logic [F-1:0][15:0] l0_level, l0_drops, dec_hits, dec_syncs;
  logic [R-1:0][15:0] rr_grants;
  logic [G-1:0][15:0] l1_level;
  logic [15:0] samples_sent = 16'd4321;
  logic [15:0] l2_level = 16'd77;
  logic data_valid, data_ready;
  logic [31:0] data_word;

  int checks = 0, failures = 0;
  logic [31:0] port_q[$];
  int rr_reset_pulses = 0, blk_reset_pulses = 0;

  ccm_regs #(.N_GROUPS(G), .N_FEC(F), .N_RR(R), .N_RST(B), .LVL_W(16)) dut (
    .clk, .rst, .ipb_in, .ipb_out, .clk_rate, .clk_en, .sync_tgl, .trig_tgl,
    .link_ctrl, .link_status, .rr_enable, .rr_reset, .rr_veto, .blk_reset,
    .l0_level, .l0_drops, .dec_hits, .dec_syncs, .rr_grants, .samples_sent, .l1_level,
    .l2_level, .data_valid, .data_word, .data_ready);

  always #5 clk = ~clk;

  assign data_valid = port_q.size() != 0;
  assign data_word  = data_valid ? port_q[0] : 32'hDEAD_DEAD;
  always @(posedge clk) begin
    if (!rst && data_ready) void'(port_q.pop_front());
    if (!rst && rr_reset != 0) rr_reset_pulses++;
    if (!rst && blk_reset != 0) blk_reset_pulses++;
  end

  initial for (int f = 0; f < F; f++) begin
    l0_level[f] = 16'(f * 3);
    l0_drops[f] = 16'(100 + f);
    dec_hits[f]  = 16'(1000 + 7 * f);
    dec_syncs[f] = 16'(200 + f);
    if (f < R) rr_grants[f] = 16'(3000 + f);
    if (f < G) l1_level[f]  = 16'(500 + f);
  end

  task automatic ipb(input logic wr, input logic [31:0] addr, input logic [31:0] wdata,
                     output logic [31:0] rdata, output logic err);
    int t = 0;
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: wdata, strobe: 1'b1, write: wr};
    @(negedge clk);
    while (!ipb_out.ack && !ipb_out.err && t < 10) begin @(negedge clk); t++; end
    checks++;
    if (t != 0) begin failures++; $display("addr %h acked after %0d extra cycles", addr, t); end
    rdata = ipb_out.rdata;
    err = ipb_out.err;
    ipb_in.strobe = 0;
  endtask

  task automatic wr(input logic [31:0] addr, input logic [31:0] d);
    logic [31:0] r; logic e;
    ipb(1'b1, addr, d, r, e);
  endtask

  task automatic rd_check(input logic [31:0] addr, input logic [31:0] exp);
    logic [31:0] r; logic e;
    ipb(1'b0, addr, 32'h0, r, e);
    checks++;
    if (e || r !== exp) begin failures++; $display("read %h = %h (err %0d) exp %h", addr, r, e, exp); end
  endtask

  initial begin
    logic [31:0] r; logic e;
    logic [G-1:0] st, tt;
    repeat (3) @(negedge clk);
    rst = 0;
    rd_check(32'h00, 32'h5041_5401);
    rd_check(32'h01, 32'h1);
    wr(32'h01, 32'h2);
    rd_check(32'h01, 32'h2);
    checks++; if (clk_rate != RATE_80) begin failures++; $display("clk_rate %0d", clk_rate); end
    wr(32'h02, 32'h0000_1234);
    rd_check(32'h02, 32'hBEEF_1234);
    checks++; if (link_ctrl != 16'h1234) begin failures++; $display("link_ctrl"); end
    // clock enables
    checks++; if (clk_en != '1) begin failures++; $display("clk_en reset value %b", clk_en); end
    wr(32'h08 + 3, 32'h0);
    wr(32'h08 + 6, 32'h0);
    checks++; if (clk_en != 7'b0110111) begin failures++; $display("clk_en %b", clk_en); end
    rd_check(32'h08 + 3, 32'h0);
    rd_check(32'h08 + 2, 32'h1);
    // sync / trigger toggles
    st = sync_tgl; tt = trig_tgl;
    wr(32'h10 + 5, 32'h1);
    checks++; if ((sync_tgl ^ st) != 7'b0100000 || trig_tgl != tt) begin failures++; $display("sync toggle %b", sync_tgl ^ st); end
    wr(32'h10 + 0, 32'h2);
    checks++; if ((trig_tgl ^ tt) != 7'b0000001) begin failures++; $display("trig toggle %b", trig_tgl ^ tt); end
    // RR control
    wr(32'h18 + 7, 32'h0000_5A00);
    rd_check(32'h18 + 7, 32'h0000_5A00);
    checks++; if (rr_enable[7] || rr_veto[7] != 8'h5A || rr_enable[6] != 1) begin failures++; $display("rr ctrl"); end
    wr(32'h18 + 2, 32'h0000_0003);
    @(negedge clk);
    checks++; if (rr_reset_pulses != 1) begin failures++; $display("rr reset pulses %0d", rr_reset_pulses); end
    // logic reset
    wr(32'h20 + 4, 32'h1);
    @(negedge clk);
    checks++; if (blk_reset_pulses != 1) begin failures++; $display("blk reset pulses %0d", blk_reset_pulses); end
    // memory content
    for (int f = 0; f < F; f += 11) rd_check(32'h40 + f, {16'(100 + f), 16'(f * 3)});
    rd_check(32'h40 + 55, {16'(155), 16'(165)});
    // telemetry
    rd_check(32'h05, 32'd4321);
    for (int f = 0; f < F; f += 5) rd_check(32'h80 + f, {16'(200 + f), 16'(1000 + 7 * f)});
    for (int r = 0; r < R; r++) rd_check(32'h28 + r, 32'(3000 + r));
    for (int g = 0; g < G; g++) rd_check(32'h30 + g, 32'(500 + g));
    // data port
    for (int k = 0; k < 5; k++) port_q.push_back(32'h1000 + k);
    rd_check(32'h03, {1'b1, 15'h0, 16'd77});
    for (int k = 0; k < 5; k++) rd_check(32'h04, 32'h1000 + k);
    rd_check(32'h04, 32'h0);
    rd_check(32'h03, {1'b0, 15'h0, 16'd77});
    // unmapped
    ipb(1'b0, 32'h3F, 32'h0, r, e);
    checks++; if (!e) begin failures++; $display("no err on unmapped"); end
    ipb(1'b0, 32'h40 + 56, 32'h0, r, e);
    checks++; if (!e) begin failures++; $display("no err past last FEC"); end
    ipb(1'b0, 32'h80 + 56, 32'h0, r, e);
    checks++; if (!e) begin failures++; $display("no err past last decoder"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
