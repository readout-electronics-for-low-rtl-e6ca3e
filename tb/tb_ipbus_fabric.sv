// tb_ipbus_fabric: self-checking test of the IPbus address decoder.
//
// Three slave models at 0x000, 0x100 and 0x200-0x2FF (mask 0xF00) ack one
// clock after strobe and return {slave number, address}. Each access must
// reach only the right slave (strobe seen by that one alone), return its
// data, and an unmapped address must be answered with err in the same
// cycle.
module tb_ipbus_fabric;
  import pat_pkg::*;

  localparam int N = 3;
  logic clk = 0;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  ipb_wbus_t slv_in [N];
  ipb_rbus_t slv_out [N];
  int strobes [N];

  int checks = 0, failures = 0;

  ipbus_fabric #(
    .N_SLV(N),
    .SLV_BASE({32'h0000_0200, 32'h0000_0100, 32'h0000_0000}),
    .SLV_MASK({32'hFFFF_FF00, 32'hFFFF_FF00, 32'hFFFF_FF00})
  ) dut (.ipb_in, .ipb_out, .slv_in, .slv_out);

  always #5 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g_slv
    always @(posedge clk) begin
      slv_out[i].ack   <= slv_in[i].strobe && !slv_out[i].ack;
      slv_out[i].err   <= 1'b0;
      slv_out[i].rdata <= {8'(i), slv_in[i].addr[23:0]};
      if (slv_in[i].strobe && !slv_out[i].ack) strobes[i]++;
    end
    initial slv_out[i] = '0;
  end

  task automatic access(input logic [31:0] addr, input int exp_slave);
    int prev_cnt [N];
    int t = 0;
    prev_cnt = strobes;
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: 32'h0, strobe: 1'b1, write: 1'b0};
    #1;
    while (!ipb_out.ack && !ipb_out.err && t < 20) begin @(negedge clk); t++; end
    checks++;
    if (exp_slave < 0) begin
      if (!ipb_out.err || t != 0) begin failures++; $display("addr %h: no immediate err", addr); end
    end else begin
      if (!ipb_out.ack || ipb_out.rdata !== {8'(exp_slave), addr[23:0]}) begin
        failures++; $display("addr %h: ack %0d rdata %h", addr, ipb_out.ack, ipb_out.rdata);
      end
    end
    @(negedge clk);
    ipb_in.strobe = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if ((strobes[i] - prev_cnt[i]) != ((i == exp_slave) ? 1 : 0)) begin
        failures++; $display("addr %h: slave %0d saw %0d strobes", addr, i, strobes[i] - prev_cnt[i]);
      end
    end
  endtask

  initial begin
    foreach (strobes[i]) strobes[i] = 0;
    repeat (3) @(negedge clk);
    access(32'h0000_0004, 0);
    access(32'h0000_0100, 1);
    access(32'h0000_01FF, 1);
    access(32'h0000_0277, 2);
    access(32'h0000_0300, -1);
    access(32'h0001_0000, -1);
    for (int k = 0; k < 30; k++) begin
      logic [31:0] a;
      a = {22'h0, 10'($urandom)};
      access(a, (a[11:8] < 3) ? int'(a[11:8]) : -1);
    end
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
