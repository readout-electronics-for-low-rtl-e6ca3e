// tb_spi_master: self-checking test of the SPI flash master.
//
// A behavioural mode-0 SPI slave shifts in MOSI on rising SCK and shifts
// out a reply byte on MISO. Through IPbus the test selects the chip, sends
// a read-status style command and a second byte, and deselects. Checks: the
// bytes the slave received, the bytes read back, exactly 8 rising SCK edges
// per byte, SCK idle low, chip select framing, and the byte duration of
// 16 x (prescale + 1) clocks.
module tb_spi_master;
  import pat_pkg::*;

  logic clk = 0, rst = 1;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  logic sck, mosi, cs_n, miso;

  int checks = 0, failures = 0;

  spi_master dut (.clk, .rst, .ipb_in, .ipb_out, .sck, .mosi, .cs_n, .miso);

  always #5 clk = ~clk;

  // slave
  logic [7:0] sl_in = 0, sl_out = 8'hC5, got[$];
  int rises = 0, bitn = 0;
  logic psck = 0;
  assign miso = sl_out[7];
  always @(posedge clk) begin
    if (!rst && !cs_n) begin
      if (sck && !psck) begin
        sl_in = {sl_in[6:0], mosi}; rises++; bitn++;
        if (bitn == 8) begin got.push_back(sl_in); bitn = 0; end
      end
      if (!sck && psck) sl_out = {sl_out[6:0], sl_out[7]};   // rotate the reply
    end
    psck = sck;
  end

  task automatic ipb(input logic w, input logic [31:0] addr, input logic [31:0] d,
                     output logic [31:0] r);
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: d, strobe: 1'b1, write: w};
    @(negedge clk);
    while (!ipb_out.ack && !ipb_out.err) @(negedge clk);
    r = ipb_out.rdata;
    ipb_in.strobe = 0;
  endtask

  task automatic xfer(input logic [7:0] b, output logic [7:0] rb, output int cycles);
    logic [31:0] r;
    int t0;
    ipb(1'b1, 32'h2, {24'h0, b}, r);
    t0 = 0;
    do begin ipb(1'b0, 32'h2, 32'h0, r); t0++; end while (r[8]);
    rb = r[7:0];
    cycles = t0;
  endtask

  initial begin
    logic [31:0] r;
    logic [7:0] rb;
    int cyc;
    repeat (3) @(negedge clk);
    rst = 0;
    ipb(1'b1, 32'h0, 32'd3, r);
    checks++; if (!cs_n || sck) begin failures++; $display("not idle"); end
    ipb(1'b1, 32'h1, 32'h1, r);
    checks++; if (cs_n) begin failures++; $display("cs not asserted"); end
    begin
      int t0, t1;
      t0 = $time;
      ipb(1'b1, 32'h2, 32'h05, r);
      while (!dut.busy) @(negedge clk);
      while (dut.busy) @(negedge clk);
      t1 = $time;
      checks++;
      // 16 half periods of 4 clocks, +/- the access cycles
      if ((t1 - t0) / 10 < 64 || (t1 - t0) / 10 > 68) begin failures++; $display("byte took %0d clocks", (t1 - t0) / 10); end
    end
    ipb(1'b0, 32'h2, 32'h0, r);
    checks++; if (r[7:0] != 8'hC5) begin failures++; $display("read %h exp C5", r[7:0]); end
    xfer(8'hA3, rb, cyc);
    checks++; if (rb != 8'hC5) begin failures++; $display("second read %h exp C5", rb); end
    ipb(1'b1, 32'h1, 32'h0, r);
    checks++; if (!cs_n || sck) begin failures++; $display("bus not released"); end
    checks++; if (got.size() != 2 || got[0] != 8'h05 || got[1] != 8'hA3) begin failures++; $display("slave got %p", got); end
    checks++; if (rises != 16) begin failures++; $display("%0d rising edges", rises); end
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
