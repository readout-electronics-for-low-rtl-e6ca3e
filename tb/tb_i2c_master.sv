// tb_i2c_master: self-checking test of the I2C / PMbus master.
//
// A behavioural I2C slave at address 0x50 (open-drain bus, sampled on the
// system clock) acks its address and written bytes, returns 0x96 on reads
// and stretches the clock for 20 cycles after every falling SCL edge of the
// second transfer. Software-style IPbus accesses then do: write 0x3C to the
// slave, repeated-start read with NACK and STOP, and an address nobody
// acks. Checks: received byte, ACK status bits, the byte the slave saw,
// START/STOP counts and the SCL period (4 x (prescale + 1) clocks).
module tb_i2c_master;
  import pat_pkg::*;

  logic clk = 0, rst = 1;
  ipb_wbus_t ipb_in = '0;
  ipb_rbus_t ipb_out;
  logic scl_oe, sda_oe;
  logic slv_scl_low = 0, slv_sda_low = 0;
  wire  scl = !scl_oe && !slv_scl_low;
  wire  sda = !sda_oe && !slv_sda_low;

  int checks = 0, failures = 0;

  i2c_master dut (.clk, .rst, .ipb_in, .ipb_out, .scl_oe, .sda_oe, .scl_i(scl), .sda_i(sda));

  always #5 clk = ~clk;

  // ---------------- slave model ----------------
  typedef enum {SL_IDLE, SL_ADDR, SL_WDATA, SL_RDATA} sl_t;
  sl_t sl = SL_IDLE;
  logic prev_scl = 1, prev_sda = 1;
  int bitcnt = 0, starts = 0, stops = 0, stretch = 0;
  bit stretch_on = 0, match = 0;
  logic [7:0] shift = 0, written = 0, rdata = 8'h96;
  longint last_rise = 0, period = 0;
  longint cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (stretch > 0) begin stretch--; if (stretch == 0) slv_scl_low <= 0; end
    if (rst) ;
    else if (prev_sda && !sda && scl && prev_scl) begin starts++; sl = SL_ADDR; bitcnt = -1; shift = 0; end
    else if (!prev_sda && sda && scl && prev_scl) begin stops++; sl = SL_IDLE; slv_sda_low <= 0; end
    else if (!prev_scl && scl) begin
      period = cyc - last_rise; last_rise = cyc;
      if ((sl == SL_ADDR || sl == SL_WDATA) && bitcnt < 8) shift = {shift[6:0], sda};
    end else if (prev_scl && !scl && sl != SL_IDLE) begin
      bitcnt++;
      if (stretch_on) begin slv_scl_low <= 1; stretch = 20; end
      if (bitcnt == 8) begin
        if (sl == SL_ADDR) begin match = (shift[7:1] == 7'h50); slv_sda_low <= match; end
        else if (sl == SL_WDATA) begin written = shift; slv_sda_low <= 1; end
        else slv_sda_low <= 0;
      end else if (bitcnt == 9) begin
        bitcnt = 0;
        if (sl == SL_ADDR) sl = !match ? SL_IDLE : (shift[0] ? SL_RDATA : SL_WDATA);
        else if (sl == SL_RDATA) sl = SL_IDLE;
        shift = 0;
        slv_sda_low <= (sl == SL_RDATA) ? !rdata[7] : 1'b0;
      end else if (sl == SL_RDATA && bitcnt < 8) begin
        slv_sda_low <= !rdata[7 - bitcnt];
      end
    end
    prev_scl = scl; prev_sda = sda;
  end

  // ---------------- IPbus master ----------------
  task automatic ipb(input logic w, input logic [31:0] addr, input logic [31:0] d,
                     output logic [31:0] r);
    @(negedge clk);
    ipb_in = '{addr: addr, wdata: d, strobe: 1'b1, write: w};
    @(negedge clk);
    while (!ipb_out.ack && !ipb_out.err) @(negedge clk);
    r = ipb_out.rdata;
    ipb_in.strobe = 0;
  endtask

  task automatic cmd(input logic [12:0] c, output logic [31:0] status);
    logic [31:0] r;
    ipb(1'b1, 32'h1, {19'h0, c}, r);
    do ipb(1'b0, 32'h2, 32'h0, status); while (status[0]);
  endtask

  localparam logic [12:0] START = 13'h100, STOP = 13'h200, READ = 13'h400,
                          WRITE = 13'h800, NACK = 13'h1000;

  initial begin
    logic [31:0] st, r;
    repeat (3) @(negedge clk);
    rst = 0;
    ipb(1'b1, 32'h0, 32'd4, r);
    ipb(1'b0, 32'h0, 32'd0, r);
    checks++; if (r != 32'd4) begin failures++; $display("prescale %0d", r); end
    checks++; if (!scl || !sda) begin failures++; $display("bus not idle"); end
    // address + write byte
    cmd(START | WRITE | 13'hA0, st);
    checks++; if (st[1] != 0) begin failures++; $display("address not acked"); end
    checks++; if (period != 20) begin failures++; $display("SCL period %0d, expected 20", period); end
    stretch_on = 1;
    cmd(WRITE | 13'h3C, st);
    stretch_on = 0;
    checks++; if (st[1] != 0 || written != 8'h3C) begin failures++; $display("write: ack %0d slave saw %h", st[1], written); end
    // repeated start, read one byte, NACK, STOP
    cmd(START | WRITE | 13'hA1, st);
    checks++; if (st[1] != 0) begin failures++; $display("read address not acked"); end
    cmd(READ | NACK | STOP, st);
    checks++; if (st[15:8] != 8'h96) begin failures++; $display("read %h, expected 96", st[15:8]); end
    // nobody at 0x58
    cmd(START | WRITE | STOP | 13'hB0, st);
    checks++; if (st[1] != 1) begin failures++; $display("missing NACK for absent slave"); end
    repeat (20) @(negedge clk);
    checks++; if (starts != 3 || stops != 2) begin failures++; $display("starts %0d stops %0d", starts, stops); end
    checks++; if (!scl || !sda) begin failures++; $display("bus not released"); end
    // unmapped register
    @(negedge clk); ipb_in = '{addr: 32'h3, wdata: 0, strobe: 1, write: 0};
    @(negedge clk);
    checks++; if (!ipb_out.err) begin failures++; $display("no err for register 3"); end
    ipb_in.strobe = 0;
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
