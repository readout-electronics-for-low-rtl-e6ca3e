// ccm_regs: control, configuration and monitoring registers (IPbus slave).
//
// Holds the firmware registers of the PAT card's IPbus register list and the
// data port through which the DAQ reads the hit stream. Word addresses
// (low 8 bits of the IPbus address):
//   0x00        RO  firmware id 0x5041_5401
//   0x01        RW  clock rate control [1:0]: 0 = 320, 1 = 160, 2 = 80 MHz
//   0x02        RW  serial link control [15:0]; reads {status[15:0], ctrl}
//   0x03        RO  data count: {formatter word waiting, 15'b0, L2 level}
//   0x04        RO  data port: each read returns and removes the next output
//                   word; 0 when none is waiting (0 is never a valid E0)
//   0x08+g      RW  clock control of FEC group g, bit 0 = clock enabled
//   0x10+g      WO  sync control of group g: bit 0 sends a sync, bit 1 a
//                   trigger to the group's FECs (reads 0)
//   0x18+r      RW  RR control of round-robin stage r: bit 0 enable,
//                   bit 1 reset (self-clearing), [15:8] veto mask
//   0x20+b      WO  logic reset of firmware block b: bit 0 resets it
//                   (self-clearing, one clock)
//   0x05        RO  telemetry: Ethernet samples sent by the formatter
//   0x28+r      RO  telemetry: hits passed by round-robin stage r
//   0x30+g      RO  memory content of group g's L1 buffer: words held
//   0x40+f      RO  memory content of FEC f: {drop count, L0 level}
//   0x80+f      RO  telemetry of FEC f's decoder: {sync packets, hits}
//   others      answered with err
// Sync and trigger requests leave as toggles (sync_tgl, trig_tgl) so that
// the clock distribution, in another clock domain, can take them safely.
//
// Interface: IPbus slave, ack or err one clock after strobe, strobe held by
// the master until then. Reset values: clocks enabled, 160 MHz rate, all
// round-robin stages enabled with no veto.
//
// From the paper: the register list (clock control and sync control per FEC
// group, clock rate per PAT, serial link control per link, memory content
// per FEC, RR control per RR block, logic reset per firmware block) and the
// "stream of a given number of words on request" read-out. Our own choices:
// addresses, bit layouts and reset values, and which counters feed the
// telemetry registers. The 8-bit word address limits N_FEC to 64 and
// N_GROUPS, N_RR and N_RST to 8.
module ccm_regs
  import pat_pkg::*;
#(
  parameter int unsigned N_GROUPS = 7,
  parameter int unsigned N_FEC    = 56,
  parameter int unsigned N_RR     = 8,
  parameter int unsigned N_RST    = 7,
  parameter int unsigned LVL_W    = 16
)(
  input  logic                   clk,
  input  logic                   rst,
  input  ipb_wbus_t              ipb_in,
  output ipb_rbus_t              ipb_out,
  // clock distribution
  output clk_rate_t              clk_rate,
  output logic [N_GROUPS-1:0]    clk_en,
  output logic [N_GROUPS-1:0]    sync_tgl,
  output logic [N_GROUPS-1:0]    trig_tgl,
  // serial link (Ethernet transceiver) control and status
  output logic [15:0]            link_ctrl,
  input  logic [15:0]            link_status,
  // round-robin stages
  output logic [N_RR-1:0]        rr_enable,
  output logic [N_RR-1:0]        rr_reset,
  output logic [N_RR-1:0][7:0]   rr_veto,
  // logic resets
  output logic [N_RST-1:0]       blk_reset,
  // memory content monitor
  input  logic [N_FEC-1:0][15:0] l0_level,
  input  logic [N_FEC-1:0][15:0] l0_drops,
  // telemetry counters (all wrap at 16 bits)
  input  logic [N_FEC-1:0][15:0] dec_hits,
  input  logic [N_FEC-1:0][15:0] dec_syncs,
  input  logic [N_RR-1:0][15:0]  rr_grants,
  input  logic [15:0]            samples_sent,
  input  logic [N_GROUPS-1:0][15:0] l1_level,
  // data port
  input  logic [LVL_W-1:0]       l2_level,
  input  logic                   data_valid,
  input  logic [31:0]            data_word,
  output logic                   data_ready
);

  localparam logic [31:0] FW_ID = 32'h5041_5401;

  logic [7:0] a;
  logic       access;
  assign a      = ipb_in.addr[7:0];
  assign access = ipb_in.strobe && !ipb_out.ack && !ipb_out.err;

  // read mux and decode
  logic [31:0] rd;
  logic        valid_addr;
  always_comb begin
    rd         = '0;
    valid_addr = 1'b1;
    if (a == 8'h00)      rd = FW_ID;
    else if (a == 8'h01) rd = {30'h0, clk_rate};
    else if (a == 8'h02) rd = {link_status, link_ctrl};
    else if (a == 8'h03) rd = {data_valid, 15'h0, 16'(l2_level)};
    else if (a == 8'h04) rd = data_valid ? data_word : 32'h0;
    else if (a == 8'h05) rd = {16'h0, samples_sent};
    else if (a >= 8'h08 && a < 8'h08 + 8'(N_GROUPS)) rd = {31'h0, clk_en[a - 8'h08]};
    else if (a >= 8'h10 && a < 8'h10 + 8'(N_GROUPS)) rd = '0;
    else if (a >= 8'h18 && a < 8'h18 + 8'(N_RR))
      rd = {16'h0, rr_veto[a - 8'h18], 6'h0, rr_reset[a - 8'h18], rr_enable[a - 8'h18]};
    else if (a >= 8'h20 && a < 8'h20 + 8'(N_RST)) rd = '0;
    else if (a >= 8'h28 && a < 8'h28 + 8'(N_RR)) rd = {16'h0, rr_grants[a - 8'h28]};
    else if (a >= 8'h30 && a < 8'h30 + 8'(N_GROUPS)) rd = {16'h0, l1_level[a - 8'h30]};
    else if (a >= 8'h40 && a < 8'h40 + 8'(N_FEC))
      rd = {l0_drops[a - 8'h40], l0_level[a - 8'h40]};
    else if (a >= 8'h80 && a < 8'h80 + 8'(N_FEC))
      rd = {dec_syncs[a - 8'h80], dec_hits[a - 8'h80]};
    else valid_addr = 1'b0;
  end

  assign data_ready = access && !ipb_in.write && (a == 8'h04) && data_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      ipb_out   <= '0;
      clk_rate  <= RATE_160;
      clk_en    <= '1;
      sync_tgl  <= '0;
      trig_tgl  <= '0;
      link_ctrl <= '0;
      rr_enable <= '1;
      rr_reset  <= '0;
      rr_veto   <= '0;
      blk_reset <= '0;
    end else begin
      ipb_out   <= '0;
      rr_reset  <= '0;
      blk_reset <= '0;
      if (access) begin
        ipb_out.ack   <= valid_addr;
        ipb_out.err   <= !valid_addr;
        ipb_out.rdata <= rd;
        if (ipb_in.write && valid_addr) begin
          if (a == 8'h01) clk_rate <= clk_rate_t'(ipb_in.wdata[1:0]);
          if (a == 8'h02) link_ctrl <= ipb_in.wdata[15:0];
          for (int unsigned g = 0; g < N_GROUPS; g++) begin
            if (a == 8'h08 + 8'(g)) clk_en[g] <= ipb_in.wdata[0];
            if (a == 8'h10 + 8'(g)) begin
              if (ipb_in.wdata[0]) sync_tgl[g] <= !sync_tgl[g];
              if (ipb_in.wdata[1]) trig_tgl[g] <= !trig_tgl[g];
            end
          end
          for (int unsigned r = 0; r < N_RR; r++) begin
            if (a == 8'h18 + 8'(r)) begin
              rr_enable[r] <= ipb_in.wdata[0];
              rr_reset[r]  <= ipb_in.wdata[1];
              rr_veto[r]   <= ipb_in.wdata[15:8];
            end
          end
          for (int unsigned b = 0; b < N_RST; b++)
            if (a == 8'h20 + 8'(b)) blk_reset[b] <= ipb_in.wdata[0];
        end
      end
    end
  end

endmodule
