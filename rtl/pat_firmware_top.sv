// pat_firmware_top: read-out firmware of the PAT card.
//
// Data path (core clock clk): 56 FEC serial links, each decoded by a
// sampa_decoder into a 32-bit hit stream and held in its own L0 buffer. The
// FECs form N_GROUPS = 7 groups of FECS_PER_GROUP = 8; in each group an 8:1
// round-robin stage merges the L0 buffers into the group's L1 buffer, and a
// 7:1 round-robin stage merges the seven L1 buffers into the single L2
// buffer: 56 + 7 + 1 = 64 buffers. The packet formatter then puts a 32-bit
// header and the 64-bit DUNE timestamp in front of every hit, and the DAQ
// reads the resulting words through the IPbus data port, as many as it asks
// for.
//
// Control path: the IPbus master bus (from the IPbus UDP core, outside this
// module) is split by ipbus_fabric between ccm_regs (base 0x000) and the
// I2C/PMbus master (base 0x100) and the SPI master of the configuration
// flash (base 0x200). ccm_regs sets the FEC clocks, sync and
// trigger pulses made by clock_distribution (reference clock clk_ref), the
// round-robin enables/vetoes/resets, per-block logic resets, and reports the
// L0 and L1 fill levels, L0 drop counts, and the telemetry counters of the
// decoders, round-robin stages and formatter.
//
// Logic reset bits (ccm_regs 0x20+b): 0 decoders, 1 L0 buffers, 2 L1
// buffers, 3 L2 buffer, 4 packet formatter, 5 I2C master, 6 all round-robin
// stages, 7 SPI master. RR control registers: 0x18+g for group g's 8:1 stage, 0x18+7 for
// the 7:1 stage.
//
// Outside this module (ports): the LVDS receivers that deliver the FEC bits
// (fec_bit, fec_bit_valid), the DUNE timing endpoint (dune_ts), the IPbus
// UDP/Ethernet core (ipb_in/ipb_out), the Ethernet transceiver status and
// control (link_status/link_ctrl), the clock synthesiser that makes clk_ref,
// the I2C pads and the flash's SPI pins.
//
// From the paper: the block structure and counts (56 decoders and L0
// buffers, seven 8:1 round-robin stages with L1 buffers, one final stage, L2
// buffer, formatter, IPbus, clock distribution, external component I/O).
// Our own choices: buffer depths, address map, single core clock domain.
module pat_firmware_top
  import pat_pkg::*;
#(
  parameter int unsigned N_GROUPS       = 7,
  parameter int unsigned FECS_PER_GROUP = 8,
  parameter int unsigned L0_DEPTH       = 512,
  parameter int unsigned L1_DEPTH       = 1024,
  parameter int unsigned L2_DEPTH       = 2048,
  localparam int unsigned N_FEC         = N_GROUPS * FECS_PER_GROUP
)(
  input  logic                clk,
  input  logic                rst,
  input  logic                clk_ref,
  input  logic                rst_ref,
  // FEC serial links
  input  logic [N_FEC-1:0]    fec_bit_valid,
  input  logic [N_FEC-1:0]    fec_bit,
  // FEC clock, sync, trigger per group
  output logic [N_GROUPS-1:0] fec_clk,
  output logic [N_GROUPS-1:0] fec_sync,
  output logic [N_GROUPS-1:0] fec_trig,
  // DUNE timing system
  input  logic [63:0]         dune_ts,
  // IPbus
  input  ipb_wbus_t           ipb_in,
  output ipb_rbus_t           ipb_out,
  // serial link
  input  logic [15:0]         link_status,
  output logic [15:0]         link_ctrl,
  // I2C / PMbus
  output logic                scl_oe,
  output logic                sda_oe,
  input  logic                scl_i,
  input  logic                sda_i,
  // SPI configuration flash
  output logic                spi_sck,
  output logic                spi_mosi,
  output logic                spi_cs_n,
  input  logic                spi_miso,
  // status
  output logic [N_FEC-1:0]    fec_locked
);

  localparam int unsigned N_RR  = N_GROUPS + 1;
  localparam int unsigned N_RST = 8;
  localparam int unsigned L0_AW = $clog2(L0_DEPTH);
  localparam int unsigned L2_AW = $clog2(L2_DEPTH);

  // ---------------- control ----------------
  ipb_wbus_t slv_in  [3];
  ipb_rbus_t slv_out [3];

  clk_rate_t               clk_rate;
  logic [N_GROUPS-1:0]     clk_en, sync_tgl, trig_tgl;
  logic [N_RR-1:0]         rr_enable, rr_reset;
  logic [N_RR-1:0][7:0]    rr_veto;
  logic [N_RST-1:0]        blk_reset;
  logic [N_FEC-1:0][15:0]  l0_level16, l0_drops;
  logic [N_FEC-1:0][15:0]  dec_hits, dec_syncs;
  logic [N_RR-1:0][15:0]   rr_grants;
  logic [N_GROUPS-1:0][15:0] l1_level16;
  logic [15:0]             samples_sent;
  logic                    fmt_valid, fmt_ready;
  stream_word_t            fmt_word;
  logic [L2_AW:0]          l2_level;

  ipbus_fabric #(
    .N_SLV   (3),
    .SLV_BASE({32'h0000_0200, 32'h0000_0100, 32'h0000_0000}),
    .SLV_MASK({32'hFFFF_FF00, 32'hFFFF_FF00, 32'hFFFF_FF00})
  ) u_fabric (
    .ipb_in, .ipb_out, .slv_in, .slv_out
  );

  ccm_regs #(
    .N_GROUPS(N_GROUPS), .N_FEC(N_FEC), .N_RR(N_RR), .N_RST(N_RST), .LVL_W(L2_AW + 1)
  ) u_ccm (
    .clk, .rst,
    .ipb_in (slv_in[0]), .ipb_out(slv_out[0]),
    .clk_rate, .clk_en, .sync_tgl, .trig_tgl,
    .link_ctrl, .link_status,
    .rr_enable, .rr_reset, .rr_veto,
    .blk_reset,
    .l0_level(l0_level16), .l0_drops,
    .dec_hits, .dec_syncs, .rr_grants, .samples_sent, .l1_level(l1_level16),
    .l2_level,
    .data_valid(fmt_valid), .data_word(fmt_word.data), .data_ready(fmt_ready)
  );

  i2c_master u_i2c (
    .clk, .rst(rst || blk_reset[5]),
    .ipb_in(slv_in[1]), .ipb_out(slv_out[1]),
    .scl_oe, .sda_oe, .scl_i, .sda_i
  );

  spi_master u_spi (
    .clk, .rst(rst || blk_reset[7]),
    .ipb_in(slv_in[2]), .ipb_out(slv_out[2]),
    .sck(spi_sck), .mosi(spi_mosi), .cs_n(spi_cs_n), .miso(spi_miso)
  );

  clock_distribution #(.N_GROUPS(N_GROUPS)) u_clkdist (
    .clk_ref, .rst_ref,
    .rate(clk_rate), .clk_en, .sync_tgl, .trig_tgl,
    .fec_clk, .fec_sync, .fec_trig
  );

  // ---------------- data path ----------------
  logic                rst_dec, rst_l0, rst_l1, rst_l2, rst_fmt, rst_rr;
  always_ff @(posedge clk) begin
    rst_dec <= rst || blk_reset[0];
    rst_l0  <= rst || blk_reset[1];
    rst_l1  <= rst || blk_reset[2];
    rst_l2  <= rst || blk_reset[3];
    rst_fmt <= rst || blk_reset[4];
    rst_rr  <= rst || blk_reset[6];
  end

  logic         l1_in_valid  [N_GROUPS];
  stream_word_t l1_in_word   [N_GROUPS];
  logic         l1_in_ready  [N_GROUPS];
  logic [N_GROUPS-1:0] l1_valid, l1_ready;
  stream_word_t l1_word      [N_GROUPS];

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_group
    logic [FECS_PER_GROUP-1:0] l0_valid, l0_ready;
    stream_word_t              l0_word [FECS_PER_GROUP];
    logic [$clog2(L1_DEPTH):0] l1_lvl;

    for (genvar k = 0; k < FECS_PER_GROUP; k++) begin : g_fec
      localparam int unsigned F = g * FECS_PER_GROUP + k;
      logic         dec_valid;
      stream_word_t dec_word;
      logic [L0_AW:0] lvl;

      sampa_decoder u_dec (
        .clk, .rst(rst_dec),
        .fec_id(6'(F)),
        .bit_valid(fec_bit_valid[F]), .bit_in(fec_bit[F]),
        .out_valid(dec_valid), .out_word(dec_word),
        .locked(fec_locked[F]), .hit_count(dec_hits[F]), .sync_count(dec_syncs[F])
      );

      l0_buffer #(.DEPTH(L0_DEPTH)) u_l0 (
        .clk, .rst(rst_l0),
        .wr_valid(dec_valid), .wr_word(dec_word),
        .rd_valid(l0_valid[k]), .rd_word(l0_word[k]), .rd_ready(l0_ready[k]),
        .level(lvl), .drop_count(l0_drops[F])
      );
      assign l0_level16[F] = 16'(lvl);
    end

    rr_arbiter #(.N(FECS_PER_GROUP)) u_rr_l0 (
      .clk, .rst(rst_rr || rr_reset[g]),
      .enable(rr_enable[g]), .veto(rr_veto[g][FECS_PER_GROUP-1:0]),
      .in_valid(l0_valid), .in_word(l0_word), .in_ready(l0_ready),
      .out_valid(l1_in_valid[g]), .out_word(l1_in_word[g]), .out_ready(l1_in_ready[g]),
      .grant_count(rr_grants[g])
    );

    stream_fifo #(.DEPTH(L1_DEPTH)) u_l1 (
      .clk, .rst(rst_l1),
      .in_valid(l1_in_valid[g]), .in_word(l1_in_word[g]), .in_ready(l1_in_ready[g]),
      .out_valid(l1_valid[g]), .out_word(l1_word[g]), .out_ready(l1_ready[g]),
      .level(l1_lvl)
    );
    assign l1_level16[g] = 16'(l1_lvl);
  end

  logic         l2_in_valid, l2_in_ready;
  stream_word_t l2_in_word;
  logic         l2_valid, l2_ready;
  stream_word_t l2_word;

  rr_arbiter #(.N(N_GROUPS)) u_rr_l1 (
    .clk, .rst(rst_rr || rr_reset[N_GROUPS]),
    .enable(rr_enable[N_GROUPS]), .veto(rr_veto[N_GROUPS][N_GROUPS-1:0]),
    .in_valid(l1_valid), .in_word(l1_word), .in_ready(l1_ready),
    .out_valid(l2_in_valid), .out_word(l2_in_word), .out_ready(l2_in_ready),
    .grant_count(rr_grants[N_GROUPS])
  );

  stream_fifo #(.DEPTH(L2_DEPTH)) u_l2 (
    .clk, .rst(rst_l2),
    .in_valid(l2_in_valid), .in_word(l2_in_word), .in_ready(l2_in_ready),
    .out_valid(l2_valid), .out_word(l2_word), .out_ready(l2_ready),
    .level(l2_level)
  );

  packet_formatter u_fmt (
    .clk, .rst(rst_fmt),
    .dune_ts,
    .in_valid(l2_valid), .in_word(l2_word), .in_ready(l2_ready),
    .out_valid(fmt_valid), .out_word(fmt_word), .out_ready(fmt_ready),
    .sample_count(samples_sent)
  );

endmodule
