// spi_master: IPbus-controlled SPI master for the configuration flash.
//
// The PAT card's firmware flash is reached over SPI for remote firmware
// programming. Software runs the flash protocol itself, one byte at a time,
// through three registers (word addresses, low 2 bits of the IPbus address):
//   0  RW  prescale [15:0]: clocks per half SCK period
//   1  RW  chip select [0]: 1 drives cs_n low (held across bytes, so
//          software frames multi-byte flash commands)
//   2  W   byte to send [7:0], starts a transfer; read: {busy[8],
//          byte received in the last transfer [7:0]}
// The transfer is SPI mode 0: SCK idles low, MOSI changes on the falling
// edge (the first bit before the first rising edge), MISO is sampled on the
// rising edge, most significant bit first. A byte takes 16 x (prescale + 1)
// clocks. A write to register 2 while busy is ignored.
//
// Interface: IPbus slave acking one clock after strobe; sck, mosi, cs_n
// outputs and miso input, all from flip-flops.
//
// From the paper: an SPI link to the flash used for remote firmware
// programming. Everything inside is our own, simplest choice.
module spi_master
  import pat_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output logic      sck,
  output logic      mosi,
  output logic      cs_n,
  input  logic      miso
);

  logic [15:0] prescale, cnt;
  logic        busy;
  logic [7:0]  tx, rx;
  logic [3:0]  edges;      // SCK edges still to make (16 per byte)

  logic access;
  assign access = ipb_in.strobe && !ipb_out.ack && !ipb_out.err;

  always_ff @(posedge clk) begin
    if (rst) begin
      ipb_out  <= '0;
      prescale <= 16'd4;
      cs_n     <= 1'b1;
      busy     <= 1'b0;
      tx       <= '0;
      rx       <= '0;
      cnt      <= '0;
      edges    <= '0;
      sck      <= 1'b0;
      mosi     <= 1'b0;
    end else begin
      ipb_out <= '0;
      if (access) begin
        ipb_out.ack <= (ipb_in.addr[1:0] != 2'd3);
        ipb_out.err <= (ipb_in.addr[1:0] == 2'd3);
        unique case (ipb_in.addr[1:0])
          2'd0:    ipb_out.rdata <= {16'h0, prescale};
          2'd1:    ipb_out.rdata <= {31'h0, !cs_n};
          2'd2:    ipb_out.rdata <= {23'h0, busy, rx};
          default: ipb_out.rdata <= '0;
        endcase
        if (ipb_in.write) begin
          if (ipb_in.addr[1:0] == 2'd0) prescale <= ipb_in.wdata[15:0];
          if (ipb_in.addr[1:0] == 2'd1) cs_n     <= !ipb_in.wdata[0];
          if (ipb_in.addr[1:0] == 2'd2 && !busy) begin
            busy  <= 1'b1;
            tx    <= {ipb_in.wdata[6:0], 1'b0};
            mosi  <= ipb_in.wdata[7];
            cnt   <= '0;
            edges <= 4'd15;
          end
        end
      end
      if (busy) begin
        if (cnt != prescale) begin
          cnt <= cnt + 16'd1;
        end else begin
          cnt <= '0;
          sck <= !sck;
          if (!sck) begin
            rx <= {rx[6:0], miso};           // rising edge: sample
          end else begin
            mosi <= tx[7];                   // falling edge: next bit
            tx   <= {tx[6:0], 1'b0};
          end
          if (edges == 4'd0) busy <= 1'b0;
          else               edges <= edges - 4'd1;
        end
      end
    end
  end

endmodule
