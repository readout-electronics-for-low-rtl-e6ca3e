// i2c_master: IPbus-controlled I2C / PMbus master for slow control.
//
// The PAT card reaches most of its external parts over I2C (SAMPA
// configuration via the FEC multiplexers, SFP modules, clock synthesiser,
// EEPROM, I2C switches, port expanders that switch FEC power) and the FEC
// DC/DC converter over PMbus, which runs on the same two wires. Software
// drives this master one byte at a time through three registers (word
// addresses, low 2 bits of the IPbus address):
//   0  RW  prescale [15:0]: clocks per quarter SCL period
//   1  WO  command: [7:0] byte to send, [8] START (or repeated start)
//          first, [9] STOP after, [10] READ a byte, [11] WRITE the byte,
//          [12] on READ, send NACK instead of ACK (last byte of a read)
//   2  RO  status: [0] busy, [1] ACK bit received after WRITE (0 = acked),
//          [15:8] byte received by READ
// A command written while busy is ignored. Each bus bit takes four quarter
// periods; SDA changes in the first quarter (SCL low) and is sampled at the
// end of the third (SCL high). The master waits while a slave holds SCL low
// (clock stretching). There is one bus master, so no arbitration.
//
// Interface: open-drain pads as drive-low enables (scl_oe, sda_oe) with the
// pad levels read back on scl_i, sda_i; IPbus slave acking one clock after
// strobe.
//
// From the paper: an "I2C master register" through which software reaches
// I2C and PMbus devices. Everything inside is our own, simplest choice.
module i2c_master
  import pat_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output logic      scl_oe,
  output logic      sda_oe,
  input  logic      scl_i,
  input  logic      sda_i
);

  typedef enum logic [2:0] {P_IDLE, P_START, P_BIT, P_STOP} phase_t;

  logic [15:0] prescale;
  logic        busy;
  logic        rx_ack;
  logic [7:0]  rx_byte;
  logic [7:0]  tx_byte;
  logic        c_stop, c_read, c_write, c_nack;

  phase_t      phase;
  logic [1:0]  quarter;
  logic [15:0] qcnt;
  logic [3:0]  bitn;          // 0..7 data bits (MSB first), 8 = ACK bit
  logic        scl_lvl, sda_lvl;

  assign scl_oe = !scl_lvl;
  assign sda_oe = !sda_lvl;

  logic access;
  assign access = ipb_in.strobe && !ipb_out.ack && !ipb_out.err;

  // level SDA should have during the current data/ack bit
  logic bit_out;
  always_comb begin
    if (bitn == 4'd8) bit_out = c_write ? 1'b1 : c_nack;  // release for ACK on write
    else              bit_out = c_write ? tx_byte[3'd7 - bitn[2:0]] : 1'b1;
  end

  // quarter period timing; SCL high quarters wait for the line to rise
  logic qdone;
  assign qdone = (qcnt >= prescale) && !(scl_lvl && !scl_i);

  always_ff @(posedge clk) begin
    if (rst) begin
      ipb_out  <= '0;
      prescale <= 16'd100;
      busy     <= 1'b0;
      rx_ack   <= 1'b1;
      rx_byte  <= '0;
      tx_byte  <= '0;
      {c_stop, c_read, c_write, c_nack} <= '0;
      phase    <= P_IDLE;
      quarter  <= '0;
      qcnt     <= '0;
      bitn     <= '0;
      scl_lvl  <= 1'b1;
      sda_lvl  <= 1'b1;
    end else begin
      // ---------------- IPbus side ----------------
      ipb_out <= '0;
      if (access) begin
        ipb_out.ack <= (ipb_in.addr[1:0] != 2'd3);
        ipb_out.err <= (ipb_in.addr[1:0] == 2'd3);
        unique case (ipb_in.addr[1:0])
          2'd0:    ipb_out.rdata <= {16'h0, prescale};
          2'd2:    ipb_out.rdata <= {16'h0, rx_byte, 6'h0, rx_ack, busy};
          default: ipb_out.rdata <= '0;
        endcase
        if (ipb_in.write && ipb_in.addr[1:0] == 2'd0) prescale <= ipb_in.wdata[15:0];
        if (ipb_in.write && ipb_in.addr[1:0] == 2'd1 && !busy) begin
          tx_byte <= ipb_in.wdata[7:0];
          c_stop  <= ipb_in.wdata[9];
          c_read  <= ipb_in.wdata[10];
          c_write <= ipb_in.wdata[11];
          c_nack  <= ipb_in.wdata[12];
          if (|ipb_in.wdata[11:8]) begin
            busy    <= 1'b1;
            quarter <= '0;
            qcnt    <= '0;
            bitn    <= '0;
            if (ipb_in.wdata[8])                        phase <= P_START;
            else if (ipb_in.wdata[10] || ipb_in.wdata[11]) phase <= P_BIT;
            else                                        phase <= P_STOP;
          end
        end
      end

      // ---------------- bus side ----------------
      if (phase != P_IDLE) begin
        // levels for this quarter
        unique case (phase)
          P_START: begin
            scl_lvl <= (quarter == 2'd1) || (quarter == 2'd2);
            sda_lvl <= (quarter <= 2'd1);
          end
          P_BIT: begin
            scl_lvl <= (quarter == 2'd1) || (quarter == 2'd2);
            sda_lvl <= bit_out;
          end
          P_STOP: begin
            scl_lvl <= (quarter != 2'd0);
            sda_lvl <= (quarter >= 2'd2);
          end
          default: ;
        endcase
        if (!qdone) begin
          qcnt <= qcnt + 16'd1;
        end else begin
          qcnt    <= '0;
          quarter <= quarter + 2'd1;
          if (phase == P_BIT && quarter == 2'd2) begin
            if (bitn == 4'd8) begin
              if (c_write) rx_ack <= sda_i;
            end else if (c_read) begin
              rx_byte <= {rx_byte[6:0], sda_i};
            end
          end
          if (quarter == 2'd3) begin
            unique case (phase)
              P_START: begin
                if (c_read || c_write) phase <= P_BIT;
                else if (c_stop)       phase <= P_STOP;
                else begin phase <= P_IDLE; busy <= 1'b0; end
              end
              P_BIT: begin
                if (bitn == 4'd8) begin
                  bitn <= '0;
                  if (c_stop) phase <= P_STOP;
                  else begin phase <= P_IDLE; busy <= 1'b0; end
                end else begin
                  bitn <= bitn + 4'd1;
                end
              end
              default: begin phase <= P_IDLE; busy <= 1'b0; end
            endcase
          end
        end
      end
    end
  end

endmodule
