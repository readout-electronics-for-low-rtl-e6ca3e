// clock_distribution: FEC clocks, sync and trigger pulses for seven groups.
//
// The 56 FECs of a PAT card are wired in seven groups of eight; each group
// gets one clock and one sync line from the FPGA, fanned out in phase to its
// eight FECs on the board. This block makes those lines from a fast reference
// clock clk_ref (640 MHz): a free-running 3-bit counter divides it to
// 320, 160 or 80 MHz, chosen by the clock rate register. Rate changes and
// per-group clock enables take effect only when the counter is zero, where
// every divided clock is low, so no group ever sees a short pulse. All
// outputs come straight from flip-flops.
//
// A sync (or trigger) request for a group arrives from the IPbus registers,
// in the core clock domain, as a toggle; it is taken through a two-flop
// synchroniser, and the edge sets a pending flag. At the next start of a
// FEC clock period the group's sync (trigger) line goes high for exactly one
// FEC clock period, so it is seen by one rising edge of the FEC clock.
//
// Interface: rate and enables are quasi-static levels from another clock
// domain and pass through two-flop synchronisers. Latency from a toggle to
// the pulse: two to three clk_ref cycles plus up to one FEC clock period.
//
// From the paper: seven groups sharing one clock/sync signal each, clock
// enable and sync per group, 320/160/80 MHz selection. Our own choices: a
// 640 MHz reference divided in the fabric (the paper uses internal clock
// multiplexers), the pulse width and the toggle hand-over.
module clock_distribution
  import pat_pkg::*;
#(
  parameter int unsigned N_GROUPS = 7
)(
  input  logic                clk_ref,
  input  logic                rst_ref,
  input  clk_rate_t           rate,
  input  logic [N_GROUPS-1:0] clk_en,
  input  logic [N_GROUPS-1:0] sync_tgl,
  input  logic [N_GROUPS-1:0] trig_tgl,
  output logic [N_GROUPS-1:0] fec_clk,
  output logic [N_GROUPS-1:0] fec_sync,
  output logic [N_GROUPS-1:0] fec_trig
);

  // synchronisers
  logic [1:0]          rate_s1, rate_s2;
  logic [N_GROUPS-1:0] en_s1, en_s2;
  logic [N_GROUPS-1:0] sy_s1, sy_s2, sy_s3;
  logic [N_GROUPS-1:0] tr_s1, tr_s2, tr_s3;

  logic [2:0]          cnt;
  clk_rate_t           rate_q;
  logic [N_GROUPS-1:0] en_q;
  logic [N_GROUPS-1:0] sync_pend, trig_pend;
  logic [N_GROUPS-1:0][2:0] sync_left, trig_left;

  logic div_clk;
  logic period_start;
  logic [2:0] period_m1;
  always_comb begin
    unique case (rate_q)
      RATE_320: begin div_clk = cnt[0]; period_start = (cnt[0]   == 1'b0); period_m1 = 3'd1; end
      RATE_160: begin div_clk = cnt[1]; period_start = (cnt[1:0] == 2'b0); period_m1 = 3'd3; end
      default:  begin div_clk = cnt[2]; period_start = (cnt      == 3'b0); period_m1 = 3'd7; end
    endcase
  end

  always_ff @(posedge clk_ref) begin
    if (rst_ref) begin
      rate_s1 <= '0; rate_s2 <= '0;
      en_s1   <= '0; en_s2   <= '0;
      sy_s1   <= '0; sy_s2   <= '0; sy_s3 <= '0;
      tr_s1   <= '0; tr_s2   <= '0; tr_s3 <= '0;
      cnt       <= '0;
      rate_q    <= RATE_160;
      en_q      <= '0;
      sync_pend <= '0;
      trig_pend <= '0;
      sync_left <= '0;
      trig_left <= '0;
      fec_clk   <= '0;
      fec_sync  <= '0;
      fec_trig  <= '0;
    end else begin
      rate_s1 <= rate;     rate_s2 <= rate_s1;
      en_s1   <= clk_en;   en_s2   <= en_s1;
      sy_s1   <= sync_tgl; sy_s2   <= sy_s1; sy_s3 <= sy_s2;
      tr_s1   <= trig_tgl; tr_s2   <= tr_s1; tr_s3 <= tr_s2;

      cnt <= cnt + 3'd1;
      if (cnt == 3'd7) begin
        // next cycle the counter is zero: all divided clocks are low
        rate_q <= (rate_s2 == 2'd3) ? RATE_80 : clk_rate_t'(rate_s2);
        en_q   <= en_s2;
      end

      for (int unsigned g = 0; g < N_GROUPS; g++) begin
        fec_clk[g] <= en_q[g] && div_clk;

        if (sy_s2[g] != sy_s3[g]) sync_pend[g] <= 1'b1;
        if (tr_s2[g] != tr_s3[g]) trig_pend[g] <= 1'b1;

        if (sync_left[g] != 3'd0) begin
          sync_left[g] <= sync_left[g] - 3'd1;
        end else if (sync_pend[g] && period_start) begin
          fec_sync[g]  <= 1'b1;
          sync_left[g] <= period_m1;
          sync_pend[g] <= 1'b0;
        end else begin
          fec_sync[g]  <= 1'b0;
        end

        if (trig_left[g] != 3'd0) begin
          trig_left[g] <= trig_left[g] - 3'd1;
        end else if (trig_pend[g] && period_start) begin
          fec_trig[g]  <= 1'b1;
          trig_left[g] <= period_m1;
          trig_pend[g] <= 1'b0;
        end else begin
          fec_trig[g]  <= 1'b0;
        end
      end
    end
  end

endmodule
