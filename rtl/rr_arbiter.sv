// rr_arbiter: round-robin stage that merges N hit streams into one.
//
// Each input is a buffered stream of whole hits. When idle, the arbiter
// grants the first input, counting on from the one after the last grant,
// that has a word ready and is not vetoed; the grant then stays on that
// input until the hit's last word has passed, so hits are never interleaved.
// The first word goes out in the same cycle as the grant (no idle cycle
// between hits). The output is a combinational multiplexer of the granted
// input.
//
// Control, one "RR control" IPbus register per stage: enable (when low no
// new hit is started; a hit in flight is finished), veto (one bit per input;
// a vetoed input is skipped, e.g. a switched-off FEC) and reset (a clock of
// rst clears the grant state). grant_count counts hits passed.
//
// From the paper: round-robin aggregation in two levels (8:1 per FEC group
// and 7:1 across groups in the text's count) with enable, veto and reset.
// Our own choices: hit-granular grants and the meaning of veto as a mask.
module rr_arbiter
  import pat_pkg::*;
#(
  parameter int unsigned N  = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
)(
  input  logic                clk,
  input  logic                rst,
  input  logic                enable,
  input  logic [N-1:0]        veto,
  input  logic [N-1:0]        in_valid,
  input  stream_word_t        in_word [N],
  output logic [N-1:0]        in_ready,
  output logic                out_valid,
  output stream_word_t        out_word,
  input  logic                out_ready,
  output logic [15:0]         grant_count
);

  logic          busy;
  logic [IW-1:0] cur, last_grant, pick, sel;
  logic          found;

  // next requester after last_grant, wrapping round
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_grant) + k) % N;
      if (!found && in_valid[idx] && !veto[idx]) begin
        found = 1'b1;
        pick  = IW'(idx);
      end
    end
  end

  logic active;
  assign active = busy || (enable && found);
  assign sel    = busy ? cur : pick;

  always_comb begin
    out_valid = active && in_valid[sel];
    out_word  = in_word[sel];
    in_ready  = '0;
    if (active) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy        <= 1'b0;
      cur         <= '0;
      last_grant  <= IW'(N - 1);
      grant_count <= '0;
    end else if (out_valid && out_ready) begin
      if (out_word.last) begin
        busy        <= 1'b0;
        last_grant  <= sel;
        grant_count <= grant_count + 16'd1;
      end else begin
        busy <= 1'b1;
        cur  <= sel;
      end
    end
  end

endmodule
