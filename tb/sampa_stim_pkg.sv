// sampa_stim_pkg: stimulus and reference model for testbenches of the PAT
// read-out firmware.
//
// Builds the serial bit stream a pair of daisy-chained SAMPA chips would
// send (50-bit header, then N 10-bit words, bit 0 first) and, independently
// of the RTL, the 32-bit hit words the decoder should produce for it:
// D0 = {fec, chip, channel, N, type, 4'b0}, D1 = {12'b0, bx}, then the
// samples packed three to a word, low sample in the low bits.
package sampa_stim_pkg;

  localparam logic [49:0] SYNC_HDR = 50'h1555540F00113;

  function automatic logic [49:0] make_hdr(input logic [2:0] ptype,
                                           input logic [9:0] nwords,
                                           input logic [4:0] ch,
                                           input logic [3:0] chip,
                                           input logic [19:0] bx);
    logic [49:0] h;
    h = '0;
    h[9:7]   = ptype;
    h[19:10] = nwords;
    h[24:20] = ch;
    h[28:25] = chip;
    h[48:29] = bx;
    h[5:0]   = 6'h15;   // arbitrary Hamming bits: the decoder ignores them
    return h;
  endfunction

  function automatic void push_bits(ref bit q[$], input logic [49:0] v, input int n);
    for (int i = 0; i < n; i++) q.push_back(v[i]);
  endfunction

  // one packet onto the wire
  function automatic void push_packet(ref bit q[$], input logic [49:0] hdr,
                                      input logic [9:0] s[$]);
    push_bits(q, hdr, 50);
    foreach (s[i]) push_bits(q, 50'(s[i]), 10);
  endfunction

  // the words the decoder must produce for a data packet
  function automatic void expect_hit(ref logic [32:0] e[$], input logic [5:0] fec,
                                     input logic [49:0] hdr, input logic [9:0] s[$]);
    logic [31:0] w;
    int n;
    n = s.size();
    e.push_back({1'b0, fec, hdr[28:25], hdr[24:20], hdr[19:10], hdr[9:7], 4'h0});
    e.push_back({1'b0, 12'h0, hdr[48:29]});
    for (int i = 0; i < n; i += 3) begin
      w = '0;
      w[9:0] = s[i];
      if (i + 1 < n) w[19:10] = s[i+1];
      if (i + 2 < n) w[29:20] = s[i+2];
      e.push_back({(i + 3 >= n), w});
    end
  endfunction

endpackage
