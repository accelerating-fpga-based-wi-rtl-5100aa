// pilot_polarity: tracks the polarity P of the four pilots of each OFDM symbol
// (step "get polarity" of the equalizer).
//
// The pilots at k = -21, -7, 7, 21 carry BPSK values that change from symbol
// to symbol following a pseudo-random sequence, so the equalizer must know
// their sign before it can use them. The sign is the product of
//   * p[n], the 127-long pilot polarity sequence of IEEE 802.11: the output of
//     the x^7 + x^4 + 1 scrambler started from all ones, 0 -> +1, 1 -> -1.
//     It is held as a 127-bit constant built at elaboration by running that
//     scrambler, and addressed by the 7-bit counter pol_nr.
//   * the per-pilot base pattern. Legacy symbols use {+1,+1,+1,-1} for
//     k = -21,-7,7,21. HT (single stream) symbols use the same pattern
//     rotated by the HT symbol number: pilot m takes psi[(n + m) mod 4].
//
// Interface: `start` loads pol_nr from pol_start and clears the HT symbol
// count; `ht` selects the pattern; `advance` steps to the next symbol
// (pol_nr wraps 126 -> 0). cur_neg[m] is 1 when pilot m of the current
// symbol is -1; pol_nr shows the current index. Timing: cur_neg is a
// combinational function of registered state, valid from the cycle after
// start/advance. Sequence and patterns follow the 802.11 standard; the paper
// only names the step and its pol_nr counter.
module pilot_polarity
  import wifi_rx_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [6:0]       pol_start,
  input  logic             ht,
  input  logic             advance,
  output logic [N_PILOT-1:0] cur_neg,
  output logic [6:0]       pol_nr
);

  function automatic logic [126:0] make_seq();
    logic [126:0] sq;
    logic [6:0]   st;  // st[6] = x^7 tap, st[3] = x^4 tap
    logic         b;
    st = 7'h7f;
    for (int n = 0; n < 127; n++) begin
      b     = st[6] ^ st[3];
      sq[n] = b;
      st    = {st[5:0], b};
    end
    return sq;
  endfunction

  localparam logic [126:0] PSEQ = make_seq();
  localparam logic [3:0]   BASE_NEG = 4'b1000;  // pilot 3 (k = 21) is -1

  logic [1:0] ht_n;  // HT symbol number mod 4

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pol_nr <= '0;
      ht_n   <= '0;
    end else if (start) begin
      pol_nr <= pol_start;
      ht_n   <= '0;
    end else if (advance) begin
      pol_nr <= (pol_nr == 7'd126) ? 7'd0 : pol_nr + 7'd1;
      ht_n   <= ht_n + 2'd1;
    end
  end

  always_comb begin
    for (int m = 0; m < int'(N_PILOT); m++) begin
      if (ht) cur_neg[m] = BASE_NEG[2'(ht_n + 2'(m))] ^ PSEQ[pol_nr];
      else    cur_neg[m] = BASE_NEG[m] ^ PSEQ[pol_nr];
    end
  end

endmodule
