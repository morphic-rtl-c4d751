// ulfsr: 9-unfolded 17-bit Galois LFSR, characteristic polynomial
// x^17 + x^3 + 1, producing a 9-bit pseudo-random word every enabled cycle.
//
// The serial Galois LFSR has stages s1..s17; each step shifts s(k) into
// s(k+1), feeds s17 back into s1, and injects s17 into the input of s4
// through an XOR (the x^3 tap), with output y = s17. Unfolding by 9 computes
// nine successive steps in one clock: the loop below is the unfolded
// network, so the same XOR appears nine times and the state advances by nine
// serial steps per enabled clock. Output bit m of rnd is the serial output
// y(9k+m) of the k-th enabled clock, read from the current state before it
// advances, so rnd is a registered output.
//
// Interface: en (do_update) advances the state; rnd is valid every cycle.
// The polynomial, the 17-bit depth and the unfolding factor of 9 follow the
// chip; the nonzero reset seed (SEED) and the bit order of rnd are this
// design's choices. The serial period 2^17-1 shares no factor with 9, so
// the sequence of 9-bit words also repeats only every 2^17-1 enabled clocks.
module ulfsr #(
  parameter int unsigned       DEPTH  = 17,
  parameter int unsigned       UNFOLD = 9,
  parameter logic [DEPTH-1:0]  SEED   = 17'h1ACE1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  output logic [UNFOLD-1:0] rnd
);

  // s[0] is stage 1 ... s[DEPTH-1] is stage 17.
  logic [DEPTH-1:0] s_q, s_nxt;

  always_comb begin
    logic [DEPTH-1:0] t;
    t = s_q;
    for (int m = 0; m < UNFOLD; m++) begin
      rnd[m] = t[DEPTH-1];
      t = {t[DEPTH-2:0], t[DEPTH-1]} ^ ({{(DEPTH-1){1'b0}}, t[DEPTH-1]} << 3);
    end
    s_nxt = t;
  end

  always_ff @(posedge clk) begin
    if (rst)     s_q <= SEED;
    else if (en) s_q <= s_nxt;
  end

endmodule
