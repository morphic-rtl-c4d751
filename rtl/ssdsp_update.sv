// ssdsp_update: stochastic spike-dependent synaptic plasticity (S-SDSP)
// update of one binary synapse per clock.
//
// A binary weight w_b may only move toward the opposite value. When w_b is 0
// it is set to 1 with probability q+ if the post-synaptic "up" condition
// holds; when w_b is 1 it is cleared with probability q- if the "down"
// condition holds. The random draw zeta is (rnd <= q), where rnd is a 9-bit
// word from the 9-unfolded LFSR and q is q- when w_b is 1 and q+ when w_b is
// 0. The probability of a transition is therefore (q+1)/512.
//
// Interface: up/down come from the S-SDSP up/down registers of the
// post-synaptic neuron, q_plus/q_minus from the parameter bank (already
// selected by the event's distance), w_b is the current weight; w_next is
// combinational. do_update advances the LFSR, so each evaluated synapse
// consumes one fresh 9-bit word.
//
// Follows the chip: the LFSR, the "rnd <= param_q" comparator, the q mux
// selected by w_b and the update rule. The gates that merge zeta with
// up/down are written here straight from the update rule.
module ssdsp_update
  import morphic_pkg::*;
(
  input  logic           clk,
  input  logic           rst,
  input  logic           do_update,
  input  logic           up,
  input  logic           down,
  input  logic [Q_W-1:0] q_plus,
  input  logic [Q_W-1:0] q_minus,
  input  logic           w_b,
  output logic           w_next,
  output logic           zeta
);

  logic [Q_W-1:0] rnd, q_sel;

  ulfsr #(.DEPTH(17), .UNFOLD(Q_W)) u_lfsr (
    .clk (clk),
    .rst (rst),
    .en  (do_update),
    .rnd (rnd)
  );

  assign q_sel  = w_b ? q_minus : q_plus;
  assign zeta   = (rnd <= q_sel);
  assign w_next = w_b ? ~(down & zeta) : (up & zeta);

endmodule
