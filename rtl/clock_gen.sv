// clock_gen: behavioural model of the on-chip clock generator, a ring
// oscillator of configurable length, together with the selection between
// the internal and the external clock. This is a behavioural model, not
// synthesizable logic: the oscillator is an analog-timing circuit made of a
// chain of inverting stages, modelled here with delays.
//
// When clk_int_en is high the ring runs with a half period of
// (2*len_sel + 3) stage delays (an odd number of stages, selectable from 3
// to 17); when it is low the ring output is held low. The chip clock is the
// combination of the external clock and the ring output, so it follows the
// external clock while the ring is disabled (and the external clock must be
// held low while the ring is enabled).
//
// Follows the chip: internal configurable-length ring oscillator, external
// clock input, internal-clock enable. Own choices: the length encoding, the
// stage delay and the OR-combination of the two sources.
module clock_gen #(
  parameter realtime STAGE_DELAY = 0.1ns
) (
  input  logic       clk_ext,
  input  logic       clk_int_en,
  input  logic [2:0] len_sel,
  output logic       clk
);

  logic ring;

  initial ring = 1'b0;

  always begin
    if (clk_int_en) begin
      #((2 * len_sel + 3) * STAGE_DELAY) ring = ~ring;
    end else begin
      ring = 1'b0;
      @(posedge clk_int_en);
    end
  end

  assign clk = clk_ext | ring;

endmodule
