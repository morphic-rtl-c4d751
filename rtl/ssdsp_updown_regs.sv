// ssdsp_updown_regs: the S-SDSP up/down registers of a core.
//
// For each of the N neurons this block holds the two S-SDSP update
// conditions evaluated on the neuron's latest state:
//   up   = Vmem >= theta_m  and  theta_1 <= Ca < theta_3
//   down = Vmem <  theta_m  and  theta_1 <= Ca < theta_2
// Whenever the controller writes a neuron word back (after an update or a
// configuration write) it presents the new state and S-SDSP parameters on
// the write port and the conditions are stored. During a crossbar event the
// stored conditions of destination neuron j are the state at the time of
// the pre-synaptic spike, read combinationally on the read port while the
// synapse is updated, without waiting for the neuron SRAM read.
//
// Timing: write takes effect at the next clock edge; read is combinational.
// Reset clears all conditions (no learning until a neuron is written).
// The conditions are the chip's learning rule; storing them per neuron and
// refreshing them on write-back is this design's reading of the block.
module ssdsp_updown_regs
  import morphic_pkg::*;
#(
  parameter int unsigned N = N_NEUR
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  lif_state_t           wstate,
  input  sdsp_param_t          wsdsp,
  input  logic [$clog2(N)-1:0] raddr,
  output logic                 up,
  output logic                 down
);

  logic [N-1:0] up_q, down_q;
  logic         up_w, down_w, in12, in13;

  always_comb begin
    in13   = (wstate.ca >= wsdsp.th1) && (wstate.ca < wsdsp.th3);
    in12   = (wstate.ca >= wsdsp.th1) && (wstate.ca < wsdsp.th2);
    up_w   = (wstate.vmem >= wsdsp.thm) && in13;
    down_w = (wstate.vmem <  wsdsp.thm) && in12;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      up_q   <= '0;
      down_q <= '0;
    end else if (we) begin
      up_q[waddr]   <= up_w;
      down_q[waddr] <= down_w;
    end
  end

  assign up   = up_q[raddr];
  assign down = down_q[raddr];

endmodule
