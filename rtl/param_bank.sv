// param_bank: configuration registers of one core.
//
// Holds the core-wide settings that are not stored per neuron:
//   ctrl      bit0 L0 enable (a local spike is fed back to the local
//             crossbar), bit1 learning enable (S-SDSP updates)
//   q+[d], q-[d]  9-bit S-SDSP transition probabilities for each event
//             distance d = 0..7 (0 local L0, 1 L1, 2..7 L2 hops), which is
//             how the distance modulates the update probability
//   axon configs  one per L0 axon (512), L1 axon (512) and L2 synapse
//             index (32): bits1:0 weight multiplier exponent (x1, x2, x4,
//             x8), bit2 inhibitory (the weight counts negative)
// Registers are written one byte at a time by configuration packets
// (byte map in morphic_pkg). All reads are combinational: q+/q- for the
// distance of the event being processed, the axon config of the current
// crossbar source or L2 synapse.
//
// Follows the chip: L0 connectivity can be disabled in this bank, axons
// scale weights by 1/2/4/8, 9-bit q+/q- with 3 bits of distance
// modulation. Own choices: the table of q per distance, the inhibitory bit,
// the byte map and the reset values (L0 enabled, learning off, all q and
// axon configs 0).
module param_bank
  import morphic_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         we,
  input  logic [15:0]  addr,
  input  logic [7:0]   wdata,
  output logic         l0_en,
  output logic         learn_en,
  input  logic [2:0]   distance,
  output logic [Q_W-1:0] q_plus,
  output logic [Q_W-1:0] q_minus,
  input  logic         ax_l01,      // 0: L0 axon, 1: L1 axon
  input  logic [8:0]   ax_idx,
  output logic [2:0]   ax_cfg,
  input  logic [4:0]   l2_idx,
  output logic [2:0]   l2_cfg
);

  logic [1:0]     ctrl_q;
  logic [Q_W-1:0] qp_q [8];
  logic [Q_W-1:0] qm_q [8];
  logic [2:0]     l0_q [N_NEUR];
  logic [2:0]     l1_q [N_NEUR];
  logic [2:0]     l2_q [N_L2SYN];

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl_q <= 2'b01;
      for (int i = 0; i < 8; i++) begin
        qp_q[i] <= '0;
        qm_q[i] <= '0;
      end
      for (int i = 0; i < int'(N_NEUR); i++) begin
        l0_q[i] <= '0;
        l1_q[i] <= '0;
      end
      for (int i = 0; i < int'(N_L2SYN); i++) l2_q[i] <= '0;
    end else if (we) begin
      if (addr == PB_CTRL) ctrl_q <= wdata[1:0];
      if (addr[15:4] == PB_QP_BASE[15:4]) begin
        if (addr[0]) qp_q[addr[3:1]][8]   <= wdata[0];
        else         qp_q[addr[3:1]][7:0] <= wdata;
      end
      if (addr[15:4] == PB_QM_BASE[15:4]) begin
        if (addr[0]) qm_q[addr[3:1]][8]   <= wdata[0];
        else         qm_q[addr[3:1]][7:0] <= wdata;
      end
      if (addr[15:5] == PB_L2_BASE[15:5]) l2_q[addr[4:0]] <= wdata[2:0];
      if (addr[15:9] == PB_L0_BASE[15:9]) l0_q[addr[8:0]] <= wdata[2:0];
      if (addr[15:9] == PB_L1_BASE[15:9]) l1_q[addr[8:0]] <= wdata[2:0];
    end
  end

  assign l0_en    = ctrl_q[0];
  assign learn_en = ctrl_q[1];
  assign q_plus   = qp_q[distance];
  assign q_minus  = qm_q[distance];
  assign ax_cfg   = ax_l01 ? l1_q[ax_idx] : l0_q[ax_idx];
  assign l2_cfg   = l2_q[l2_idx];

endmodule
