// morphic_top: quad-core binary-weight spiking neuromorphic processor chip.
//
// Four crossbar cores (512 LIF neurons each, 1-bit synapses with S-SDSP
// online learning) are connected by a three-level event routing hierarchy:
// each core's L0 router, one L1 star router joining the four cores, and one
// L2 mesh router with four 8-bit AER links (North, South, East, West) to
// neighbouring chips. All connectivity information sits in the neuron
// words, so the routers hold no mapping tables. The chip clock comes from
// the external clock input or from the internal ring oscillator.
//
// Ports: clk_ext/clk_int_en/clk_int_len select and configure the clock;
// rst is a synchronous active-high reset; l1_prio/l2_prio choose priority
// (1) or round-robin (0) arbitration; each link has an 8-bit AER receiver
// (rx_req, rx_addr -> rx_ack) and sender (tx_req, tx_addr <- tx_ack), index
// 0 North, 1 South, 2 East, 3 West. The chip is configured and monitored
// entirely through packets on these links.
//
// Structure follows the chip's block diagram. The arbiter-mode pins and the
// clock-length pins are this design's choice of how those settings reach
// the chip; the chip documentation does not say.
module morphic_top
  import morphic_pkg::*;
(
  input  logic       clk_ext,
  input  logic       clk_int_en,
  input  logic [2:0] clk_int_len,
  input  logic       rst,
  input  logic       l1_prio,
  input  logic       l2_prio,
  input  logic [3:0] rx_req,
  input  logic [7:0] rx_addr [4],
  output logic [3:0] rx_ack,
  output logic [3:0] tx_req,
  output logic [7:0] tx_addr [4],
  input  logic [3:0] tx_ack
);

  logic clk;

  logic [3:0]          c_valid, c_ready, ci_valid, ci_ready, c_busy, c_stall;
  logic [OUTPKT_W-1:0] c_pkt   [4];
  logic [2:0]          c_cnt   [4];
  logic [3:0]          c_count [4];
  logic [PKT_W-1:0]    ci_pkt;

  logic             l2_valid, l2_ready, lo_valid, lo_ready, multicast;
  logic [PKT_W-1:0] l2_pkt, lo_pkt;
  logic [3:0]       l2_count, link_busy;
  logic [4:0]       dispatched;

  clock_gen u_clkgen (
    .clk_ext    (clk_ext),
    .clk_int_en (clk_int_en),
    .len_sel    (clk_int_len),
    .clk        (clk)
  );

  for (genvar c = 0; c < 4; c++) begin : g_core
    morphic_core #(.CORE_ID(2'(c))) u_core (
      .clk, .rst,
      .in_valid  (ci_valid[c]),
      .in_pkt    (ci_pkt),
      .in_ready  (ci_ready[c]),
      .out_valid (c_valid[c]),
      .out_pkt   (c_pkt[c]),
      .out_ready (c_ready[c]),
      .out_count (c_cnt[c]),
      .busy      (c_busy[c]),
      .stall     (c_stall[c])
    );
    assign c_count[c] = 4'(c_cnt[c]);
  end

  l1_router u_l1 (
    .clk, .rst,
    .prio_mode (l1_prio),
    .c_valid, .c_pkt, .c_ready, .c_count,
    .l2_valid, .l2_pkt, .l2_ready, .l2_count,
    .ci_valid, .ci_pkt, .ci_ready,
    .lo_valid, .lo_pkt, .lo_ready,
    .multicast
  );

  l2_router u_l2 (
    .clk, .rst,
    .prio_mode    (l2_prio),
    .rx_req, .rx_addr, .rx_ack,
    .tx_req, .tx_addr, .tx_ack,
    .l1_in_valid  (lo_valid),
    .l1_in_pkt    (lo_pkt),
    .l1_in_ready  (lo_ready),
    .l1_out_valid (l2_valid),
    .l1_out_pkt   (l2_pkt),
    .l1_out_ready (l2_ready),
    .l1_out_count (l2_count),
    .link_busy    (link_busy),
    .dispatch_cnt_inc (dispatched)
  );

endmodule
