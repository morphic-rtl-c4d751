// morphic_core: one core of the quad-core processor.
//
// 512 leaky integrate-and-fire neurons arranged as a crossbar with 256k L0
// synapses (from the core's own neurons) and 256k L1 synapses (from neurons
// of the other cores), plus 32 L2 synapses per neuron (16k) that are
// addressed one at a time by inter-chip events. All synapses are 1-bit and
// learn online with S-SDSP.
//
// Parts: the L0 router (packet interface + scheduler), the time-multiplexed
// controller with the shared LIF and S-SDSP update logic, the 64-kB
// synapse SRAM (4096 x 128 bits, address {L01, source, block}), the 8-kB
// neuron SRAM (512 x 128 bits, one word per neuron: parameters, state,
// outward connectivity, L2 synapses), the S-SDSP up/down registers and the
// parameter bank.
//
// Interface: 32-bit packets in from the L1 router, 40-bit packets out to
// it (valid/ready). A crossbar event takes 1025 clocks (fetch + 512 SOPs of
// 2 clocks); an L2, virtual or teacher event 3 clocks; a leak event 1025.
// The block structure follows the chip's core diagram; how the blocks are
// wired is this design's.
//
// Bit 39 of out_pkt (upper bit of the 2-bit kind field, kept for further
// packet kinds) is always 0.
module morphic_core
  import morphic_pkg::*;
#(
  parameter logic [1:0]  CORE_ID     = 2'd0,
  parameter int unsigned SCHED_DEPTH = 8,
  parameter int unsigned L0_DEPTH    = 16,
  parameter int unsigned ENC_DEPTH   = 4
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_valid,
  input  logic [PKT_W-1:0]      in_pkt,
  output logic                  in_ready,
  output logic                  out_valid,
  output logic [OUTPKT_W-1:0]   out_pkt,
  input  logic                  out_ready,
  output logic [$clog2(ENC_DEPTH):0] out_count,
  output logic                  busy,
  output logic                  stall
);

  logic              sched_valid, sched_pop;
  logic [PKT_W-1:0]  sched_pkt;
  logic              cfg_valid, cfg_ready, rd_valid, rd_ready;
  cfg_pkt_t          cfg_pkt, rd_pkt;
  logic              l0ev_valid, l0ev_ready;
  logic [8:0]        l0ev_src;
  logic              up_valid, up_ready;
  logic [OUTPKT_W-1:0] up_pkt;

  logic              n_cs, n_we, s_cs, s_we;
  logic [8:0]        n_addr;
  logic [SYN_AW-1:0] s_addr;
  logic [WORD_W-1:0] n_wdata, n_rdata, s_wdata, s_rdata;

  logic              pb_we, l0_en, learn_en, ax_l01;
  logic [15:0]       pb_addr;
  logic [7:0]        pb_wdata;
  logic [2:0]        pb_dist, ax_cfg, l2_cfg;
  logic [Q_W-1:0]    q_plus, q_minus;
  logic [8:0]        ax_idx, ud_waddr, ud_raddr;
  logic [4:0]        l2_idx;
  logic              ud_we, ud_up, ud_down;
  lif_state_t        ud_wstate;
  sdsp_param_t       ud_wsdsp;

  l0_router #(
    .SCHED_DEPTH (SCHED_DEPTH),
    .L0_DEPTH    (L0_DEPTH),
    .ENC_DEPTH   (ENC_DEPTH)
  ) u_l0 (
    .clk, .rst,
    .in_valid, .in_pkt, .in_ready,
    .out_valid, .out_pkt, .out_ready, .out_count,
    .sched_valid, .sched_pkt, .sched_pop,
    .cfg_valid, .cfg_pkt, .cfg_ready,
    .rd_valid, .rd_pkt, .rd_ready,
    .l0ev_valid, .l0ev_src, .l0ev_ready,
    .up_valid, .up_pkt, .up_ready
  );

  core_controller u_ctrl (
    .clk, .rst,
    .core_id (CORE_ID),
    .sched_valid, .sched_pkt, .sched_pop,
    .cfg_valid, .cfg_pkt, .cfg_ready,
    .rd_valid, .rd_pkt, .rd_ready,
    .l0ev_valid, .l0ev_src, .l0ev_ready,
    .up_valid, .up_pkt, .up_ready,
    .n_cs, .n_we, .n_addr, .n_wdata, .n_rdata,
    .s_cs, .s_we, .s_addr, .s_wdata, .s_rdata,
    .pb_we, .pb_addr, .pb_wdata, .l0_en, .learn_en, .pb_dist,
    .q_plus, .q_minus, .ax_l01, .ax_idx, .ax_cfg, .l2_idx, .l2_cfg,
    .ud_we, .ud_waddr, .ud_wstate, .ud_wsdsp, .ud_raddr, .ud_up, .ud_down,
    .busy, .stall
  );

  sram_sp #(.DEPTH(N_NEUR), .WIDTH(WORD_W)) u_neur_sram (
    .clk, .cs (n_cs), .we (n_we), .addr (n_addr), .wdata (n_wdata), .rdata (n_rdata)
  );

  sram_sp #(.DEPTH(1 << SYN_AW), .WIDTH(WORD_W)) u_syn_sram (
    .clk, .cs (s_cs), .we (s_we), .addr (s_addr), .wdata (s_wdata), .rdata (s_rdata)
  );

  ssdsp_updown_regs #(.N(N_NEUR)) u_updown (
    .clk, .rst,
    .we (ud_we), .waddr (ud_waddr), .wstate (ud_wstate), .wsdsp (ud_wsdsp),
    .raddr (ud_raddr), .up (ud_up), .down (ud_down)
  );

  param_bank u_params (
    .clk, .rst,
    .we (pb_we), .addr (pb_addr), .wdata (pb_wdata),
    .l0_en, .learn_en,
    .distance (pb_dist), .q_plus, .q_minus,
    .ax_l01, .ax_idx, .ax_cfg, .l2_idx, .l2_cfg
  );

endmodule
