// l0_router: level-0 router of one core, split into a router interface and
// a scheduler.
//
// Router interface:
//   packet decoder - takes 32-bit packets from the L1 router and sorts them
//     by type: configuration and monitoring-request packets go to the core
//     controller (each through a one-entry holding register), scheduler
//     events (L2, L1, L0, virtual, teacher, leak) go to the external
//     scheduler FIFO. Other types are accepted and discarded.
//   packet encoder - takes the controller's outgoing spikes (27
//     connectivity bits + source address) and monitoring replies and queues
//     them as 40-bit packets in the output FIFO toward the L1 router.
// Scheduler:
//   two FIFOs, one for events from the decoder and one for locally
//   generated L0 events (a local spike fed back to the local crossbar,
//   never visible to the L1/L2 routers). The controller is offered the head
//   of one of them; when both hold events they are served alternately.
//
// Handshakes are valid/ready; in_ready and every ready toward the
// controller depend only on buffer state and on the offered packet type,
// never on a valid, so the L1 router can multicast without loops.
// out_count is the output FIFO occupancy, used by the L1 arbiter.
//
// Follows the chip: the decoder/encoder/scheduler split, the event types,
// the FIFO on the 40-bit output link and the two scheduler FIFOs. Own
// choices: the FIFO depths, the one-entry request registers, the
// alternating scheduler and dropping of unknown packet types.
module l0_router
  import morphic_pkg::*;
#(
  parameter int unsigned SCHED_DEPTH = 8,
  parameter int unsigned L0_DEPTH    = 16,
  parameter int unsigned ENC_DEPTH   = 4
) (
  input  logic                  clk,
  input  logic                  rst,
  // from the L1 router
  input  logic                  in_valid,
  input  logic [PKT_W-1:0]      in_pkt,
  output logic                  in_ready,
  // to the L1 router
  output logic                  out_valid,
  output logic [OUTPKT_W-1:0]   out_pkt,
  input  logic                  out_ready,
  output logic [$clog2(ENC_DEPTH):0] out_count,
  // controller: scheduled events
  output logic                  sched_valid,
  output logic [PKT_W-1:0]      sched_pkt,
  input  logic                  sched_pop,
  // controller: configuration and monitoring requests
  output logic                  cfg_valid,
  output cfg_pkt_t              cfg_pkt,
  input  logic                  cfg_ready,
  output logic                  rd_valid,
  output cfg_pkt_t              rd_pkt,
  input  logic                  rd_ready,
  // controller: local L0 events
  input  logic                  l0ev_valid,
  input  logic [8:0]            l0ev_src,
  output logic                  l0ev_ready,
  // controller: spikes and replies going up
  input  logic                  up_valid,
  input  logic [OUTPKT_W-1:0]   up_pkt,
  output logic                  up_ready
);

  pkt_type_e ptype;
  logic      is_sched, is_cfg, is_rd;
  logic      ext_full, ext_empty, loc_full, loc_empty, enc_full, enc_empty;
  logic [PKT_W-1:0] ext_head;
  logic [8:0]       loc_head;
  logic      ext_push, ext_pop, loc_pop, pick_loc, turn_q;
  logic      cfg_full_q, rd_full_q;
  ev_pkt_t   loc_pkt;

  // ------------------------------------------------------ packet decoder
  assign ptype    = pkt_type_e'(in_pkt[31:28]);
  assign is_sched = (ptype == PT_L2SPK) || (ptype == PT_L1SPK) || (ptype == PT_L0SPK) ||
                    (ptype == PT_VIRT)  || (ptype == PT_TEACH) || (ptype == PT_LEAK);
  assign is_cfg   = (ptype == PT_CFG);
  assign is_rd    = (ptype == PT_RDREQ);

  always_comb begin
    if (is_sched)    in_ready = !ext_full;
    else if (is_cfg) in_ready = !cfg_full_q;
    else if (is_rd)  in_ready = !rd_full_q;
    else             in_ready = 1'b1;
  end

  assign ext_push = in_valid && in_ready && is_sched;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_full_q <= 1'b0;
      rd_full_q  <= 1'b0;
      cfg_pkt    <= '0;
      rd_pkt     <= '0;
    end else begin
      if (in_valid && in_ready && is_cfg) begin
        cfg_full_q <= 1'b1;
        cfg_pkt    <= cfg_pkt_t'(in_pkt);
      end else if (cfg_ready) begin
        cfg_full_q <= 1'b0;
      end
      if (in_valid && in_ready && is_rd) begin
        rd_full_q <= 1'b1;
        rd_pkt    <= cfg_pkt_t'(in_pkt);
      end else if (rd_ready) begin
        rd_full_q <= 1'b0;
      end
    end
  end

  assign cfg_valid = cfg_full_q;
  assign rd_valid  = rd_full_q;

  // ------------------------------------------------------------ scheduler
  sync_fifo #(.WIDTH(PKT_W), .DEPTH(SCHED_DEPTH)) u_ext_fifo (
    .clk (clk), .rst (rst),
    .push (ext_push), .wdata (in_pkt),
    .pop (ext_pop), .rdata (ext_head),
    .full (ext_full), .empty (ext_empty), .count ()
  );

  sync_fifo #(.WIDTH(9), .DEPTH(L0_DEPTH)) u_loc_fifo (
    .clk (clk), .rst (rst),
    .push (l0ev_valid && !loc_full), .wdata (l0ev_src),
    .pop (loc_pop), .rdata (loc_head),
    .full (loc_full), .empty (loc_empty), .count ()
  );

  assign l0ev_ready = !loc_full;

  // Alternate between the two FIFOs when both hold events.
  assign pick_loc = !loc_empty && (ext_empty || turn_q);

  always_comb begin
    loc_pkt       = '0;
    loc_pkt.ptype = PT_L0SPK;
    loc_pkt.neur  = loc_head;
  end

  assign sched_valid = !ext_empty || !loc_empty;
  assign sched_pkt   = pick_loc ? PKT_W'(loc_pkt) : ext_head;
  assign ext_pop     = sched_pop && !pick_loc && !ext_empty;
  assign loc_pop     = sched_pop && pick_loc;

  always_ff @(posedge clk) begin
    if (rst)            turn_q <= 1'b0;
    else if (sched_pop) turn_q <= !pick_loc;
  end

  // -------------------------------------------------------- packet encoder
  sync_fifo #(.WIDTH(OUTPKT_W), .DEPTH(ENC_DEPTH)) u_enc_fifo (
    .clk (clk), .rst (rst),
    .push (up_valid && !enc_full), .wdata (up_pkt),
    .pop (out_valid && out_ready), .rdata (out_pkt),
    .full (enc_full), .empty (enc_empty), .count (out_count)
  );

  assign up_ready  = !enc_full;
  assign out_valid = !enc_empty;

endmodule
