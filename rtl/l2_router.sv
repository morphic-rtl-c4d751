// l2_router: level-2 router for chip-to-chip traffic.
//
// Chips are tiled in a 2-D mesh; each chip has North, South, East and West
// links, each made of an 8-bit AER receiver and an 8-bit AER sender. Every
// packet entering the router, from a link or from the L1 router, is first
// buffered in an input FIFO; a single dispatcher, steered by a
// round-robin / FIFO-usage-priority arbiter, moves one packet per clock
// from an input FIFO to an output FIFO; output FIFOs feed the four AER
// senders and the L1 router. All links run independently.
//
// Routing is unicast, destination-driven and dimension-ordered, using the
// 3-bit dx and dy fields (sign + 2-bit magnitude) of the packet:
//   |dx| > 0 : go East (dx >= 0) or West (dx < 0), |dx| decremented;
//   else |dy| > 0 : go North (dy >= 0) or South (dy < 0), |dy| decremented;
//   else     : the packet has arrived and goes to the L1 router.
// The distance field d of a spike packet is incremented (saturating at 7)
// at every hop to another chip. Spike packets (L2SPK) and monitoring
// replies (RDREP) are routed this way; the other packet types
// (configuration, monitoring request, test events), arriving from a link,
// are for this chip and go to the L1 router; coming from the L1 router they
// are dropped.
//
// Follows the chip: the FIFO-buffered structure, fifo_full and link_busy
// flags, the arbiter modes, x-before-y routing, dx/dy decrement per hop,
// 3-bit dx/dy, the distance field. Own choices: the sign convention
// (positive = East/North), FIFO depths, one dispatch per clock, and the
// handling of non-spike packet types.
//
// l1_out_count is 4 bits wide for the L1 arbiter; with OUT_DEPTH = 4 its
// top bit is always 0.
module l2_router
  import morphic_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 4,
  parameter int unsigned OUT_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             prio_mode,
  // AER links, index 0 North, 1 South, 2 East, 3 West
  input  logic [3:0]       rx_req,
  input  logic [7:0]       rx_addr [4],
  output logic [3:0]       rx_ack,
  output logic [3:0]       tx_req,
  output logic [7:0]       tx_addr [4],
  input  logic [3:0]       tx_ack,
  // from the L1 router
  input  logic             l1_in_valid,
  input  logic [PKT_W-1:0] l1_in_pkt,
  output logic             l1_in_ready,
  // to the L1 router
  output logic             l1_out_valid,
  output logic [PKT_W-1:0] l1_out_pkt,
  input  logic             l1_out_ready,
  output logic [3:0]       l1_out_count,
  // status
  output logic [3:0]       link_busy,
  output logic [4:0]       dispatch_cnt_inc   // one-hot: a packet left input FIFO i
);

  localparam int unsigned N = 5;
  localparam int unsigned P_N = 0, P_S = 1, P_E = 2, P_W = 3, P_L1 = 4;
  localparam int unsigned ICW = $clog2(IN_DEPTH) + 1;
  localparam int unsigned OCW = $clog2(OUT_DEPTH) + 1;

  logic [N-1:0]       in_push, in_pop, in_full, in_empty;
  logic [PKT_W-1:0]   in_wdata [N];
  logic [PKT_W-1:0]   in_head  [N];
  logic [ICW-1:0]     in_cnt   [N];
  logic [3:0]         occ      [N];

  logic [N-1:0]       out_push, out_pop, out_full, out_empty;
  logic [PKT_W-1:0]   out_wdata, out_head [N];
  logic [OCW-1:0]     out_cnt  [N];

  logic [2:0]         dest     [N];
  logic [N-1:0]       drop;
  logic [PKT_W-1:0]   fwd      [N];
  logic [N-1:0]       req;
  logic               grant;
  logic [2:0]         gidx;

  // ------------------------------------------------------ link receivers
  for (genvar i = 0; i < 4; i++) begin : g_rx
    aer_rx u_rx (
      .clk, .rst,
      .en        (!in_full[i]),
      .aer_req   (rx_req[i]),
      .aer_addr  (rx_addr[i]),
      .aer_ack   (rx_ack[i]),
      .pkt_valid (in_push[i]),
      .pkt       (in_wdata[i])
    );
  end

  assign in_push[P_L1]  = l1_in_valid && !in_full[P_L1];
  assign in_wdata[P_L1] = l1_in_pkt;
  assign l1_in_ready    = !in_full[P_L1];

  for (genvar i = 0; i < N; i++) begin : g_in
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst,
      .push (in_push[i]), .wdata (in_wdata[i]),
      .pop (in_pop[i]), .rdata (in_head[i]),
      .full (in_full[i]), .empty (in_empty[i]), .count (in_cnt[i])
    );
    assign occ[i] = 4'(in_cnt[i]);

    // Destination of the head packet.
    always_comb begin
      l2spk_pkt_t p;
      p       = l2spk_pkt_t'(in_head[i]);
      dest[i] = 3'(P_L1);
      drop[i] = 1'b0;
      if (p.ptype == PT_L2SPK || p.ptype == PT_RDREP) begin
        if (p.dx[1:0] != 2'd0) begin
          dest[i]   = p.dx[2] ? 3'(P_W) : 3'(P_E);
          p.dx[1:0] = p.dx[1:0] - 2'd1;
          if (p.ptype == PT_L2SPK) p.d = dist_inc(p.d);
        end else if (p.dy[1:0] != 2'd0) begin
          dest[i]   = p.dy[2] ? 3'(P_S) : 3'(P_N);
          p.dy[1:0] = p.dy[1:0] - 2'd1;
          if (p.ptype == PT_L2SPK) p.d = dist_inc(p.d);
        end
      end else if (i == int'(P_L1)) begin
        drop[i] = 1'b1;
      end
      fwd[i] = PKT_W'(p);
      req[i] = !in_empty[i] && (drop[i] || !out_full[dest[i]]);
    end
  end

  // ---------------------------------------------------------- dispatcher
  router_arbiter #(.N(N), .CW(4)) u_arb (
    .clk, .rst,
    .prio_mode (prio_mode),
    .req       (req),
    .occ       (occ),
    .accept    (1'b1),
    .grant     (grant),
    .gidx      (gidx)
  );

  always_comb begin
    in_pop    = '0;
    out_push  = '0;
    out_wdata = fwd[gidx];
    if (grant) begin
      in_pop[gidx] = 1'b1;
      if (!drop[gidx]) out_push[dest[gidx]] = 1'b1;
    end
  end

  assign dispatch_cnt_inc = in_pop;

  // ---------------------------------------------------- output FIFOs
  for (genvar i = 0; i < N; i++) begin : g_out
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(OUT_DEPTH)) u_fifo (
      .clk, .rst,
      .push (out_push[i]), .wdata (out_wdata),
      .pop (out_pop[i]), .rdata (out_head[i]),
      .full (out_full[i]), .empty (out_empty[i]), .count (out_cnt[i])
    );
  end

  for (genvar i = 0; i < 4; i++) begin : g_tx
    logic ready;
    aer_tx u_tx (
      .clk, .rst,
      .pkt_valid (!out_empty[i]),
      .pkt       (out_head[i]),
      .pkt_ready (ready),
      .aer_req   (tx_req[i]),
      .aer_addr  (tx_addr[i]),
      .aer_ack   (tx_ack[i]),
      .link_busy (link_busy[i])
    );
    assign out_pop[i] = ready && !out_empty[i];
  end

  assign l1_out_valid = !out_empty[P_L1];
  assign l1_out_pkt   = out_head[P_L1];
  assign out_pop[P_L1] = l1_out_valid && l1_out_ready;
  assign l1_out_count = 4'(out_cnt[P_L1]);

endmodule
