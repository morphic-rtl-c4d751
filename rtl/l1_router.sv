// l1_router: level-1 star router between the four cores of a chip and the
// L2 router.
//
// Sources are the four cores' 40-bit output links and the L2 router's
// 32-bit output toward this chip. An arbiter (round-robin, or priority to
// the fullest source FIFO) picks one source; the dispatcher then delivers
// its packet to every destination in one clock, and only when all of them
// can accept it, so a multicast is never split. There is no buffering here:
// packets wait in the FIFOs of the L0 and L2 routers.
//
// Ascending events (from core c):
//   spike   - the 3-bit L1 field selects other cores: bit k targets core
//             (c+1+k) mod 4, which receives an L1 event carrying the 9-bit
//             source address (crossbar on its L1 synapses). If the 4-bit L2
//             cores field is non-zero, an L2 spike packet (dx, dy, cores,
//             syn, neur, distance 1) is also sent to the L2 router.
//   monitoring reply - forwarded to the L2 router.
// Descending events (from the L2 router):
//   L2 spike and test events (L0, L1, virtual, teacher, leak) are
//   multicast to the cores set in their 4-bit cores field; configuration
//   and monitoring requests go to the single core they name; anything else
//   (a reply addressed to this chip) is discarded.
//
// Follows the chip: star topology, source-driven multicast to any
// combination of the other cores, forwarding to L2, configurable arbiter,
// no FIFO. Own choices: the mapping of the 3 L1 bits to cores, the
// all-or-nothing multicast, packet layouts.
module l1_router
  import morphic_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                prio_mode,
  // core output links
  input  logic [3:0]          c_valid,
  input  logic [OUTPKT_W-1:0] c_pkt   [4],
  output logic [3:0]          c_ready,
  input  logic [3:0]          c_count [4],
  // from the L2 router
  input  logic                l2_valid,
  input  logic [PKT_W-1:0]    l2_pkt,
  output logic                l2_ready,
  input  logic [3:0]          l2_count,
  // core input links
  output logic [3:0]          ci_valid,
  output logic [PKT_W-1:0]    ci_pkt,
  input  logic [3:0]          ci_ready,
  // to the L2 router
  output logic                lo_valid,
  output logic [PKT_W-1:0]    lo_pkt,
  input  logic                lo_ready,
  // status
  output logic                multicast    // a packet went to 2+ destinations
);

  localparam int unsigned N = 5;

  logic [N-1:0] req;
  logic [3:0]   occ [N];
  logic         grant, all_ok, to_l2, xfer;
  logic [2:0]   gidx;
  logic [3:0]   mask;

  assign req = {l2_valid, c_valid};
  always_comb begin
    for (int i = 0; i < 4; i++) occ[i] = c_count[i];
    occ[4] = l2_count;
  end

  router_arbiter #(.N(N), .CW(4)) u_arb (
    .clk, .rst,
    .prio_mode (prio_mode),
    .req       (req),
    .occ       (occ),
    .accept    (xfer),
    .grant     (grant),
    .gidx      (gidx)
  );

  // Destinations of the granted packet.
  always_comb begin
    out_spk_t   o;
    l2spk_pkt_t up;
    pkt_type_e  t;
    mask   = '0;
    to_l2  = 1'b0;
    ci_pkt = '0;
    lo_pkt = '0;
    o      = '0;
    up     = '0;
    t      = pkt_type_e'(l2_pkt[31:28]);
    if (gidx < 3'd4) begin
      o = out_spk_t'(c_pkt[gidx[1:0]]);
      if (o.kind == OUT_SPIKE) begin
        for (int k = 0; k < 3; k++)
          if (o.l1cores[k]) mask[(int'(gidx[1:0]) + 1 + k) % 4] = 1'b1;
        ci_pkt         = {PT_L1SPK, 4'b0000, o.src, 8'h00, 7'h00};
        up.ptype       = PT_L2SPK;
        up.dx          = o.l2.dx;
        up.dy          = o.l2.dy;
        up.cores       = o.l2.cores;
        up.syn         = o.l2.syn;
        up.neur        = o.l2.neur;
        up.d           = 3'd1;
        lo_pkt         = PKT_W'(up);
        to_l2          = (o.l2.cores != '0);
      end else begin
        lo_pkt = o[PKT_W-1:0];
        to_l2  = 1'b1;
      end
    end else begin
      ci_pkt = l2_pkt;
      unique case (t)
        PT_L2SPK:                      mask = l2_pkt[21:18];
        PT_L0SPK, PT_L1SPK, PT_VIRT,
        PT_TEACH, PT_LEAK:             mask = l2_pkt[27:24];
        PT_CFG, PT_RDREQ:              mask = 4'b0001 << l2_pkt[27:26];
        default:                       mask = '0;
      endcase
    end
  end

  assign all_ok = ((ci_ready | ~mask) == 4'hF) && (!to_l2 || lo_ready);
  assign xfer   = grant && all_ok;

  always_comb begin
    ci_valid = xfer ? mask : 4'b0000;
    lo_valid = xfer && to_l2;
    c_ready  = '0;
    l2_ready = 1'b0;
    if (xfer) begin
      if (gidx < 3'd4) c_ready[gidx[1:0]] = 1'b1;
      else             l2_ready = 1'b1;
    end
  end

  assign multicast = xfer && (($countones(mask) + (to_l2 ? 1 : 0)) > 1);

endmodule
