// core_controller: time-multiplexed crossbar controller of one core, with
// the shared LIF and S-SDSP update logic.
//
// The core keeps all neuron state in a 512 x 128-bit neuron SRAM and all L0
// and L1 synapses in a 4096 x 128-bit synapse SRAM, and updates them through
// one LIF update circuit and one S-SDSP update circuit. This controller
// sequences those memories:
//
//   L0 / L1 event from source neuron i (crossbar): 512 synaptic operations
//     (SOPs), one per destination neuron j = 0..511, each of two clocks:
//     read neuron j, then write it back updated. The synapse word
//     {L01, i, j[8:7]} (128 synapses) is read together with neuron j when
//     j mod 128 = 0; the 128 S-SDSP results are collected in a buffer and
//     the word is written back in the write clock of j mod 128 = 127, just
//     before the next word is read. L01 = 0 selects L0 synapses, 1 L1.
//     An event takes 1024 clocks plus one to fetch it.
//   L2 event (synapse s of neuron n): one SOP on neuron n; the L2 synapse is
//     bit 96+s of the neuron word and is updated in place.
//   virtual event: one SOP adding a signed 8-bit value, no synapse.
//   teacher event: one neuron access writing the Calcium variable.
//   leak event: a 512-neuron sweep applying one leak step to every neuron.
//   configuration: byte write (read-modify-write for the SRAMs, direct for
//     the parameter bank). Monitoring request: byte read, answered by a
//     monitoring reply packet.
//
// The synaptic contribution is w * 2^m, negated for an inhibitory axon,
// with m and the sign from the axon config of the source (crossbar) or of
// the L2 synapse index (L2). S-SDSP, when enabled, uses the up/down
// conditions of the destination neuron as they were before this event and
// the q+/q- of the event's distance (0 L0, 1 L1, from the packet for L2).
// When a neuron fires, an L0 event to the local scheduler (if L0 is
// enabled) and/or a spike packet with its 27 connectivity bits to the L0
// router (if any L1 or L2 target is set) are issued in the same write
// clock; if either destination is full the controller stalls in that clock
// until both have room, without writing anything.
//
// Follows the chip: 2-clock SOPs, 512 SOPs per crossbar event, 128-bit
// synapse words accessed once per 128 SOPs with buffered write-back, the
// {L01,i,blk} synapse address, single-SOP L2 events, the event types, the
// neuron word layout. Own choices: the exact cycle of each access, the
// stall rule, the priority of configuration/monitoring over scheduled
// events, using the old weight for integration, and byte-level access.
//
// pb_addr and pb_wdata are the address and data fields of the configuration
// packet passed straight to the parameter bank (written in the clock the
// packet is taken), so those outputs follow inputs.
// Bit 39 of up_pkt (upper bit of the kind field) is always 0.
module core_controller
  import morphic_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [1:0]        core_id,
  // scheduler events (show-ahead)
  input  logic              sched_valid,
  input  logic [PKT_W-1:0]  sched_pkt,
  output logic              sched_pop,
  // configuration and monitoring requests from the packet decoder
  input  logic              cfg_valid,
  input  cfg_pkt_t          cfg_pkt,
  output logic              cfg_ready,
  input  logic              rd_valid,
  input  cfg_pkt_t          rd_pkt,
  output logic              rd_ready,
  // local L0 events toward the scheduler
  output logic              l0ev_valid,
  output logic [8:0]        l0ev_src,
  input  logic              l0ev_ready,
  // spikes and monitoring replies toward the packet encoder
  output logic              up_valid,
  output logic [OUTPKT_W-1:0] up_pkt,
  input  logic              up_ready,
  // neuron SRAM
  output logic              n_cs,
  output logic              n_we,
  output logic [8:0]        n_addr,
  output logic [WORD_W-1:0] n_wdata,
  input  logic [WORD_W-1:0] n_rdata,
  // synapse SRAM
  output logic              s_cs,
  output logic              s_we,
  output logic [SYN_AW-1:0] s_addr,
  output logic [WORD_W-1:0] s_wdata,
  input  logic [WORD_W-1:0] s_rdata,
  // parameter bank
  output logic              pb_we,
  output logic [15:0]       pb_addr,
  output logic [7:0]        pb_wdata,
  input  logic              l0_en,
  input  logic              learn_en,
  output logic [2:0]        pb_dist,
  input  logic [Q_W-1:0]    q_plus,
  input  logic [Q_W-1:0]    q_minus,
  output logic              ax_l01,
  output logic [8:0]        ax_idx,
  input  logic [2:0]        ax_cfg,
  output logic [4:0]        l2_idx,
  input  logic [2:0]        l2_cfg,
  // S-SDSP up/down registers
  output logic              ud_we,
  output logic [8:0]        ud_waddr,
  output lif_state_t        ud_wstate,
  output sdsp_param_t       ud_wsdsp,
  output logic [8:0]        ud_raddr,
  input  logic              ud_up,
  input  logic              ud_down,
  // status
  output logic              busy,
  output logic              stall
);

  typedef enum logic [2:0] {
    K_XBAR, K_LEAK, K_L2, K_VIRT, K_TEACH, K_CFG, K_RD
  } kind_e;

  typedef enum logic [1:0] { S_IDLE, S_RD, S_WR } state_e;

  localparam logic [1:0] OP_INTEG = 2'd1;
  localparam logic [1:0] OP_LEAK  = 2'd2;
  localparam logic [1:0] OP_TEACH = 2'd3;

  state_e   st_q;
  kind_e    kind_q;
  logic [8:0] j_q;          // destination neuron (sweeps) or target neuron
  logic [8:0] src_q;        // crossbar source neuron
  logic       l01_q;
  logic [4:0] syn_q;
  logic [2:0] d_q;
  logic [7:0] val_q;
  cfg_pkt_t   cfg_q;
  logic [WORD_W-1:0] sbuf_q;  // S-SDSP results of the current synapse word

  ev_pkt_t    ev;
  l2spk_pkt_t l2p;
  neur_word_t nw, nw_new;
  lif_state_t st_nxt;
  logic       spike;
  logic       w_cur, w_new, do_upd, zeta;
  logic [2:0] acfg;
  logic signed [VMEM_W+1:0] contrib;
  logic [1:0] op;
  logic       need_l0, need_up, out_ok, sweep, last;
  logic [3:0] byte_sel;

  assign ev  = ev_pkt_t'(sched_pkt);
  assign l2p = l2spk_pkt_t'(sched_pkt);
  assign nw  = neur_word_t'(n_rdata);

  assign sweep = (kind_q == K_XBAR) || (kind_q == K_LEAK);
  assign last  = !sweep || (j_q == 9'd511);

  // ---------------------------------------------------------- datapath
  assign pb_dist  = d_q;
  assign ax_l01   = l01_q;
  assign ax_idx   = src_q;
  assign l2_idx   = syn_q;
  assign ud_raddr = j_q;
  assign acfg     = (kind_q == K_L2) ? l2_cfg : ax_cfg;
  assign w_cur    = (kind_q == K_L2) ? nw.l2syn[syn_q] : s_rdata[j_q[6:0]];

  always_comb begin
    logic signed [VMEM_W+1:0] mag;
    mag = 13'sd1 <<< acfg[1:0];
    if (kind_q == K_VIRT)  contrib = {{5{val_q[7]}}, val_q};
    else if (!w_cur)       contrib = '0;
    else                   contrib = acfg[2] ? -mag : mag;
    unique case (kind_q)
      K_XBAR, K_L2, K_VIRT: op = OP_INTEG;
      K_LEAK:               op = OP_LEAK;
      K_TEACH:              op = OP_TEACH;
      default:              op = 2'd0;
    endcase
  end

  lif_update u_lif (
    .state     (nw.state),
    .lifp      (nw.lifp),
    .ca_leak   (nw.sdsp.ca_leak),
    .op        (op),
    .value     (contrib),
    .teach_ca  (val_q[3:0]),
    .state_nxt (st_nxt),
    .spike     (spike)
  );

  ssdsp_update u_ssdsp (
    .clk       (clk),
    .rst       (rst),
    .do_update (do_upd),
    .up        (ud_up),
    .down      (ud_down),
    .q_plus    (q_plus),
    .q_minus   (q_minus),
    .w_b       (w_cur),
    .w_next    (w_new),
    .zeta      (zeta)
  );

  assign need_l0 = spike && l0_en;
  assign need_up = spike && ((nw.l1cores != '0) || (nw.l2.cores != '0));
  assign out_ok  = (!need_l0 || l0ev_ready) && (!need_up || up_ready);
  assign byte_sel = cfg_q.addr[3:0];

  always_comb begin
    nw_new       = nw;
    nw_new.state = st_nxt;
    if (kind_q == K_L2 && learn_en) nw_new.l2syn[syn_q] = w_new;
    if (kind_q == K_CFG) begin
      nw_new = nw;
      nw_new[byte_sel*8 +: 8] = cfg_q.data;
    end
  end

  // ------------------------------------------------------- control
  always_comb begin
    rdrep_pkt_t rep;
    rep        = '0;
    sched_pop  = 1'b0;
    cfg_ready  = 1'b0;
    rd_ready   = 1'b0;
    n_cs = 1'b0; n_we = 1'b0; n_addr = j_q; n_wdata = nw_new;
    s_cs = 1'b0; s_we = 1'b0; s_addr = {l01_q, src_q, j_q[8:7]}; s_wdata = '0;
    pb_we = 1'b0; pb_addr = cfg_pkt.addr; pb_wdata = cfg_pkt.data;
    ud_we = 1'b0; ud_waddr = j_q; ud_wstate = nw_new.state; ud_wsdsp = nw_new.sdsp;
    do_upd = 1'b0;
    l0ev_valid = 1'b0; l0ev_src = j_q;
    up_valid = 1'b0; up_pkt = '0;
    stall = 1'b0;

    unique case (st_q)
      S_IDLE: begin
        if (cfg_valid) begin
          cfg_ready = 1'b1;
          pb_we     = (cfg_pkt.mem == MEM_PARAM);
        end else if (rd_valid) begin
          rd_ready = 1'b1;
        end else if (sched_valid) begin
          sched_pop = 1'b1;
        end
      end
      S_RD: begin
        unique case (kind_q)
          K_CFG, K_RD: begin
            if (cfg_q.mem == MEM_SYN) begin
              s_cs = 1'b1; s_addr = cfg_q.addr[15:4];
            end else begin
              n_cs = 1'b1; n_addr = cfg_q.addr[12:4];
            end
          end
          default: begin
            n_cs = 1'b1;
            if (kind_q == K_XBAR && j_q[6:0] == 7'd0) s_cs = 1'b1;
          end
        endcase
      end
      S_WR: begin
        unique case (kind_q)
          K_CFG: begin
            if (cfg_q.mem == MEM_SYN) begin
              s_cs = 1'b1; s_we = 1'b1; s_addr = cfg_q.addr[15:4];
              s_wdata = s_rdata;
              s_wdata[byte_sel*8 +: 8] = cfg_q.data;
            end else begin
              n_cs = 1'b1; n_we = 1'b1; n_addr = cfg_q.addr[12:4];
              ud_we = 1'b1; ud_waddr = cfg_q.addr[12:4];
            end
          end
          K_RD: begin
            rep.ptype = PT_RDREP;
            rep.dx    = cfg_q.data[7:5];
            rep.dy    = cfg_q.data[4:2];
            rep.core  = core_id;
            rep.data  = (cfg_q.mem == MEM_SYN)  ? s_rdata[byte_sel*8 +: 8] :
                        (cfg_q.mem == MEM_NEUR) ? n_rdata[byte_sel*8 +: 8] : 8'h00;
            up_valid  = 1'b1;
            up_pkt    = {OUT_REPLY, 6'b0, rep};
            stall     = !up_ready;
          end
          default: begin
            if (!out_ok) begin
              stall = 1'b1;
            end else begin
              n_cs = 1'b1; n_we = 1'b1;
              ud_we = 1'b1;
              do_upd = learn_en && (kind_q == K_XBAR || kind_q == K_L2);
              l0ev_valid = need_l0;
              up_valid   = need_up;
              up_pkt     = {OUT_SPIKE, 2'b00, nw.l1cores, nw.l2, j_q};
              if (kind_q == K_XBAR && j_q[6:0] == 7'd127 && learn_en) begin
                s_cs = 1'b1; s_we = 1'b1;
                s_wdata = sbuf_q;
                s_wdata[127] = w_new;
              end
            end
          end
        endcase
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q   <= S_IDLE;
      kind_q <= K_XBAR;
      j_q    <= '0;
      src_q  <= '0;
      l01_q  <= 1'b0;
      syn_q  <= '0;
      d_q    <= '0;
      val_q  <= '0;
      cfg_q  <= '0;
      sbuf_q <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: begin
          j_q <= '0;
          if (cfg_valid) begin
            cfg_q  <= cfg_pkt;
            kind_q <= K_CFG;
            if (cfg_pkt.mem != MEM_PARAM) st_q <= S_RD;
          end else if (rd_valid) begin
            cfg_q  <= rd_pkt;
            kind_q <= K_RD;
            st_q   <= S_RD;
          end else if (sched_valid) begin
            st_q  <= S_RD;
            src_q <= ev.neur;
            val_q <= ev.value;
            unique case (ev.ptype)
              PT_L0SPK: begin kind_q <= K_XBAR; l01_q <= 1'b0; d_q <= 3'd0; end
              PT_L1SPK: begin kind_q <= K_XBAR; l01_q <= 1'b1; d_q <= 3'd1; end
              PT_L2SPK: begin
                kind_q <= K_L2; j_q <= l2p.neur; syn_q <= l2p.syn; d_q <= l2p.d;
              end
              PT_VIRT:  begin kind_q <= K_VIRT;  j_q <= ev.neur; end
              PT_TEACH: begin kind_q <= K_TEACH; j_q <= ev.neur; end
              PT_LEAK:  begin kind_q <= K_LEAK; end
              default:  st_q <= S_IDLE;   // unknown types are dropped
            endcase
          end
        end
        S_RD: st_q <= S_WR;
        S_WR: begin
          if (!stall) begin
            if (kind_q == K_XBAR) sbuf_q[j_q[6:0]] <= w_new;
            if (last) st_q <= S_IDLE;
            else begin
              st_q <= S_RD;
              j_q  <= j_q + 9'd1;
            end
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (st_q != S_IDLE);

  // A stalled spike or reply stays offered until the encoder takes it.
  a_up_hold: assert property (@(posedge clk) disable iff (rst)
    (up_valid && !up_ready) |=> up_valid);

endmodule
