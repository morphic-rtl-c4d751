// morphic_pkg: constants, packet formats and neuron-word layout shared by
// the quad-core binary-weight spiking processor.
//
// Sizes follow the chip: 4 cores of 512 leaky integrate-and-fire neurons,
// 128-bit SRAM words, 32 input L2 synapses per neuron, 8-bit AER links that
// carry 32-bit packets, and 9-bit S-SDSP probabilities.
//
// The bit positions of the 128-bit neuron word (L2 synapses 127:96, L2
// connectivity 95:72 split as chip 95:90 / cores 89:86 / syn 85:81 /
// neur 80:72, L1 cores 71:69, LIF state 68:50, S-SDSP parameters 49:22,
// LIF parameters 21:0) follow the chip's neuron memory map. How the state
// and parameter fields are divided inside those ranges, and every packet
// layout below, are this design's own choices: the chip documentation gives
// packet widths (32-bit chip/core links, 40-bit core output links) but not
// their fields.
package morphic_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_CORES    = 4;
  localparam int unsigned N_NEUR     = 512;   // neurons per core
  localparam int unsigned NEUR_AW    = 9;     // neuron address width
  localparam int unsigned WORD_W     = 128;   // SRAM word width
  localparam int unsigned SYN_AW     = 12;    // synapse SRAM address {L01, i[8:0], blk[1:0]}
  localparam int unsigned N_L2SYN    = 32;    // L2 synapses per neuron
  localparam int unsigned PKT_W      = 32;    // chip-level / core input packet
  localparam int unsigned OUTPKT_W   = 40;    // core output packet
  localparam int unsigned Q_W        = 9;     // S-SDSP probability resolution
  localparam int unsigned VMEM_W     = 11;    // membrane potential
  localparam int unsigned CA_W       = 4;     // Calcium variable

  // ------------------------------------------------- neuron word fields
  // Ranges printed in the neuron memory map.
  localparam int unsigned NW_L2SYN_LSB  = 96;  // 127:96 input L2 synapses
  localparam int unsigned NW_L2_LSB     = 72;  // 95:72 outward L2 connectivity
  localparam int unsigned NW_L1_LSB     = 69;  // 71:69 outward L1 cores
  localparam int unsigned NW_STATE_LSB  = 50;  // 68:50 LIF state
  localparam int unsigned NW_SDSP_LSB   = 22;  // 49:22 S-SDSP parameters
  localparam int unsigned NW_LIFP_LSB   = 0;   // 21:0  LIF parameters

  // LIF state, 19 bits (68:50): membrane potential, Calcium, Calcium leak counter.
  typedef struct packed {
    logic [3:0]        ca_cnt;   // 68:65
    logic [CA_W-1:0]   ca;       // 64:61
    logic signed [VMEM_W-1:0] vmem; // 60:50
  } lif_state_t;

  // S-SDSP parameters, 28 bits (49:22).
  typedef struct packed {
    logic              rsvd;     // 49
    logic [3:0]        ca_leak;  // 48:45 leak events per Calcium decrement (0: no leak)
    logic [CA_W-1:0]   th3;      // 44:41
    logic [CA_W-1:0]   th2;      // 40:37
    logic [CA_W-1:0]   th1;      // 36:33
    logic signed [VMEM_W-1:0] thm; // 32:22
  } sdsp_param_t;

  // LIF parameters, 22 bits (21:0).
  typedef struct packed {
    logic              dis;      // 21 neuron disabled
    logic [9:0]        leak;     // 20:11 leak step per leak event
    logic signed [VMEM_W-1:0] thr; // 10:0 firing threshold
  } lif_param_t;

  // Outward L2 connectivity, 24 bits (95:72).
  typedef struct packed {
    logic [2:0] dx;      // 95:93 sign + 2-bit magnitude
    logic [2:0] dy;      // 92:90
    logic [3:0] cores;   // 89:86
    logic [4:0] syn;     // 85:81
    logic [8:0] neur;    // 80:72
  } l2_conn_t;

  typedef struct packed {
    logic [N_L2SYN-1:0] l2syn;
    l2_conn_t           l2;
    logic [2:0]         l1cores;
    lif_state_t         state;
    sdsp_param_t        sdsp;
    lif_param_t         lifp;
  } neur_word_t;

  // ------------------------------------------------------ packet types
  typedef enum logic [3:0] {
    PT_NONE   = 4'h0,
    PT_L2SPK  = 4'h1,   // spike toward one L2 synapse (routed by dx/dy)
    PT_L1SPK  = 4'h2,   // spike toward L1 synapses (crossbar)
    PT_L0SPK  = 4'h3,   // spike toward L0 synapses (crossbar, test input)
    PT_VIRT   = 4'h4,   // virtual event: direct neuron update, no synapse
    PT_TEACH  = 4'h5,   // teacher event: writes the Calcium variable
    PT_LEAK   = 4'h6,   // leak event: leaks all neurons of the core
    PT_CFG    = 4'h7,   // configuration byte write
    PT_RDREQ  = 4'h8,   // monitoring request (byte read)
    PT_RDREP  = 4'h9    // monitoring reply (routed by dx/dy)
  } pkt_type_e;

  // Memory selector of configuration and monitoring packets.
  typedef enum logic [1:0] {
    MEM_NEUR  = 2'd0,
    MEM_SYN   = 2'd1,
    MEM_PARAM = 2'd2
  } mem_sel_e;

  // 32-bit packet field positions.
  //   all        : [31:28] type
  //   L2SPK      : [27:25] dx [24:22] dy [21:18] cores [17:13] syn [12:4] neur [3:1] d
  //   RDREP      : [27:25] dx [24:22] dy [21:20] core  [19:12] data
  //   L0/L1/VIRT/TEACH/LEAK : [27:24] cores [23:15] neur [14:7] value
  //   CFG        : [27:26] core [25:24] mem [23:8] addr [7:0] data
  //   RDREQ      : [27:26] core [25:24] mem [23:8] addr [7:2] reply {dx,dy}
  typedef struct packed {
    pkt_type_e  ptype;
    logic [2:0] dx;
    logic [2:0] dy;
    logic [3:0] cores;
    logic [4:0] syn;
    logic [8:0] neur;
    logic [2:0] d;
    logic       rsvd;
  } l2spk_pkt_t;

  typedef struct packed {
    pkt_type_e  ptype;
    logic [3:0] cores;
    logic [8:0] neur;
    logic [7:0] value;
    logic [6:0] rsvd;
  } ev_pkt_t;

  typedef struct packed {
    pkt_type_e  ptype;
    logic [1:0] core;
    mem_sel_e   mem;
    logic [15:0] addr;
    logic [7:0] data;
  } cfg_pkt_t;

  typedef struct packed {
    pkt_type_e  ptype;
    logic [2:0] dx;
    logic [2:0] dy;
    logic [1:0] core;
    logic [7:0] data;
    logic [11:0] rsvd;
  } rdrep_pkt_t;

  // 40-bit core output packet.
  //   [39:38] kind (0 spike, 1 monitoring reply)
  //   spike : [35:33] L1 cores [32:9] L2 connectivity [8:0] source neuron
  //   reply : [31:0] complete RDREP packet
  localparam logic [1:0] OUT_SPIKE = 2'd0;
  localparam logic [1:0] OUT_REPLY = 2'd1;

  typedef struct packed {
    logic [1:0] kind;
    logic [1:0] rsvd;
    logic [2:0] l1cores;
    l2_conn_t   l2;
    logic [8:0] src;
  } out_spk_t;

  // --------------------------------------------------- parameter bank map
  // Byte addresses of configuration packets with mem = MEM_PARAM.
  localparam logic [15:0] PB_CTRL    = 16'h0000; // bit0 L0 enable, bit1 learning enable
  localparam logic [15:0] PB_QP_BASE = 16'h0010; // q+[d]: byte 2d = q[7:0], 2d+1 bit0 = q[8]
  localparam logic [15:0] PB_QM_BASE = 16'h0020; // q-[d], same layout
  localparam logic [15:0] PB_L2_BASE = 16'h0040; // 32 L2-synapse configs
  localparam logic [15:0] PB_L0_BASE = 16'h0200; // 512 L0 axon configs
  localparam logic [15:0] PB_L1_BASE = 16'h0400; // 512 L1 axon configs
  // Axon config byte: bit2 inhibitory, bits1:0 weight multiplier exponent (x1,x2,x4,x8).

  // Saturating 1..7 increment of the distance field.
  function automatic logic [2:0] dist_inc(input logic [2:0] d);
    return (d == 3'd7) ? 3'd7 : d + 3'd1;
  endfunction

endpackage
