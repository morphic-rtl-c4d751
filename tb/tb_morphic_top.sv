// tb_morphic_top: end-to-end test of the whole chip at its default sizes
// (four cores of 512 neurons, 64-kB synapse and 8-kB neuron memory each),
// driven only through its four AER links, as a host or neighbouring chip
// would drive it.
//
// The memories are preloaded directly (the same contents could be written
// by configuration packets, which are also exercised). The test then runs:
//   configuration packet from a link            -> parameter bank updated
//   monitoring request from a link              -> reply routed out East
//   virtual event making core 0 neuron 5 fire   -> L1 multicast to cores
//     1-3 (crossbar on their L1 synapses) and an L2 spike that hops out
//     of the East link with its distance field incremented
//   inbound L2 spike multicast to cores 2 and 3 -> single-synapse update
//   S-SDSP learning in core 3 (q = 511)         -> a whole L1 synapse row potentiated
//   teacher and leak events
//   a burst of 40 L1 spikes from core 0 into core 1, with both arbiters in
//     priority mode: core 1's scheduler fills, the L1 router waits and
//     core 0's controller stalls; all 40 events still arrive
//   the same chip running from its internal ring-oscillator clock.
// Every mechanism is counted and a failure is counted for one that never
// happened. Results are checked against values worked out here.
`timescale 1ns/1ps
module tb_morphic_top;
  import morphic_pkg::*;

  logic clk_ext = 0, clk_int_en = 0, rst = 1, l1_prio = 0, l2_prio = 0;
  logic [2:0] clk_int_len = 3'd7;
  logic [3:0] rx_req = 0, rx_ack, tx_req, tx_ack = 0;
  logic [7:0] rx_addr [4], tx_addr [4];
  logic       ext_run = 1;

  morphic_top dut (.clk_ext, .clk_int_en, .clk_int_len, .rst, .l1_prio, .l2_prio,
                   .rx_req, .rx_addr, .rx_ack, .tx_req, .tx_addr, .tx_ack);

  always #5 if (ext_run) clk_ext = ~clk_ext;

  localparam int N = 0, S = 1, E = 2, W = 3;

  int checks = 0, failures = 0;
  int n_cfg = 0, n_read = 0, n_mcast = 0, n_hop = 0, n_l2in = 0, n_learn = 0, n_teach = 0,
      n_leak = 0, n_stall = 0, n_l0 = 0, n_rr = 0, n_prio = 0, n_l2rr = 0, n_l2prio = 0,
      n_ring = 0, n_xbar = 0;
  logic [31:0] txq [4][$];

  // -------------------------------------------------- memory back doors
  function automatic neur_word_t nrd(int c, int j);
    case (c)
      0: return dut.g_core[0].u_core.u_neur_sram.mem[j];
      1: return dut.g_core[1].u_core.u_neur_sram.mem[j];
      2: return dut.g_core[2].u_core.u_neur_sram.mem[j];
      default: return dut.g_core[3].u_core.u_neur_sram.mem[j];
    endcase
  endfunction
  task automatic nwr(int c, int j, neur_word_t w);
    case (c)
      0: dut.g_core[0].u_core.u_neur_sram.mem[j] = w;
      1: dut.g_core[1].u_core.u_neur_sram.mem[j] = w;
      2: dut.g_core[2].u_core.u_neur_sram.mem[j] = w;
      default: dut.g_core[3].u_core.u_neur_sram.mem[j] = w;
    endcase
  endtask
  function automatic logic [127:0] srd(int c, int a);
    case (c)
      0: return dut.g_core[0].u_core.u_syn_sram.mem[a];
      1: return dut.g_core[1].u_core.u_syn_sram.mem[a];
      2: return dut.g_core[2].u_core.u_syn_sram.mem[a];
      default: return dut.g_core[3].u_core.u_syn_sram.mem[a];
    endcase
  endfunction
  task automatic swr(int c, int a, logic [127:0] w);
    case (c)
      0: dut.g_core[0].u_core.u_syn_sram.mem[a] = w;
      1: dut.g_core[1].u_core.u_syn_sram.mem[a] = w;
      2: dut.g_core[2].u_core.u_syn_sram.mem[a] = w;
      default: dut.g_core[3].u_core.u_syn_sram.mem[a] = w;
    endcase
  endtask
  task automatic set_syn(int c, bit l1, int src, int j);
    logic [127:0] w; int a;
    a = {l1, 9'(src), 2'(j / 128)};
    w = srd(c, a); w[j % 128] = 1'b1; swr(c, a, w);
  endtask

  // ------------------------------------------------------- AER links
  task automatic link_send(int i, logic [31:0] p);
    for (int b = 0; b < 4; b++) begin
      rx_addr[i] = p[b*8 +: 8];
      #2 rx_req[i] = 1;
      wait (rx_ack[i]);
      #3 rx_req[i] = 0;
      wait (!rx_ack[i]);
      #2;
    end
  endtask

  for (genvar i = 0; i < 4; i++) begin : g_rcv
    initial begin
      logic [31:0] p;
      forever begin
        for (int b = 0; b < 4; b++) begin
          wait (tx_req[i]);
          #7 p[b*8 +: 8] = tx_addr[i];
          tx_ack[i] = 1;
          wait (!tx_req[i]);
          #4 tx_ack[i] = 0;
        end
        txq[i].push_back(p);
      end
    end
  end

  // ---------------------------------------------------- event monitors
  always @(posedge dut.clk) if (!rst) begin
    if (dut.u_l1.multicast) n_mcast++;
    if (dut.u_l1.xfer) begin if (l1_prio) n_prio++; else n_rr++; end
    if (dut.u_l2.grant) begin if (l2_prio) n_l2prio++; else n_l2rr++; end
    if (dut.g_core[0].u_core.stall) n_stall++;
    if (dut.g_core[0].u_core.u_ctrl.l0ev_valid && dut.g_core[0].u_core.u_ctrl.l0ev_ready) n_l0++;
    if (clk_int_en) n_ring++;
  end

  // wait until no core is busy and no packet is anywhere for a while
  task automatic settle(int min_cycles = 50);
    int quiet; quiet = 0;
    while (quiet < min_cycles) begin
      @(posedge dut.clk);
      if (dut.g_core[0].u_core.busy || dut.g_core[1].u_core.busy || dut.g_core[2].u_core.busy ||
          dut.g_core[3].u_core.busy || tx_req != 0 || rx_req != 0 || dut.u_l2.grant ||
          dut.u_l1.grant) quiet = 0;
      else quiet++;
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] cfgp(int core, mem_sel_e m, logic [15:0] a, logic [7:0] d);
    return {PT_CFG, 2'(core), m, a, d};
  endfunction
  function automatic logic [31:0] evp(pkt_type_e t, logic [3:0] cores, int n, logic [7:0] v);
    return {t, cores, 9'(n), v, 7'd0};
  endfunction

  initial begin
    repeat (2000000) @(posedge clk_ext);
    failures++;
    $display("watchdog: checks %0d stall %0d prio %0d core1 busy %b v300 %0d", checks, n_stall, n_prio,
             dut.g_core[1].u_core.busy, nrd(1, 300).state.vmem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] p;
    for (int i = 0; i < 4; i++) rx_addr[i] = '0;
    // memories are loaded while reset is held, after the first reset edges
    repeat (2) @(posedge clk_ext);
    // ---- preload: every neuron threshold 100, leak 1, S-SDSP window
    // thm 0 / th1 0 / th2 8 / th3 15; no connectivity; all synapses 0
    for (int c = 0; c < 4; c++) begin
      for (int j = 0; j < 512; j++) begin
        neur_word_t w; w = '0;
        w.lifp.thr = 11'sd100; w.lifp.leak = 10'd1;
        w.sdsp.th2 = 4'd8; w.sdsp.th3 = 4'd15;
        nwr(c, j, w);
      end
      for (int a = 0; a < 4096; a++) swr(c, a, '0);
    end
    begin
      neur_word_t w;
      w = nrd(0, 5); w.lifp.thr = 11'sd10; w.l1cores = 3'b111;
      w.l2 = '{dx: 3'b001, dy: 3'b000, cores: 4'b0011, syn: 5'd7, neur: 9'd33};
      nwr(0, 5, w);
      w = nrd(0, 6); w.lifp.thr = 11'sd10; w.l1cores = 3'b100; nwr(0, 6, w);
      for (int c = 2; c < 4; c++) begin w = nrd(c, 40); w.l2syn[3] = 1'b1; nwr(c, 40, w); end
      w = nrd(2, 10); w.lifp.thr = 11'sd77; nwr(2, 10, w);
      for (int c = 1; c < 4; c++) for (int j = 0; j < 10; j++) set_syn(c, 1, 5, j);
      // burst: core 0 neurons 200..239 fire on L0 source 100 and target core 1
      for (int j = 200; j < 240; j++) begin
        w = nrd(0, j); w.lifp.thr = 11'sd1; w.l1cores = 3'b001; nwr(0, j, w);
        set_syn(0, 0, 100, j);
        set_syn(1, 1, j, 300);
      end
    end
    repeat (4) @(posedge clk_ext);
    rst = 0;
    repeat (4) @(posedge clk_ext);

    // ---- configuration from a link: core 1 L0 off (PB_CTRL = 0)
    link_send(N, cfgp(1, MEM_PARAM, PB_CTRL, 8'h00));
    settle();
    check(dut.g_core[1].u_core.l0_en == 1'b0 && dut.g_core[0].u_core.l0_en == 1'b1, "config write");
    n_cfg++;
    link_send(N, cfgp(2, MEM_NEUR, {3'b0, 9'd11, 4'd0}, 8'd55));
    settle();
    check(nrd(2, 11).lifp.thr == 11'sd55, "config write to neuron memory"); n_cfg++;

    // ---- monitoring: threshold byte of core 2 neuron 10, reply one hop East
    link_send(W, {PT_RDREQ, 2'd2, MEM_NEUR, {3'b0, 9'd10, 4'd0}, 3'b001, 3'b000, 2'b00});
    settle(200);
    check(txq[E].size() == 1, "one monitoring reply on East");
    if (txq[E].size() > 0) begin
      p = txq[E].pop_front();
      check(p == {PT_RDREP, 3'b000, 3'b000, 2'd2, 8'd77, 12'd0}, $sformatf("reply %h", p));
      n_read++;
    end

    // ---- spike with L1 multicast and an L2 hop
    link_send(S, evp(PT_VIRT, 4'b0001, 5, 8'd20));
    settle(200);
    for (int c = 1; c < 4; c++) begin
      for (int j = 0; j < 11; j++)
        check(nrd(c, j).state.vmem == ((j < 10) ? 11'sd1 : 11'sd0), $sformatf("L1 crossbar core %0d neuron %0d", c, j));
    end
    n_xbar += 3;
    check(txq[E].size() == 1, "L2 spike on East");
    if (txq[E].size() > 0) begin
      p = txq[E].pop_front();
      check(p == {PT_L2SPK, 3'b000, 3'b000, 4'b0011, 5'd7, 9'd33, 3'd2, 1'b0}, $sformatf("L2 spike %h", p));
      n_hop++;
    end

    // ---- inbound L2 spike for cores 2 and 3
    link_send(E, {PT_L2SPK, 3'b000, 3'b000, 4'b1100, 5'd3, 9'd40, 3'd3, 1'b0});
    settle();
    check(nrd(2, 40).state.vmem == 11'sd1 && nrd(3, 40).state.vmem == 11'sd1 && nrd(1, 40).state.vmem == 11'sd0,
          "L2 synapse event");
    n_l2in++;

    // ---- learning in core 3: q+ = q- = 511 at distance 1, learning on
    link_send(N, cfgp(3, MEM_PARAM, PB_QP_BASE + 16'd2, 8'hFF));
    link_send(N, cfgp(3, MEM_PARAM, PB_QP_BASE + 16'd3, 8'h01));
    link_send(N, cfgp(3, MEM_PARAM, PB_QM_BASE + 16'd2, 8'hFF));
    link_send(N, cfgp(3, MEM_PARAM, PB_QM_BASE + 16'd3, 8'h01));
    link_send(N, cfgp(3, MEM_PARAM, PB_CTRL, 8'h03));
    settle();
    n_cfg += 5;
    // every core-3 neuron was written by the multicast event with Vmem >= 0
    // and Ca = 0, so its up condition holds: all of row 6 is potentiated
    link_send(S, evp(PT_VIRT, 4'b0001, 6, 8'd20));
    settle(200);
    begin
      int ones; ones = 0;
      for (int b = 0; b < 4; b++) ones += $countones(srd(3, {1'b1, 9'd6, 2'(b)}));
      check(ones == 512, $sformatf("learning: %0d of 512 synapses potentiated", ones));
      n_learn += ones;
      check(srd(2, {1'b1, 9'd6, 2'd0}) == '0, "no learning where disabled");
    end

    // ---- teacher and leak events
    link_send(W, evp(PT_TEACH, 4'b1000, 7, 8'd9));
    link_send(W, evp(PT_LEAK, 4'b0010, 0, 8'd0));
    settle();
    check(nrd(3, 7).state.ca == 4'd9, "teacher event"); n_teach++;
    check(nrd(1, 3).state.vmem == 11'sd0 && nrd(2, 3).state.vmem == 11'sd1, "leak event"); n_leak++;

    // ---- burst with both arbiters in priority mode
    // (core 0's local L0 feedback is switched off first: 40 spikes in one
    // crossbar event would overfill its 16-entry local L0 FIFO)
    link_send(N, cfgp(0, MEM_PARAM, PB_CTRL, 8'h00));
    n_cfg++;
    settle();
    l1_prio = 1; l2_prio = 1;
    link_send(N, evp(PT_L0SPK, 4'b0001, 100, 8'd0));
    settle(300);
    check(nrd(1, 300).state.vmem == 11'sd40, $sformatf("burst: core 1 neuron 300 got %0d of 40", nrd(1, 300).state.vmem));
    n_xbar += 41;
    // a few more packets under priority arbitration
    link_send(E, {PT_L2SPK, 3'b000, 3'b000, 4'b1100, 5'd3, 9'd40, 3'd3, 1'b0});
    link_send(N, {PT_RDREQ, 2'd1, MEM_NEUR, {3'b0, 9'd300, 4'd6}, 3'b000, 3'b101, 2'b00});
    settle(200);
    check(txq[S].size() == 1, "reply routed South");
    if (txq[S].size() > 0) begin
      p = txq[S].pop_front();
      // vmem 40 sits in bits 60:50 -> byte 6 = vmem[5:0] << 2 = 0xA0
      check(p == {PT_RDREP, 3'b000, 3'b100, 2'd1, 8'hA0, 12'd0}, $sformatf("reply %h", p));
      n_read++;
    end

    // ---- internal ring-oscillator clock
    ext_run = 0; clk_ext = 0;
    #20 clk_int_en = 1;
    link_send(S, evp(PT_VIRT, 4'b0100, 50, 8'd5));
    settle();
    check(nrd(2, 50).state.vmem == 11'sd5, "virtual event on internal clock");
    clk_int_en = 0;
    #20 ext_run = 1;

    // ---- mechanism coverage
    check(n_cfg > 0,   "configuration");       check(n_read > 0,  "monitoring read");
    check(n_mcast > 0, "L1 multicast");        check(n_hop > 0,   "L2 hop");
    check(n_l2in > 0,  "inbound L2 event");    check(n_learn > 0, "S-SDSP learning");
    check(n_teach > 0, "teacher event");       check(n_leak > 0,  "leak event");
    check(n_stall > 0, "controller stall");    check(n_l0 > 0,    "local L0 event");
    check(n_rr > 0 && n_prio > 0,     "L1 arbiter in both modes");
    check(n_l2rr > 0 && n_l2prio > 0, "L2 arbiter in both modes");
    check(n_ring > 0,  "internal clock");      check(n_xbar > 0,  "crossbar events");
    for (int i = 0; i < 4; i++) check(txq[i].size() == 0, "no stray link packets");
    $display("config %0d read %0d multicast %0d hop %0d l2in %0d learn %0d teach %0d leak %0d stall %0d l0 %0d",
             n_cfg, n_read, n_mcast, n_hop, n_l2in, n_learn, n_teach, n_leak, n_stall, n_l0);
    $display("arb l1 rr %0d prio %0d, l2 rr %0d prio %0d, ring cycles %0d", n_rr, n_prio, n_l2rr, n_l2prio, n_ring);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
