// tb_morphic_core: one core (L0 router, controller, SRAMs, up/down
// registers, parameter bank) driven through its 32-bit packet input and
// checked against a testbench model of the neuron and synapse memories.
//
// The neuron and synapse SRAMs are loaded directly (as the chip would be
// through configuration packets, which are also tested here on a few
// bytes). After every phase the whole neuron SRAM (LIF state) and synapse
// SRAM are compared with the model, and every 40-bit output packet is
// compared with the expected spike or monitoring-reply packet.
// Phases: configuration write + monitoring read-back, L1 crossbar event
// (latency 1025 clocks), virtual, L2 and teacher events, leak event,
// S-SDSP learning on a crossbar event (q = 511, so the learning rule is
// deterministic), local L0 chains, and back-pressure from the output link
// that makes the controller stall.
module tb_morphic_core;
  import morphic_pkg::*;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy, stall;
  logic [31:0] in_pkt = '0;
  logic [39:0] out_pkt;
  logic [2:0]  out_count;

  morphic_core #(.CORE_ID(2'd2)) dut (.clk, .rst, .in_valid, .in_pkt, .in_ready, .out_valid,
                                     .out_pkt, .out_ready, .out_count, .busy, .stall);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, stall_cycles = 0, busy_cycles = 0;

  // ------------------------------------------------------------- model
  neur_word_t   nwm [512];
  logic [127:0] sm  [4096];
  logic         udu [512], udd [512];
  logic         m_l0 = 1, m_learn = 0;
  logic [8:0]   m_qp [8], m_qm [8];
  logic [2:0]   m_ax0 [512], m_ax1 [512], m_l2 [32];
  logic [39:0]  exp_out [$];
  logic [8:0]   loc_q [$];

  function automatic logic signed [12:0] contrib_of(logic w, logic [2:0] cfg);
    logic signed [12:0] mag;
    mag = 13'sd1 <<< cfg[1:0];
    if (!w) return 0;
    return cfg[2] ? -mag : mag;
  endfunction

  // one neuron update (op 1 integrate, 2 leak, 3 teacher), as the chip's LIF
  task automatic neuron(int j, int op, logic signed [12:0] val, logic [3:0] tca);
    neur_word_t w;
    logic signed [12:0] s;
    logic spk;
    w = nwm[j];
    spk = 0;
    if (!w.lifp.dis) begin
      if (op == 1) begin
        s = 13'(w.state.vmem) + val;
        if (s > 1023) s = 1023;
        if (s < -1024) s = -1024;
        if (s >= 13'(w.lifp.thr)) begin
          spk = 1; w.state.vmem = 0;
          if (w.state.ca != 4'hF) w.state.ca++;
        end else w.state.vmem = 11'(s);
      end else if (op == 2) begin
        s = 13'(w.state.vmem);
        if (s > 0)      s = (s > 13'(w.lifp.leak)) ? s - 13'(w.lifp.leak) : 0;
        else if (s < 0) s = (-s > 13'(w.lifp.leak)) ? s + 13'(w.lifp.leak) : 0;
        w.state.vmem = 11'(s);
        if (w.sdsp.ca_leak != 0) begin
          if (int'(w.state.ca_cnt) + 1 >= int'(w.sdsp.ca_leak)) begin
            w.state.ca_cnt = 0;
            if (w.state.ca != 0) w.state.ca--;
          end else w.state.ca_cnt++;
        end
      end else if (op == 3) w.state.ca = tca;
    end
    if (spk) begin
      if (m_l0) loc_q.push_back(9'(j));
      if (w.l1cores != 0 || w.l2.cores != 0) exp_out.push_back({OUT_SPIKE, 2'b00, w.l1cores, w.l2, 9'(j)});
    end
    udu[j] = (w.state.vmem >= w.sdsp.thm) && w.state.ca >= w.sdsp.th1 && w.state.ca < w.sdsp.th3;
    udd[j] = (w.state.vmem <  w.sdsp.thm) && w.state.ca >= w.sdsp.th1 && w.state.ca < w.sdsp.th2;
    nwm[j] = w;
  endtask

  function automatic logic learn(logic w, int j, int d);
    // q = 511 for every distance in this testbench: zeta is always 1
    if (!m_learn || m_qp[d] != 9'h1FF || m_qm[d] != 9'h1FF) return w;
    return w ? !udd[j] : udu[j];
  endfunction

  task automatic model_event(logic [31:0] p);
    ev_pkt_t e; l2spk_pkt_t l;
    e = ev_pkt_t'(p); l = l2spk_pkt_t'(p);
    case (e.ptype)
      PT_L0SPK, PT_L1SPK: begin
        int l01; l01 = (e.ptype == PT_L1SPK);
        for (int j = 0; j < 512; j++) begin
          int a; logic w; logic [2:0] c;
          a = {l01[0], e.neur, 2'(j >> 7)};
          w = sm[a][j % 128];
          c = l01 ? m_ax1[e.neur] : m_ax0[e.neur];
          sm[a][j % 128] = learn(w, j, l01);
          neuron(j, 1, contrib_of(w, c), 0);
        end
      end
      PT_L2SPK: begin
        logic w; w = nwm[l.neur].l2syn[l.syn];
        nwm[l.neur].l2syn[l.syn] = learn(w, l.neur, l.d);
        neuron(l.neur, 1, contrib_of(w, m_l2[l.syn]), 0);
      end
      PT_VIRT:  neuron(e.neur, 1, 13'(signed'(e.value)), 0);
      PT_TEACH: neuron(e.neur, 3, 0, e.value[3:0]);
      PT_LEAK:  for (int j = 0; j < 512; j++) neuron(j, 2, 0, 0);
      default: ;
    endcase
  endtask

  // --------------------------------------------------------- stimulus
  task automatic send(logic [31:0] p);
    @(negedge clk);
    in_valid = 1; in_pkt = p;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_idle();
    int quiet; quiet = 0;
    while (quiet < 8) begin
      @(negedge clk);
      if (!busy && !dut.u_l0.sched_valid && !dut.u_l0.cfg_valid && !dut.u_l0.rd_valid
          && !out_valid) quiet++;
      else quiet = 0;
    end
  endtask

  // model an event (and the local L0 chain it starts) and send it
  task automatic ev(logic [31:0] p);
    model_event(p);
    while (loc_q.size() > 0) model_event({PT_L0SPK, 4'b0, loc_q.pop_front(), 15'b0});
    send(p);
    wait_idle();
  endtask

  task automatic cfg(mem_sel_e m, logic [15:0] a, logic [7:0] d);
    if (m == MEM_PARAM) begin
      if (a == PB_CTRL) begin m_l0 = d[0]; m_learn = d[1]; end
      if (a >= PB_QP_BASE && a < PB_QP_BASE + 16) begin
        if (a[0]) m_qp[a[3:1]][8] = d[0]; else m_qp[a[3:1]][7:0] = d;
      end
      if (a >= PB_QM_BASE && a < PB_QM_BASE + 16) begin
        if (a[0]) m_qm[a[3:1]][8] = d[0]; else m_qm[a[3:1]][7:0] = d;
      end
      if (a >= PB_L2_BASE && a < PB_L2_BASE + 32) m_l2[a - PB_L2_BASE] = d[2:0];
      if (a >= PB_L0_BASE && a < PB_L0_BASE + 512) m_ax0[a - PB_L0_BASE] = d[2:0];
      if (a >= PB_L1_BASE && a < PB_L1_BASE + 512) m_ax1[a - PB_L1_BASE] = d[2:0];
    end else if (m == MEM_NEUR) begin
      logic [127:0] t; t = nwm[a[12:4]]; t[a[3:0]*8 +: 8] = d; nwm[a[12:4]] = t;
      udu[a[12:4]] = (nwm[a[12:4]].state.vmem >= nwm[a[12:4]].sdsp.thm) && nwm[a[12:4]].state.ca >= nwm[a[12:4]].sdsp.th1 && nwm[a[12:4]].state.ca < nwm[a[12:4]].sdsp.th3;
      udd[a[12:4]] = (nwm[a[12:4]].state.vmem <  nwm[a[12:4]].sdsp.thm) && nwm[a[12:4]].state.ca >= nwm[a[12:4]].sdsp.th1 && nwm[a[12:4]].state.ca < nwm[a[12:4]].sdsp.th2;
    end else begin
      sm[a[15:4]][a[3:0]*8 +: 8] = d;
    end
    send({PT_CFG, 2'd2, m, a, d});
  endtask

  task automatic rdreq(mem_sel_e m, logic [15:0] a, logic [5:0] ret);
    logic [7:0] d;
    rdrep_pkt_t r;
    d = (m == MEM_NEUR) ? 8'(128'(nwm[a[12:4]]) >> (a[3:0]*8)) :
        (m == MEM_SYN)  ? 8'(sm[a[15:4]] >> (a[3:0]*8)) : 8'h00;
    r = '0; r.ptype = PT_RDREP; r.dx = ret[5:3]; r.dy = ret[2:0]; r.core = 2'd2; r.data = d;
    exp_out.push_back({OUT_REPLY, 6'b0, 32'(r)});
    send({PT_RDREQ, 2'd2, m, a, ret, 2'b00});
    wait_idle();
  endtask

  task automatic compare(string phase);
    int bad; bad = 0;
    for (int j = 0; j < 512; j++) begin
      neur_word_t h; h = neur_word_t'(dut.u_neur_sram.mem[j]);
      if (h != nwm[j]) begin
        bad++;
        if (bad < 4) $display("%s: neuron %0d rtl v=%0d ca=%0d model v=%0d ca=%0d", phase, j,
                              h.state.vmem, h.state.ca, nwm[j].state.vmem, nwm[j].state.ca);
      end
    end
    for (int a = 0; a < 4096; a++) if (dut.u_syn_sram.mem[a] !== sm[a]) begin
      bad++;
      if (bad < 4) $display("%s: synapse word %0d differs", phase, a);
    end
    checks++;
    if (bad != 0) failures++;
    checks++;
    if (exp_out.size() != 0) begin
      failures++;
      $display("%s: %0d expected output packets missing", phase, exp_out.size());
      exp_out.delete();
    end
  endtask

  // output monitor
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    checks++;
    if (exp_out.size() == 0 || out_pkt !== exp_out[0]) begin
      failures++;
      $display("unexpected output %h (expected %h)", out_pkt, exp_out.size() ? exp_out[0] : 40'h0);
    end
    if (exp_out.size() > 0) void'(exp_out.pop_front());
  end

  always @(posedge clk) begin
    if (stall) stall_cycles++;
    if (busy) busy_cycles++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    // memories are loaded while reset is held, after the first reset edge
    repeat (2) @(negedge clk);
    for (int i = 0; i < 8; i++) begin m_qp[i] = 0; m_qm[i] = 0; end
    for (int i = 0; i < 512; i++) begin m_ax0[i] = 0; m_ax1[i] = 0; end
    for (int i = 0; i < 32; i++) m_l2[i] = 0;
    for (int j = 0; j < 512; j++) begin
      neur_word_t w;
      w = '0;
      w.l2syn = {$urandom};
      w.lifp.thr = 11'(20 + $urandom % 40);
      w.lifp.leak = 10'(1 + $urandom % 4);
      w.lifp.dis = (j == 300);
      w.sdsp.thm = 11'sd0; w.sdsp.th1 = 4'd0; w.sdsp.th2 = 4'd8; w.sdsp.th3 = 4'd15;
      w.sdsp.ca_leak = 4'(j % 3);
      w.state.vmem = 11'($signed(($urandom % 60)) - 30);
      if (j % 37 == 0) begin
        w.l1cores = 3'($urandom); w.l2 = l2_conn_t'($urandom); w.l2.cores = 4'($urandom % 16);
      end
      nwm[j] = w; udu[j] = 0; udd[j] = 0;
      dut.u_neur_sram.mem[j] = w;
    end
    for (int a = 0; a < 4096; a++) begin
      sm[a] = {$urandom, $urandom, $urandom, $urandom};
      dut.u_syn_sram.mem[a] = sm[a];
    end
    repeat (3) @(negedge clk);
    rst = 0;

    // configuration and monitoring
    cfg(MEM_PARAM, PB_CTRL, 8'h00);                 // L0 off, learning off
    cfg(MEM_NEUR, {3'b0, 9'd5, 4'd9}, 8'hA5);       // byte 9 of neuron 5
    cfg(MEM_NEUR, {3'b0, 9'd5, 4'd0}, 8'd40);       // threshold low byte
    cfg(MEM_SYN, {12'd1234, 4'd3}, 8'h3C);
    cfg(MEM_PARAM, PB_L1_BASE + 16'd7, 8'd1);       // L1 axon 7: x2
    cfg(MEM_PARAM, PB_L1_BASE + 16'd8, 8'd4);       // L1 axon 8: inhibitory
    cfg(MEM_PARAM, PB_L2_BASE + 16'd3, 8'd2);       // L2 synapse 3: x4
    wait_idle();
    rdreq(MEM_NEUR, {3'b0, 9'd5, 4'd9}, 6'o25);
    rdreq(MEM_NEUR, {3'b0, 9'd5, 4'd0}, 6'o00);
    rdreq(MEM_SYN, {12'd1234, 4'd3}, 6'o71);
    rdreq(MEM_NEUR, {3'b0, 9'd77, 4'd12}, 6'o13);
    compare("config"); $display("phase config done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    // crossbar events, with latency check
    t0 = busy_cycles;
    ev({PT_L1SPK, 4'b0, 9'd7, 8'd0, 7'd0});
    checks++; if (busy_cycles - t0 != 1024) begin failures++; $display("xbar busy %0d", busy_cycles - t0); end
    ev({PT_L1SPK, 4'b0, 9'd8, 8'd0, 7'd0});
    for (int k = 0; k < 6; k++) ev({PT_L1SPK, 4'b0, 9'($urandom), 8'd0, 7'd0});
    compare("crossbar"); $display("phase crossbar done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    // single-neuron events
    for (int k = 0; k < 40; k++) begin
      logic [8:0] n; n = (k < 4) ? 9'(37 * k) : 9'($urandom);
      ev({PT_VIRT, 4'b0, n, 8'($urandom % 90), 7'd0});
      ev({PT_VIRT, 4'b0, n, 8'(-($urandom % 20)), 7'd0});
      ev({PT_L2SPK, 3'd0, 3'd0, 4'b0100, 5'($urandom), n, 3'($urandom % 4), 1'b0});
      ev({PT_L2SPK, 3'd0, 3'd0, 4'b0100, 5'd3, n, 3'd2, 1'b0});
      ev({PT_TEACH, 4'b0, n, 8'($urandom), 7'd0});
    end
    compare("single-neuron"); $display("phase single-neuron done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    ev({PT_LEAK, 4'b0, 9'd0, 8'd0, 7'd0});
    ev({PT_LEAK, 4'b0, 9'd0, 8'd0, 7'd0});
    compare("leak"); $display("phase leak done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    // S-SDSP learning with q = 511 at distances 0, 1, 2
    for (int d = 0; d < 3; d++) begin
      cfg(MEM_PARAM, PB_QP_BASE + 16'(2*d), 8'hFF); cfg(MEM_PARAM, PB_QP_BASE + 16'(2*d+1), 8'h01);
      cfg(MEM_PARAM, PB_QM_BASE + 16'(2*d), 8'hFF); cfg(MEM_PARAM, PB_QM_BASE + 16'(2*d+1), 8'h01);
    end
    cfg(MEM_PARAM, PB_CTRL, 8'h02);
    for (int k = 0; k < 4; k++) ev({PT_L1SPK, 4'b0, 9'($urandom), 8'd0, 7'd0});
    for (int k = 0; k < 20; k++) ev({PT_L2SPK, 3'd0, 3'd0, 4'b0100, 5'($urandom), 9'($urandom), 3'd2, 1'b0});
    compare("learning"); $display("phase learning done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    // local L0 chains (learning off). The L0 synapse rows are cleared
    // except s -> s+1 -> s+2 for the sources s used, so a chain is finite.
    for (int a = 0; a < 2048; a++) begin sm[a] = '0; dut.u_syn_sram.mem[a] = '0; end
    for (int j = 0; j < 10; j++) for (int k = 0; k < 2; k++) begin
      int s; s = j * 50 + k;
      sm[{1'b0, 9'(s), 2'((s + 1) / 128)}][(s + 1) % 128] = 1'b1;
      dut.u_syn_sram.mem[{1'b0, 9'(s), 2'((s + 1) / 128)}][(s + 1) % 128] = 1'b1;
      cfg(MEM_PARAM, PB_L0_BASE + 16'(s), 8'd3);           // x8
    end
    cfg(MEM_PARAM, PB_CTRL, 8'h01);
    for (int k = 0; k < 3; k++) begin
      for (int j = 0; j < 10; j++) ev({PT_VIRT, 4'b0, 9'(j * 50), 8'd120, 7'd0});
    end
    compare("L0 chain"); $display("phase L0 chain done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    // back-pressure: 20 neurons with L1 targets fire while the output
    // link does not accept
    cfg(MEM_PARAM, PB_CTRL, 8'h00);
    wait_idle();
    for (int j = 0; j < 20; j++) begin
      cfg(MEM_NEUR, {3'b0, 9'(j * 3), 4'd8}, 8'h20);   // l1cores = 1 (bit 69 = byte 8 bit 5)
      cfg(MEM_NEUR, {3'b0, 9'(j * 3), 4'd0}, 8'd1);    // threshold 1
      cfg(MEM_NEUR, {3'b0, 9'(j * 3), 4'd1}, 8'd0);
      cfg(MEM_NEUR, {3'b0, 9'(j * 3), 4'd6}, 8'd0);    // vmem = 0 (bits 50..)
      cfg(MEM_NEUR, {3'b0, 9'(j * 3), 4'd7}, 8'd0);
      sm[{1'b1, 9'd400, 2'(j * 3 / 128)}][(j * 3) % 128] = 1'b1;
      dut.u_syn_sram.mem[{1'b1, 9'd400, 2'(j * 3 / 128)}][(j * 3) % 128] = 1'b1;
    end
    wait_idle();
    out_ready = 0;
    model_event({PT_L1SPK, 4'b0, 9'd400, 8'd0, 7'd0});
    send({PT_L1SPK, 4'b0, 9'd400, 8'd0, 7'd0});
    t0 = stall_cycles;
    repeat (1500) @(negedge clk);
    checks++; if (stall_cycles == t0) begin failures++; $display("no stall"); end
    out_ready = 1;
    wait_idle();
    compare("stall"); $display("phase stall done t=%0t checks=%0d failures=%0d", $time, checks, failures);

    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
