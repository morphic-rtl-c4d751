// tb_workload_fc_learning: the plastic fully-connected output layer of the
// 8-pattern convolutional experiment, trained on-line with S-SDSP and a
// Calcium teacher, on one core at its full size.
//
// 256 pooled features (the 4 x 64 pooling neurons of four cores) reach the
// core as L1 spike packets from source addresses 0..255; neurons 0..7 are
// the 8 class outputs, each with 256 plastic L1 synapses; the other
// neurons are disabled. All weights start at 0. Each pattern is a random
// binary feature vector (about one feature in four active).
//
// Training, one presentation per pattern p: teacher events set the Calcium
// of output p to 1 and of the others to 0; with theta1 = 1, theta2 = 1,
// theta3 = 15 and theta_m = -1024 only output p meets the potentiation
// condition, and with q+ = 511 its synapse from every active feature is
// set to 1 (deterministic form of the rule). A leak event with a leak step
// of 1023 then clears the membrane potentials. Thresholds are 1023, so no
// output fires while it learns.
// Test, learning off: each pattern is presented again, and the membrane
// potential of every output must equal the number of features it shares
// with the pattern it learned, so output p must win.
//
// Checks: the synapse SRAM after training against the expected weight
// matrix, every output's potential after each test pattern, the winner for
// each pattern, and the busy time: 1024 clocks per crossbar or leak event
// and 2 per teacher event.
module tb_workload_fc_learning;
  import morphic_pkg::*;

  localparam int NF = 256, NC = 8;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy, stall;
  logic [31:0] in_pkt = '0;
  logic [39:0] out_pkt;
  logic [2:0]  out_count;

  morphic_core #(.CORE_ID(2'd1)) dut (.clk, .rst, .in_valid, .in_pkt, .in_ready, .out_valid,
                                     .out_pkt, .out_ready, .out_count, .busy, .stall);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, busy_cycles = 0, n_xbar = 0, n_teach = 0, n_out = 0;
  bit pat [NC][NF];

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
      if (!busy && !dut.u_l0.sched_valid && !dut.u_l0.cfg_valid && !out_valid) quiet++;
      else quiet = 0;
    end
  endtask

  task automatic cfg(logic [15:0] a, logic [7:0] d);
    send({PT_CFG, 2'd1, MEM_PARAM, a, d});
    wait_idle();
  endtask

  task automatic present(int p);
    for (int f = 0; f < NF; f++)
      if (pat[p][f]) begin
        send({PT_L1SPK, 4'b0010, 9'(f), 15'b0});
        wait_idle();
        n_xbar++;
      end
  endtask

  task automatic clear_vmem();
    send({PT_LEAK, 4'b0010, 24'b0});
    wait_idle();
    n_xbar++;
  endtask

  always @(posedge clk) if (!rst) begin
    if (busy) busy_cycles++;
    if (out_valid) n_out++;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad, won;
    for (int p = 0; p < NC; p++)
      for (int f = 0; f < NF; f++) pat[p][f] = ($urandom_range(3) == 0);

    // memories are loaded while reset is held, after the first reset edges
    repeat (2) @(negedge clk);
    for (int j = 0; j < 512; j++) begin
      neur_word_t w;
      w = '0;
      w.lifp.dis  = (j >= NC);
      w.lifp.thr  = 11'sd1023;
      w.lifp.leak = 10'd1023;
      w.sdsp.thm  = -11'sd1024;
      w.sdsp.th1  = 4'd1;
      w.sdsp.th2  = 4'd1;
      w.sdsp.th3  = 4'd15;
      dut.u_neur_sram.mem[j] = w;
    end
    for (int a = 0; a < 4096; a++) dut.u_syn_sram.mem[a] = '0;
    repeat (3) @(negedge clk);
    rst = 0;

    // learning on, L0 feedback off; q+ = q- = 511 for distance 1 (L1 events)
    cfg(PB_CTRL, 8'b10);
    cfg(PB_QP_BASE + 2, 8'hFF); cfg(PB_QP_BASE + 3, 8'h01);
    cfg(PB_QM_BASE + 2, 8'hFF); cfg(PB_QM_BASE + 3, 8'h01);

    // training
    for (int p = 0; p < NC; p++) begin
      for (int c = 0; c < NC; c++) begin
        send({PT_TEACH, 4'b0010, 9'(c), 4'h0, (c == p) ? 4'd1 : 4'd0, 7'b0});
        wait_idle();
        n_teach++;
      end
      present(p);
      clear_vmem();
    end

    // learned weights: synapse (feature f -> output c) is 1 iff f is in pattern c
    bad = 0;
    for (int f = 0; f < 512; f++)
      for (int c = 0; c < NC; c++) begin
        logic w;
        w = dut.u_syn_sram.mem[{1'b1, 9'(f), 2'b00}][c];
        if (w != (f < NF && pat[c][f])) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; $display("%0d learned weights wrong", bad); end

    // test
    cfg(PB_CTRL, 8'b00);
    won = 0;
    for (int p = 0; p < NC; p++) begin
      int best, bestv;
      present(p);
      best = -1; bestv = -1;
      for (int c = 0; c < NC; c++) begin
        neur_word_t h;
        int ov;
        h = neur_word_t'(dut.u_neur_sram.mem[c]);
        ov = 0;
        for (int f = 0; f < NF; f++) if (pat[p][f] && pat[c][f]) ov++;
        checks++;
        if (int'(h.state.vmem) != ov) begin
          failures++;
          $display("pattern %0d output %0d: vmem %0d, expected %0d", p, c, h.state.vmem, ov);
        end
        if (int'(h.state.vmem) > bestv) begin bestv = int'(h.state.vmem); best = c; end
      end
      checks++;
      if (best != p) begin failures++; $display("pattern %0d classified as %0d", p, best); end
      else won++;
      clear_vmem();
    end

    checks++;
    if (busy_cycles != 1024 * n_xbar + 2 * n_teach) begin
      failures++; $display("busy %0d for %0d crossbar/leak and %0d teacher events", busy_cycles,
                           n_xbar, n_teach);
    end
    checks++;
    if (n_out != 0) begin failures++; $display("unexpected output packets"); end

    $display("crossbar and leak events %0d, patterns recognised %0d of %0d", n_xbar, won, NC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
