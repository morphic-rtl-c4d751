// tb_l1_router: the four core sources and the L2 source offer random
// packets (spikes with random L1/L2 targets, monitoring replies; from L2:
// spikes, test events, configuration/monitoring requests, stray replies)
// held until taken; the destinations accept at random. On every transfer
// the testbench's own decoding of the taken packet must match the
// delivered core mask, core-input packet and L2 packet. Also checks that
// every offered packet is eventually taken in both arbiter modes, that
// multicasts happen, that nothing is delivered without a source, and that
// the router takes one packet per clock when nothing blocks it.
module tb_l1_router;
  import morphic_pkg::*;
  logic clk = 0, rst = 1, prio_mode = 0;
  logic [3:0] c_valid = 0, c_ready, ci_valid, ci_ready;
  logic [39:0] c_pkt [4];
  logic [3:0] c_count [4];
  logic l2_valid = 0, l2_ready, lo_valid, lo_ready, multicast;
  logic [31:0] l2_pkt = 0, ci_pkt, lo_pkt;
  logic [3:0] l2_count;
  int checks = 0, failures = 0, taken = 0, mcasts = 0;

  l1_router dut (.clk, .rst, .prio_mode, .c_valid, .c_pkt, .c_ready, .c_count,
                 .l2_valid, .l2_pkt, .l2_ready, .l2_count, .ci_valid, .ci_pkt, .ci_ready,
                 .lo_valid, .lo_pkt, .lo_ready, .multicast);

  always #5 clk = ~clk;

  function automatic logic [39:0] rnd_core_pkt();
    if ($urandom % 5 == 0) return {OUT_REPLY, 6'b0, PT_RDREP, 28'($urandom)};
    return {OUT_SPIKE, 2'b00, 3'($urandom), 24'($urandom), 9'($urandom)}
           & (($urandom % 3 == 0) ? 40'hFF_FFFF_FFFF : 40'hFF_FC3F_FFFF); // often no L2
  endfunction

  function automatic logic [31:0] rnd_l2_pkt();
    logic [3:0] t;
    t = 4'(1 + $urandom % 9);
    return {t, 28'($urandom)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) begin c_pkt[c] = '0; c_count[c] = '0; end
    l2_count = 0;
    ci_ready = 4'hF; lo_ready = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 6000; k++) begin
      prio_mode = (k >= 3000);
      for (int c = 0; c < 4; c++) begin
        if (!c_valid[c] && $urandom % 2) begin c_valid[c] = 1; c_pkt[c] = rnd_core_pkt(); end
        c_count[c] = 4'($urandom % 5);
      end
      if (!l2_valid && $urandom % 2) begin l2_valid = 1; l2_pkt = rnd_l2_pkt(); end
      l2_count = 4'($urandom % 5);
      ci_ready = 4'($urandom) | 4'($urandom);
      lo_ready = ($urandom % 4) != 0;
      #1;
      // check this cycle's transfer
      begin
        int n; logic [3:0] em; logic eto; logic [31:0] eci, elo;
        n = 0; em = 0; eto = 0; eci = 0; elo = 0;
        for (int c = 0; c < 4; c++) if (c_ready[c]) begin
          out_spk_t o; o = out_spk_t'(c_pkt[c]); n++;
          checks++; if (!c_valid[c]) failures++;
          if (o.kind == OUT_SPIKE) begin
            for (int b = 0; b < 3; b++) if (o.l1cores[b]) em[(c + 1 + b) % 4] = 1;
            eci = {PT_L1SPK, 4'b0, o.src, 15'b0};
            eto = (o.l2.cores != 0);
            elo = {PT_L2SPK, o.l2.dx, o.l2.dy, o.l2.cores, o.l2.syn, o.l2.neur, 3'd1, 1'b0};
          end else begin eto = 1; elo = c_pkt[c][31:0]; end
        end
        if (l2_ready) begin
          logic [3:0] t; t = l2_pkt[31:28]; n++;
          checks++; if (!l2_valid) failures++;
          eci = l2_pkt;
          if (t == PT_L2SPK) em = l2_pkt[21:18];
          else if (t >= PT_L1SPK && t <= PT_LEAK || t == PT_L0SPK) em = l2_pkt[27:24];
          else if (t == PT_CFG || t == PT_RDREQ) em = 4'b0001 << l2_pkt[27:26];
        end
        checks++;
        if (n > 1) failures++;
        if (n == 1) begin
          checks++;
          if (ci_valid !== em || (em != 0 && ci_pkt !== eci) || lo_valid !== eto || (eto && lo_pkt !== elo)
              || ((ci_ready | ~em) != 4'hF) || (eto && !lo_ready)) begin
            failures++;
            if (failures < 5) $display("k=%0d mask %b/%b lo %b/%b", k, ci_valid, em, lo_valid, eto);
          end
          if ($countones(em) + eto > 1) begin
            mcasts++;
            checks++; if (!multicast) failures++;
          end
          taken++;
        end else begin
          checks++; if (ci_valid != 0 || lo_valid) failures++;
        end
      end
      @(negedge clk);
      for (int c = 0; c < 4; c++) if (c_ready[c]) c_valid[c] = 0;
      if (l2_ready) l2_valid = 0;
    end
    // drain: everything offered must be taken
    ci_ready = 4'hF; lo_ready = 1;
    repeat (20) begin
      @(negedge clk);
      for (int c = 0; c < 4; c++) if (c_ready[c]) c_valid[c] = 0;
      if (l2_ready) l2_valid = 0;
    end
    checks++; if (c_valid != 0 || l2_valid) failures++;
    checks++; if (mcasts == 0) failures++;
    // bandwidth: with every source offering and every destination ready,
    // one packet is taken in every clock (55 Mpackets/s at 55 MHz)
    for (int m = 0; m < 2; m++) begin
      int got;
      prio_mode = m[0];
      got = 0;
      c_valid = 4'hF; l2_valid = 1;
      for (int c = 0; c < 4; c++) c_pkt[c] = rnd_core_pkt();
      l2_pkt = rnd_l2_pkt();
      for (int k = 0; k < 200; k++) begin
        #1;
        got += $countones(c_ready) + (l2_ready ? 1 : 0);
        @(negedge clk);
        for (int c = 0; c < 4; c++) if (c_ready[c]) c_pkt[c] = rnd_core_pkt();
        if (l2_ready) l2_pkt = rnd_l2_pkt();
      end
      checks++;
      if (got != 200) begin failures++; $display("mode %0d: %0d packets in 200 clocks", m, got); end
    end
    c_valid = 0; l2_valid = 0;
    $display("transfers %0d multicasts %0d", taken, mcasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
