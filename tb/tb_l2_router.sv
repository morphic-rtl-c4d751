// tb_l2_router: the four AER links are driven by testbench 4-phase senders
// and read by testbench 4-phase receivers (with random response delays);
// the L1 side injects and drains packets with random back-pressure.
// Every packet's expected output port and content (dx/dy decremented on
// the routed axis, distance incremented on a hop, x before y; non-routed
// types from a link go to L1, from L1 are dropped) is computed by the
// testbench; each received packet must match an expected one at that port.
// Runs in round-robin and in priority mode.
module tb_l2_router;
  import morphic_pkg::*;
  logic clk = 0, rst = 1, prio_mode = 0;
  logic [3:0] rx_req = 0, rx_ack, tx_req, tx_ack = 0, link_busy;
  logic [7:0] rx_addr [4], tx_addr [4];
  logic l1_in_valid = 0, l1_in_ready, l1_out_valid, l1_out_ready = 0;
  logic [31:0] l1_in_pkt = 0, l1_out_pkt;
  logic [3:0] l1_out_count;
  logic [4:0] disp;
  logic [31:0] expq [5][$];
  int checks = 0, failures = 0, sent = 0, rcvd = 0, hops = 0;

  l2_router dut (.clk, .rst, .prio_mode, .rx_req, .rx_addr, .rx_ack, .tx_req, .tx_addr, .tx_ack,
                 .l1_in_valid, .l1_in_pkt, .l1_in_ready, .l1_out_valid, .l1_out_pkt,
                 .l1_out_ready, .l1_out_count, .link_busy, .dispatch_cnt_inc (disp));

  always #5 clk = ~clk;

  // expected port (0 N, 1 S, 2 E, 3 W, 4 L1, -1 dropped) and packet
  function automatic int route(logic [31:0] p, bit from_l1, output logic [31:0] q);
    l2spk_pkt_t s; s = l2spk_pkt_t'(p); q = p;
    if (s.ptype == PT_L2SPK || s.ptype == PT_RDREP) begin
      if (s.dx[1:0] != 0) begin
        s.dx[1:0]--; if (s.ptype == PT_L2SPK && s.d != 7) s.d++;
        q = 32'(s); return s.dx[2] ? 3 : 2;
      end
      if (s.dy[1:0] != 0) begin
        s.dy[1:0]--; if (s.ptype == PT_L2SPK && s.d != 7) s.d++;
        q = 32'(s); return s.dy[2] ? 1 : 0;
      end
      return 4;
    end
    return from_l1 ? -1 : 4;
  endfunction

  function automatic logic [31:0] rnd_pkt();
    logic [3:0] t;
    t = ($urandom % 3 != 0) ? PT_L2SPK : (($urandom % 2) ? PT_RDREP : 4'(2 + $urandom % 6));
    return {t, 28'($urandom)};
  endfunction

  task automatic expect_pkt(logic [31:0] p, bit from_l1);
    logic [31:0] q; int d;
    d = route(p, from_l1, q);
    if (d >= 0) expq[d].push_back(q);
    if (d >= 0 && d < 4) hops++;
  endtask

  task automatic found(int port, logic [31:0] p);
    int idx; idx = -1;
    foreach (expq[port][i]) if (idx < 0 && expq[port][i] == p) idx = i;
    checks++;
    if (idx < 0) begin failures++; $display("port %0d: unexpected %h", port, p); end
    else expq[port].delete(idx);
    rcvd++;
  endtask

  // link senders
  for (genvar i = 0; i < 4; i++) begin : g_link
    initial begin
      rx_addr[i] = 0;
      wait (!rst);
      repeat (150) begin
        logic [31:0] p;
        repeat ($urandom % 30) @(negedge clk);
        p = rnd_pkt();
        expect_pkt(p, 0); sent++;
        for (int b = 0; b < 4; b++) begin
          rx_addr[i] = p[b*8 +: 8];
          #3 rx_req[i] = 1;
          wait (rx_ack[i]);
          #4 rx_req[i] = 0;
          wait (!rx_ack[i]);
          #2;
        end
      end
    end
    // link receivers
    initial begin
      logic [31:0] p;
      forever begin
        for (int b = 0; b < 4; b++) begin
          wait (tx_req[i]);
          repeat ($urandom % 4) @(negedge clk);
          p[b*8 +: 8] = tx_addr[i];
          tx_ack[i] = 1;
          wait (!tx_req[i]);
          #3 tx_ack[i] = 0;
        end
        found(i, p);
      end
    end
  end

  // L1 side
  initial begin
    wait (!rst);
    repeat (300) begin
      @(negedge clk);
      l1_in_valid = 1; l1_in_pkt = rnd_pkt();
      #1;
      while (!l1_in_ready) begin @(negedge clk); #1; end
      expect_pkt(l1_in_pkt, 1); sent++;
      @(negedge clk);
      l1_in_valid = 0;
      repeat ($urandom % 8) @(negedge clk);
    end
  end
  always @(negedge clk) l1_out_ready <= ($urandom % 3) != 0;
  always @(posedge clk) if (!rst && l1_out_valid && l1_out_ready) found(4, l1_out_pkt);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d received %0d", sent, rcvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int left;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5000) @(negedge clk);
    prio_mode = 1;
    wait (sent == 900);
    left = 1;
    while (left != 0) begin
      repeat (200) @(negedge clk);
      left = 0;
      for (int p = 0; p < 5; p++) left += expq[p].size();
    end
    repeat (200) @(negedge clk);
    checks++; if (hops == 0) failures++;
    $display("sent %0d received %0d link hops %0d", sent, rcvd, hops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
