// tb_aer_link: an AER sender and an AER receiver joined back to back, each
// on its own clock (10 ns and 13 ns, so the handshake really crosses clock
// domains). Random 32-bit packets are offered at random times and the
// receiver's enable (its FIFO-not-full flag) is withdrawn at random; every
// packet must arrive once, intact and in order. Also checks that the sender
// reports link_busy during a transfer and that a receiver with en low does
// not acknowledge the first byte.
module tb_aer_link;
  logic clk_tx = 0, clk_rx = 0, rst = 1;
  logic pkt_valid = 0, pkt_ready, link_busy;
  logic [31:0] pkt = '0;
  logic req, ack, en = 1, rx_valid;
  logic [7:0] addr;
  logic [31:0] rx_pkt;
  logic [31:0] q [$];
  int checks = 0, failures = 0, sent = 0, got = 0, blocked = 0;

  aer_tx u_tx (.clk (clk_tx), .rst, .pkt_valid, .pkt, .pkt_ready,
               .aer_req (req), .aer_addr (addr), .aer_ack (ack), .link_busy);
  aer_rx u_rx (.clk (clk_rx), .rst, .en, .aer_req (req), .aer_addr (addr),
               .aer_ack (ack), .pkt_valid (rx_valid), .pkt (rx_pkt));

  always #5   clk_tx = ~clk_tx;
  always #6.5 clk_rx = ~clk_rx;

  initial begin
    #3000000;
    $display("timeout sent=%0d got=%0d req=%b ack=%b en=%b b=%0d busy=%b", sent, got, req, ack, en, u_rx.b_q, link_busy);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender side
  initial begin
    repeat (4) @(negedge clk_tx);
    rst = 0;
    while (sent < 300) begin
      logic take;
      if (!pkt_valid && ($urandom % 3 == 0)) begin
        pkt_valid = 1; pkt = $urandom;
      end
      #1;
      take = pkt_valid && pkt_ready;     // sampled by the next rising edge
      if (take) begin q.push_back(pkt); sent++; end
      @(negedge clk_tx);
      if (take) begin
        pkt_valid = 0;
        checks++; if (!link_busy) failures++;
      end
    end
    pkt_valid = 0;
  end

  // receiver enable: withdrawn at random, only between packets (as a FIFO
  // can only become full through this receiver's own pushes)
  always @(negedge clk_rx) if (!rst) begin
    if (!ack && u_rx.b_q == 2'd0) begin
      en <= ($urandom % 4) != 0;
      if (!en) blocked++;
    end
  end

  always @(posedge clk_rx) if (!rst && rx_valid) begin
    checks++;
    if (q.size() == 0 || rx_pkt !== q[0]) begin
      failures++;
      $display("mismatch got %h", rx_pkt);
    end
    if (q.size() > 0) void'(q.pop_front());
    got++;
  end

  // en low at the start of a packet: no ACK for its first byte
  property p_no_ack;
    @(posedge clk_rx) disable iff (rst) (!en && !ack && u_rx.b_q == 2'd0) |=> !ack;
  endproperty
  a_no_ack: assert property (p_no_ack) else failures++;

  initial begin
    wait (sent == 300);
    wait (got == 300 || $time > 2900000);
    repeat (10) @(posedge clk_rx);
    if (got != 300) $display("sent=%0d got=%0d t=%0t", sent, got, $time);
    checks++; if (got != 300) failures++;
    checks++; if (blocked == 0) failures++;
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
