// aer_tx: 32-bit packet generation onto an 8-bit AER sender link.
//
// Takes a packet from the output FIFO and sends it as four 8-bit four-phase
// transactions, least significant byte first. ADDR and REQ are raised in
// the same clock (the receiver synchronizes REQ over two flip-flops, so
// ADDR is settled by the time REQ is seen). The incoming ACK is itself
// double-latched. Per byte: raise REQ with ADDR; on synchronized ACK high
// drop REQ; on synchronized ACK low move to the next byte. link_busy is
// high from the packet's fetch until the last ACK falls; a new packet is
// taken (pkt_ready) only when the link is free.
//
// Follows the chip: 8-bit AER, byte order, ADDR with REQ, double-latched
// ACK, link-busy flag. Own choices: reset values, registered outputs.
module aer_tx (
  input  logic        clk,
  input  logic        rst,
  input  logic        pkt_valid,
  input  logic [31:0] pkt,
  output logic        pkt_ready,
  output logic        aer_req,
  output logic [7:0]  aer_addr,
  input  logic        aer_ack,
  output logic        link_busy
);

  logic        ack_s1, ack_s2;
  logic [1:0]  b_q;
  logic [31:0] pkt_q;

  assign pkt_ready = !link_busy;
  assign aer_addr  = pkt_q[b_q*8 +: 8];

  always_ff @(posedge clk) begin
    if (rst) begin
      ack_s1    <= 1'b0;
      ack_s2    <= 1'b0;
      aer_req   <= 1'b0;
      link_busy <= 1'b0;
      b_q       <= '0;
      pkt_q     <= '0;
    end else begin
      ack_s1 <= aer_ack;
      ack_s2 <= ack_s1;
      if (!link_busy) begin
        if (pkt_valid) begin
          pkt_q     <= pkt;
          b_q       <= '0;
          aer_req   <= 1'b1;
          link_busy <= 1'b1;
        end
      end else if (aer_req && ack_s2) begin
        aer_req <= 1'b0;
      end else if (!aer_req && !ack_s2) begin
        if (b_q == 2'd3) link_busy <= 1'b0;
        else begin
          b_q     <= b_q + 2'd1;
          aer_req <= 1'b1;
        end
      end
    end
  end

  // ADDR must not change while REQ is high.
  a_addr_stable: assert property (@(posedge clk) disable iff (rst)
    (aer_req && $past(aer_req)) |-> $stable(aer_addr));

endmodule
