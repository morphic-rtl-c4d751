// aer_rx: 32-bit packet acquisition from an 8-bit AER receiver link.
//
// An inter-chip link carries one 32-bit packet as four 8-bit address-event
// transactions, least significant byte first (Packet[7:0], [15:8],
// [23:16], [31:24]), each with a four-phase REQ/ACK handshake driven by an
// asynchronous sender. REQ passes through a two-flip-flop synchronizer
// (double latching) to limit metastability; ADDR is sampled once the
// synchronized REQ is high, which is safe because the sender holds ADDR
// until it sees ACK. Per byte: REQ seen high -> capture byte, raise ACK;
// REQ seen low -> drop ACK. After the fourth byte the packet is pushed
// (pkt_valid for one clock).
//
// en (not FIFO full) is checked only before the first byte: a packet is
// started only when there is room for it, so the FIFO full flag back-
// pressures the link by withholding ACK. The sole writer of that FIFO is
// this block, so room seen at the start is still there at the end.
//
// Follows the chip: 8-bit AER, 4 transactions per packet, byte order,
// double-latched REQ, FIFO-full enable. Own choices: reset values and the
// start-of-packet enable check.
module aer_rx (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic        aer_req,
  input  logic [7:0]  aer_addr,
  output logic        aer_ack,
  output logic        pkt_valid,
  output logic [31:0] pkt
);

  logic       req_s1, req_s2;
  logic [1:0] b_q;
  logic [23:0] lo_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      req_s1    <= 1'b0;
      req_s2    <= 1'b0;
      aer_ack   <= 1'b0;
      b_q       <= '0;
      lo_q      <= '0;
      pkt_valid <= 1'b0;
      pkt       <= '0;
    end else begin
      req_s1    <= aer_req;
      req_s2    <= req_s1;
      pkt_valid <= 1'b0;
      if (!aer_ack && req_s2 && (b_q != 2'd0 || en)) begin
        aer_ack <= 1'b1;
        if (b_q == 2'd3) pkt <= {aer_addr, lo_q};
        else             lo_q[b_q*8 +: 8] <= aer_addr;
      end else if (aer_ack && !req_s2) begin
        aer_ack <= 1'b0;
        b_q     <= b_q + 2'd1;
        if (b_q == 2'd3) pkt_valid <= 1'b1;
      end
    end
  end

endmodule
