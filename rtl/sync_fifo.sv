// sync_fifo: synchronous first-in first-out packet buffer.
//
// Used for every packet buffer of the router hierarchy: the input and output
// FIFOs of the L2 router, the output FIFO of the L0 packet encoder and the
// two scheduler FIFOs of each core. The head entry is always visible on
// rdata (show-ahead); pop removes it at the clock edge, push appends wdata.
// Push and pop may happen in the same cycle. count gives the occupancy used
// by the priority arbiters. Pushing when full or popping when empty is a
// protocol error, flagged by assertions.
// FIFO depths are not given for the chip; DEPTH is set by each user.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   push,
  input  logic [WIDTH-1:0]       wdata,
  input  logic                   pop,
  output logic [WIDTH-1:0]       rdata,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rp, wp;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= wdata;
        wp      <= inc(wp);
      end
      if (pop) rp <= inc(rp);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  assign rdata = mem[rp];
  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty = (count == '0);

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop  |-> !empty);

endmodule
