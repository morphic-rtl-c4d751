// router_arbiter: selects one of N requesters for a router dispatcher.
//
// Two modes, chosen by prio_mode:
//   round-robin (0): the search starts just after the last requester that
//     was served, so every link is served in turn whatever its FIFO usage
//     and the waiting time is bounded;
//   priority (1): greedy; the requester with the highest FIFO occupancy
//     (occ) wins, ties going to the lowest index.
// grant/gidx are combinational from req and occ; accept tells the arbiter
// that the granted request was served this cycle, which moves the
// round-robin pointer past it.
//
// Both modes are the chip's; the occupancy measure, the tie rule and the
// pointer update on acceptance are this design's choices.
module router_arbiter #(
  parameter int unsigned N  = 5,
  parameter int unsigned CW = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 prio_mode,
  input  logic [N-1:0]         req,
  input  logic [CW-1:0]        occ [N],
  input  logic                 accept,
  output logic                 grant,
  output logic [$clog2(N)-1:0] gidx
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] last_q;

  always_comb begin
    logic [CW-1:0] best;
    logic [IW-1:0] j;
    j     = '0;
    grant = 1'b0;
    gidx  = '0;
    best  = '0;
    if (prio_mode) begin
      for (int i = 0; i < int'(N); i++) begin
        if (req[i] && (!grant || occ[i] > best)) begin
          grant = 1'b1;
          gidx  = IW'(i);
          best  = occ[i];
        end
      end
    end else begin
      for (int k = 1; k <= int'(N); k++) begin
        j = IW'((int'(last_q) + k) % int'(N));
        if (!grant && req[j]) begin
          grant = 1'b1;
          gidx  = IW'(j);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst)                  last_q <= IW'(N - 1);
    else if (grant && accept) last_q <= gidx;
  end

endmodule
