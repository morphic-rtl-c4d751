// sram_sp: single-port synchronous SRAM, one access per clock.
//
// Stands for the foundry single-port SRAM macros of each core: the 64-kB
// synapse memory (4096 words of 128 bits, L0 and L1 synapses) and the 8-kB
// neuron memory (512 words of 128 bits). A read (cs & !we) returns the word
// on rdata after the clock edge and rdata holds it until the next read, so
// the output behaves as registered. A write (cs & we) stores wdata and
// leaves rdata unchanged. Contents are not reset, as in a real macro.
// Written as an array so that it simulates and synthesizes to a memory.
module sram_sp #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     cs,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cs) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
