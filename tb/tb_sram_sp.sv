// tb_sram_sp: random writes and reads of the single-port SRAM at the
// synapse-memory size against an associative-array model; checks the
// one-clock read latency and that rdata holds across writes and idle clocks.
module tb_sram_sp;
  logic clk = 0, cs = 0, we = 0;
  logic [11:0] addr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [int];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(4096), .WIDTH(128)) dut (.clk, .cs, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] last;
    bit have_last = 0;
    @(negedge clk);
    for (int k = 0; k < 3000; k++) begin
      addr = 12'($urandom % 64);
      if (!model.exists(int'(addr)) || ($urandom % 2)) begin
        cs = 1; we = 1;
        wdata = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk);
        model[int'(addr)] = wdata;
        checks++;
        if (have_last && rdata !== last) failures++;     // write leaves rdata alone
      end else begin
        cs = 1; we = 0;
        @(negedge clk);
        last = model[int'(addr)];
        have_last = 1;
        checks++;
        if (rdata !== last) failures++;
        cs = 0;
        @(negedge clk);
        checks++;
        if (rdata !== last) failures++;               // held while idle
      end
      cs = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
