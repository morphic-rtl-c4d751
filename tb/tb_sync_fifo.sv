// tb_sync_fifo: random push/pop traffic against a queue model; checks
// order, full/empty flags and the occupancy count, never pushing when full
// or popping when empty.
module tb_sync_fifo;
  logic clk = 0, rst = 1, push = 0, pop = 0;
  logic [31:0] wdata, rdata;
  logic full, empty;
  logic [3:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0, fulls = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(8)) dut (.clk, .rst, .push, .wdata, .pop, .rdata, .full, .empty, .count);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 5000; k++) begin
      int bias;
      bias = (k / 500) % 2 ? 3 : 1;
      push  = ($urandom % 4) < bias + 1 && q.size() < 8;
      pop   = ($urandom % 4) < 3 - bias + 1 && q.size() > 0;
      wdata = $urandom;
      checks++;
      if (full !== (q.size() == 8) || empty !== (q.size() == 0) || count !== 4'(q.size())) failures++;
      if (q.size() > 0) begin
        checks++;
        if (rdata !== q[0]) failures++;
      end
      if (full) fulls++;
      @(negedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
