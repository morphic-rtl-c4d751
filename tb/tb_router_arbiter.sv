// tb_router_arbiter: checks round-robin order (each requester served in
// turn after the last one served) and greedy priority (fullest requester
// wins, lowest index on ties) against a testbench model.
module tb_router_arbiter;
  logic clk = 0, rst = 1, prio_mode = 0, accept = 0;
  logic [4:0] req;
  logic [3:0] occ [5];
  logic grant;
  logic [2:0] gidx;
  int checks = 0, failures = 0, last = 4;

  router_arbiter #(.N(5), .CW(4)) dut (.clk, .rst, .prio_mode, .req, .occ, .accept, .grant, .gidx);

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
    for (int k = 0; k < 4000; k++) begin
      int e; int best;
      prio_mode = (k >= 2000);
      req = 5'($urandom);
      for (int i = 0; i < 5; i++) occ[i] = 4'($urandom % 5);
      accept = ($urandom % 4) != 0;
      #1;
      e = -1;
      if (!prio_mode) begin
        for (int s = 1; s <= 5; s++) if (e < 0 && req[(last + s) % 5]) e = (last + s) % 5;
      end else begin
        best = -1;
        for (int i = 0; i < 5; i++) if (req[i] && int'(occ[i]) > best) begin best = occ[i]; e = i; end
      end
      checks++;
      if (grant !== (e >= 0) || (e >= 0 && gidx !== 3'(e))) begin
        failures++;
        if (failures < 5) $display("k=%0d mode=%0d req=%b exp=%0d got %b/%0d", k, prio_mode, req, e, grant, gidx);
      end
      if (e >= 0 && accept) last = e;   // pointer moves in both modes
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
