// tb_ssdsp_updown_regs: writes random neuron states and S-SDSP thresholds
// and checks the stored up/down conditions of every neuron against the
// learning-rule conditions computed in the testbench.
module tb_ssdsp_updown_regs;
  import morphic_pkg::*;
  logic clk = 0, rst = 1, we = 0, up, down;
  logic [8:0] waddr, raddr;
  lif_state_t wstate;
  sdsp_param_t wsdsp;
  logic eu [512], ed [512];
  int checks = 0, failures = 0;

  ssdsp_updown_regs dut (.clk, .rst, .we, .waddr, .wstate, .wsdsp, .raddr, .up, .down);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin eu[i] = 0; ed[i] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 6000; k++) begin
      we = 1;
      waddr  = 9'($urandom);
      wstate = lif_state_t'($urandom);
      wsdsp  = sdsp_param_t'($urandom);
      wsdsp.th1 = 4'($urandom % 6);
      wsdsp.th2 = 4'(wsdsp.th1 + $urandom % 6);
      wsdsp.th3 = 4'(wsdsp.th2 + $urandom % 5);
      @(negedge clk);
      eu[waddr] = (wstate.vmem >= wsdsp.thm) && wstate.ca >= wsdsp.th1 && wstate.ca < wsdsp.th3;
      ed[waddr] = (wstate.vmem <  wsdsp.thm) && wstate.ca >= wsdsp.th1 && wstate.ca < wsdsp.th2;
      we = 0;
      raddr = 9'($urandom);
      if (k % 3 == 0) raddr = waddr;
      #1;
      checks++;
      if (up !== eu[raddr] || down !== ed[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
