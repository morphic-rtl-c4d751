// tb_param_bank: checks reset values, byte writes of the control register,
// the q+/q- tables per distance (9-bit values written as two bytes) and
// the L0, L1 and L2 axon configurations, reading each back on its port.
module tb_param_bank;
  import morphic_pkg::*;
  logic clk = 0, rst = 1, we = 0;
  logic [15:0] addr;
  logic [7:0] wdata;
  logic l0_en, learn_en, ax_l01;
  logic [2:0] distance, ax_cfg, l2_cfg;
  logic [8:0] q_plus, q_minus, ax_idx;
  logic [4:0] l2_idx;
  logic [8:0] eqp [8], eqm [8];
  logic [2:0] el0 [512], el1 [512], el2 [32];
  int checks = 0, failures = 0;

  param_bank dut (.clk, .rst, .we, .addr, .wdata, .l0_en, .learn_en, .distance, .q_plus, .q_minus,
                  .ax_l01, .ax_idx, .ax_cfg, .l2_idx, .l2_cfg);

  always #5 clk = ~clk;

  task automatic wr(input logic [15:0] a, input logic [7:0] d);
    addr = a; wdata = d; we = 1;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    checks++; if (l0_en !== 1 || learn_en !== 0) failures++;
    wr(PB_CTRL, 8'h02);
    checks++; if (l0_en !== 0 || learn_en !== 1) failures++;
    for (int d = 0; d < 8; d++) begin
      eqp[d] = 9'($urandom); eqm[d] = 9'($urandom);
      wr(PB_QP_BASE + 16'(2*d), eqp[d][7:0]); wr(PB_QP_BASE + 16'(2*d+1), {7'b0, eqp[d][8]});
      wr(PB_QM_BASE + 16'(2*d), eqm[d][7:0]); wr(PB_QM_BASE + 16'(2*d+1), {7'b0, eqm[d][8]});
    end
    for (int i = 0; i < 512; i++) begin
      el0[i] = 3'($urandom); el1[i] = 3'($urandom);
      wr(PB_L0_BASE + 16'(i), {5'b0, el0[i]});
      wr(PB_L1_BASE + 16'(i), {5'b0, el1[i]});
    end
    for (int i = 0; i < 32; i++) begin
      el2[i] = 3'($urandom);
      wr(PB_L2_BASE + 16'(i), {5'b0, el2[i]});
    end
    for (int d = 0; d < 8; d++) begin
      distance = 3'(d); #1;
      checks++; if (q_plus !== eqp[d] || q_minus !== eqm[d]) failures++;
    end
    for (int i = 0; i < 512; i++) begin
      ax_idx = 9'(i);
      ax_l01 = 0; #1; checks++; if (ax_cfg !== el0[i]) failures++;
      ax_l01 = 1; #1; checks++; if (ax_cfg !== el1[i]) failures++;
    end
    for (int i = 0; i < 32; i++) begin
      l2_idx = 5'(i); #1; checks++; if (l2_cfg !== el2[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
