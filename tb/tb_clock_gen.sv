// tb_clock_gen: with the ring disabled the output must follow the external
// clock; with it enabled (external clock low) the output must oscillate
// with a half period of (2*len+3) stage delays for every length setting,
// and stop again when disabled.
`timescale 1ns/1ps
module tb_clock_gen;
  logic clk_ext = 0, clk_int_en = 0, clk;
  logic [2:0] len_sel = 0;
  int checks = 0, failures = 0;
  realtime t_last, hp;
  int edges;

  clock_gen #(.STAGE_DELAY(0.1ns)) dut (.clk_ext, .clk_int_en, .len_sel, .clk);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(clk) begin
    if (clk_int_en) begin
      hp = $realtime - t_last;
      edges++;
    end
    t_last = $realtime;
  end

  initial begin
    for (int k = 0; k < 20; k++) begin
      #5 clk_ext = ~clk_ext;
      #0.01;
      checks++; if (clk !== clk_ext) failures++;
    end
    clk_ext = 0;
    for (int l = 0; l < 8; l++) begin
      len_sel = 3'(l);
      #1 clk_int_en = 1;
      edges = 0;
      #50;
      clk_int_en = 0;
      checks++;
      if (edges < 4 || (hp < (2*l + 3) * 0.1 - 0.011) || (hp > (2*l + 3) * 0.1 + 0.011)) begin
        failures++;
        $display("len %0d: %0d edges, half period %0t", l, edges, hp);
      end
      #5;
      checks++; if (clk !== 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
