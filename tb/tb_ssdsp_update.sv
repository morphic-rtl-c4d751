// tb_ssdsp_update: checks the S-SDSP update rule cycle by cycle against a
// testbench model (its own serial LFSR, the comparison rnd <= q and the
// update rule), and checks the measured transition rate for one q.
module tb_ssdsp_update;
  import morphic_pkg::*;
  logic clk = 0, rst = 1;
  logic do_update = 0, up = 0, down = 0, w_b = 0;
  logic [8:0] q_plus = 0, q_minus = 0;
  logic w_next, zeta;
  int checks = 0, failures = 0;
  logic [16:0] s = 17'h1ACE1;

  ssdsp_update dut (.clk, .rst, .do_update, .up, .down, .q_plus, .q_minus, .w_b, .w_next, .zeta);

  always #5 clk = ~clk;

  function automatic logic [8:0] rnd_of(input logic [16:0] st);
    logic [8:0] y;
    for (int m = 0; m < 9; m++) begin
      logic fb;
      fb = st[16]; y[m] = fb;
      st = {st[15:0], fb}; st[3] = st[3] ^ fb;
    end
    return y;
  endfunction
  function automatic logic [16:0] adv(input logic [16:0] st);
    for (int m = 0; m < 9; m++) begin
      logic fb;
      fb = st[16]; st = {st[15:0], fb}; st[3] = st[3] ^ fb;
    end
    return st;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flips;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int k = 0; k < 3000; k++) begin
      logic [8:0] r, q;
      logic z, exp;
      up = 1'($urandom); down = 1'($urandom); w_b = 1'($urandom);
      q_plus = 9'($urandom); q_minus = 9'($urandom);
      do_update = ($urandom % 4) != 0;
      #1;
      r = rnd_of(s);
      q = w_b ? q_minus : q_plus;
      z = (r <= q);
      exp = w_b ? !(down && z) : (up && z);
      checks++;
      if (w_next !== exp || zeta !== z) begin
        failures++;
        if (failures < 5) $display("k=%0d w_b=%b up=%b down=%b r=%0d q=%0d got %b exp %b", k, w_b, up, down, r, q, w_next, exp);
      end
      @(negedge clk);
      if (do_update) s = adv(s);
    end
    // rate: w_b = 0, up = 1, q+ = 127 -> (127+1)/512 = 25 %
    flips = 0;
    w_b = 0; up = 1; down = 0; q_plus = 9'd127; do_update = 1;
    for (int k = 0; k < 4096; k++) begin
      #1; if (w_next) flips++;
      @(negedge clk);
    end
    checks++;
    if (flips < 900 || flips > 1150) begin
      failures++;
      $display("rate %0d / 4096, expected about 1024", flips);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
