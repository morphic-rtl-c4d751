// tb_ulfsr: checks the 9-unfolded LFSR against a serial Galois LFSR
// (x^17 + x^3 + 1) stepped nine times per clock in the testbench, checks
// that a low enable freezes the output, and that the word sequence repeats
// after exactly 2^17-1 enabled clocks and not before.
module tb_ulfsr;
  logic clk = 0, rst = 1, en = 0;
  logic [8:0] rnd;
  int checks = 0, failures = 0;
  logic [16:0] ref_s;

  ulfsr dut (.clk, .rst, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [8:0] serial9(inout logic [16:0] s);
    logic [8:0] y;
    for (int m = 0; m < 9; m++) begin
      logic fb;
      fb   = s[16];
      y[m] = fb;
      s    = {s[15:0], fb};
      s[3] = s[3] ^ fb;
    end
    return y;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0] first, prev;
    logic [16:0] s0;
    int early;
    ref_s = 17'h1ACE1;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    en = 1;
    // serial equivalence
    for (int k = 0; k < 300; k++) begin
      logic [8:0] exp;
      s0  = ref_s;
      exp = serial9(ref_s);
      checks++;
      if (rnd !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch k=%0d rnd=%h exp=%h", k, rnd, exp);
      end
      @(negedge clk);
    end
    // enable low freezes the word
    en = 0;
    prev = rnd;
    repeat (5) @(negedge clk);
    checks++;
    if (rnd !== prev) failures++;
    // period: the state (seen through the next 2 words) comes back after 2^17-1 clocks
    en = 1;
    first = rnd;
    s0 = ref_s;
    early = 0;
    for (int k = 1; k < 131071; k++) begin
      @(negedge clk);
      void'(serial9(ref_s));
      if (ref_s == s0) early++;
    end
    @(negedge clk);
    void'(serial9(ref_s));
    checks++;
    if (early != 0 || ref_s != s0) failures++;
    checks++;
    if (rnd !== first) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
