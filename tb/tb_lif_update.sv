// tb_lif_update: directed and random checks of the LIF update (integrate,
// saturate, fire and reset, Calcium increment, leak toward zero, Calcium
// leak counter, teacher write, disabled neuron) against a testbench model.
module tb_lif_update;
  import morphic_pkg::*;
  lif_state_t state, nxt;
  lif_param_t lifp;
  logic [3:0] ca_leak, teach_ca;
  logic [1:0] op;
  logic signed [12:0] value;
  logic spike;
  int checks = 0, failures = 0;

  lif_update dut (.state, .lifp, .ca_leak, .op, .value, .teach_ca, .state_nxt(nxt), .spike);

  task automatic model(output lif_state_t e, output logic sp);
    int v, s, lk;
    e = state; sp = 0;
    v = int'(state.vmem);
    if (lifp.dis) return;
    case (op)
      2'd1: begin
        s = v + int'(value);
        if (s > 1023) s = 1023;
        if (s < -1024) s = -1024;
        if (s >= int'(lifp.thr)) begin
          sp = 1; e.vmem = 0; e.ca = (state.ca == 15) ? 4'd15 : state.ca + 1;
        end else e.vmem = 11'(s);
      end
      2'd2: begin
        lk = int'(lifp.leak);
        if (v > 0) v = (v > lk) ? v - lk : 0;
        else if (v < 0) v = (-v > lk) ? v + lk : 0;
        e.vmem = 11'(v);
        if (ca_leak != 0) begin
          if (int'(state.ca_cnt) + 1 >= int'(ca_leak)) begin
            e.ca_cnt = 0; e.ca = (state.ca != 0) ? state.ca - 1 : 0;
          end else e.ca_cnt = state.ca_cnt + 1;
        end
      end
      2'd3: e.ca = teach_ca;
      default: ;
    endcase
  endtask

  task automatic check(string what);
    lif_state_t e; logic sp;
    #1;
    model(e, sp);
    checks++;
    if (nxt !== e || spike !== sp) begin
      failures++;
      if (failures < 8) $display("%s: op=%0d v=%0d val=%0d thr=%0d -> got v=%0d ca=%0d cnt=%0d sp=%b, exp v=%0d ca=%0d cnt=%0d sp=%b",
        what, op, state.vmem, value, lifp.thr, nxt.vmem, nxt.ca, nxt.ca_cnt, spike, e.vmem, e.ca, e.ca_cnt, sp);
    end
  endtask

  initial begin
    // directed: integrate to threshold
    lifp = '{dis: 0, leak: 10'd3, thr: 11'sd10};
    ca_leak = 4'd2; teach_ca = 4'd7;
    state = '{ca_cnt: 0, ca: 4'd3, vmem: 11'sd8};
    op = 2'd1; value = 13'sd2; #1;
    checks++; if (!spike || nxt.vmem != 0 || nxt.ca != 4) failures++;
    value = 13'sd1; #1;
    checks++; if (spike || nxt.vmem != 9) failures++;
    // inhibitory
    value = -13'sd8; #1;
    checks++; if (spike || nxt.vmem != 0) failures++;
    // leak toward zero from -2 with leak 3
    state.vmem = -11'sd2; op = 2'd2; #1;
    checks++; if (nxt.vmem != 0 || nxt.ca_cnt != 1) failures++;
    // Calcium leak after ca_leak events
    state.ca_cnt = 4'd1; #1;
    checks++; if (nxt.ca != 2 || nxt.ca_cnt != 0) failures++;
    // teacher
    op = 2'd3; #1;
    checks++; if (nxt.ca != 7) failures++;
    // disabled
    lifp.dis = 1; op = 2'd1; value = 13'sd100; state.vmem = 11'sd500; #1;
    checks++; if (spike || nxt != state) failures++;
    // random against the model
    for (int k = 0; k < 5000; k++) begin
      state   = lif_state_t'($urandom);
      lifp    = lif_param_t'($urandom);
      lifp.dis = ($urandom % 8) == 0;
      ca_leak = 4'($urandom);
      teach_ca = 4'($urandom);
      op      = 2'($urandom);
      value   = 13'($signed(($urandom % 33)) - 16);
      if (k % 7 == 0) value = 13'($signed($urandom % 4096) - 2048);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
