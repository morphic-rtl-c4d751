// tb_workload_mnist: one core running one of the four sub-networks of the
// rate-coded MNIST setup at its full size: a 14x14 sub-image (196 inputs),
// 500 hidden neurons plus one layer-wise inhibitory neuron, and 10 output
// neurons. The output layer's own inhibitory neuron is left out here.
//
// Mapping onto the core:
//   inputs  - L1 source addresses 0..195, arriving as L1 spike packets; the
//             input->hidden weights are L1 synapse rows 0..195.
//   hidden  - neurons 0..499; the hidden->output weights are their L0 rows
//             (L0 feedback on). Neuron 500 is the inhibitory neuron: it sees
//             every input and its L0 axon is configured inhibitory, x4.
//   outputs - neurons 501..510; they carry one L1 target bit, so each output
//             spike leaves the core as a spike packet. Neuron 511 is
//             disabled.
// Weights are binary and drawn at random (this testbench does not train a
// network); the input image is a synthetic stroke pattern, and each pixel
// spikes in each of T time steps with probability intensity/256 (Bernoulli
// rate code). After each input event the core runs until idle, so the local
// L0 events it causes are processed before the next input.
//
// The testbench keeps an independent integer model of the network (per
// neuron membrane potential, threshold, saturation, queue of local events)
// and checks: the sequence of output spike packets, the final membrane
// potential and Calcium of all 512 neurons, the busy time (1024 clocks per
// crossbar event), and that hidden, inhibitory and output spikes all
// happened. It prints the output spike counts and the winning class.
module tb_workload_mnist;
  import morphic_pkg::*;

  localparam int NI = 196, NH = 500, INH = 500, NO0 = 501, NO = 10, T = 4;
  localparam int HID_THR = 40, OUT_THR = 8, INH_THR = 24;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy, stall;
  logic [31:0] in_pkt = '0;
  logic [39:0] out_pkt;
  logic [2:0]  out_count;

  morphic_core #(.CORE_ID(2'd0)) dut (.clk, .rst, .in_valid, .in_pkt, .in_ready, .out_valid,
                                     .out_pkt, .out_ready, .out_count, .busy, .stall);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, busy_cycles = 0;
  int n_xbar = 0, n_in = 0, n_hid_spk = 0, n_inh_spk = 0, max_burst = 0;
  int out_spk [NO];

  // ------------------------------------------------------------- model
  logic         w_in  [NI][512];   // L1 rows
  logic         w_loc [512][512];  // L0 rows
  int           vm    [512], thr [512], ca [512];
  bit           dis   [512];
  int           exp_src [$], loc_q [$];

  function automatic int sat(int v);
    if (v > 1023) return 1023;
    if (v < -1024) return -1024;
    return v;
  endfunction

  // crossbar event from source s on L1 (l01 = 1) or L0; returns spike count
  function automatic int xbar(int s, bit l01);
    int n; n = 0;
    for (int j = 0; j < 512; j++) begin
      int c;
      logic w;
      w = l01 ? w_in[s][j] : w_loc[s][j];
      c = !w ? 0 : (!l01 && s == INH) ? -4 : 1;
      if (dis[j]) continue;
      vm[j] = sat(vm[j] + c);
      if (vm[j] >= thr[j]) begin
        vm[j] = 0;
        if (ca[j] != 15) ca[j]++;
        n++;
        loc_q.push_back(j);
        if (j >= NO0 && j < NO0 + NO) exp_src.push_back(j);
        if (j < NH) n_hid_spk++;
        if (j == INH) n_inh_spk++;
      end
    end
    n_xbar++;
    return n;
  endfunction

  // --------------------------------------------------------- stimulus
  task automatic send(logic [31:0] p);
    @(negedge clk);
    in_valid = 1; in_pkt = p;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_idle();
    int quiet; quiet = 0;
    while (quiet < 8) begin
      @(negedge clk);
      if (!busy && !dut.u_l0.sched_valid && !dut.u_l0.cfg_valid && !out_valid) quiet++;
      else quiet = 0;
    end
  endtask

  // ------------------------------------------------------------ checks
  always @(posedge clk) if (!rst) begin
    if (busy) busy_cycles++;
    if (out_valid && out_ready) begin
      out_spk_t o;
      o = out_spk_t'(out_pkt);
      checks++;
      if (exp_src.size() == 0 || o.kind != OUT_SPIKE || int'(o.src) != exp_src[0]) begin
        failures++;
        $display("unexpected output packet %h", out_pkt);
      end else begin
        out_spk[int'(o.src) - NO0]++;
      end
      if (exp_src.size() != 0) void'(exp_src.pop_front());
    end
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pix [NI];
    int best, bestn, bad;
    for (int k = 0; k < NO; k++) out_spk[k] = 0;

    // network
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < 512; j++)
        w_in[i][j] = (j < NH) ? ($urandom_range(3) == 0) : (j == INH);
    for (int i = 0; i < 512; i++)
      for (int j = 0; j < 512; j++)
        w_loc[i][j] = (i <= INH && j >= NO0 && j < NO0 + NO) ? (i == INH ? 1'b1 : 1'($urandom_range(1)))
                                                             : 1'b0;
    for (int j = 0; j < 512; j++) begin
      dis[j] = (j == 511);
      ca[j]  = 0;
      thr[j] = (j < NH) ? HID_THR : (j == INH) ? INH_THR : OUT_THR;
      vm[j]  = (j < NH) ? int'($urandom_range(HID_THR - 1)) : 0;
    end

    // synthetic 14x14 image: a ring and a vertical bar, blurred edges
    for (int y = 0; y < 14; y++)
      for (int x = 0; x < 14; x++) begin
        int r2, v;
        r2 = (x - 7) * (x - 7) + (y - 6) * (y - 6);
        v = (r2 >= 9 && r2 <= 20) ? 240 : (x == 10 && y > 6) ? 200 : (r2 == 8 || r2 == 21) ? 80 : 0;
        pix[y * 14 + x] = v;
      end

    // memories are loaded while reset is held, after the first reset edges
    repeat (2) @(negedge clk);
    for (int j = 0; j < 512; j++) begin
      neur_word_t w;
      w = '0;
      w.lifp.dis    = dis[j];
      w.lifp.thr    = 11'(thr[j]);
      w.state.vmem  = 11'(vm[j]);
      w.sdsp.thm    = 11'sd1023;
      w.l1cores     = (j >= NO0 && j < NO0 + NO) ? 3'b001 : 3'b000;
      dut.u_neur_sram.mem[j] = w;
    end
    for (int a = 0; a < 4096; a++) begin
      logic [127:0] word;
      int l01, i, jb;
      l01 = a >> 11; i = (a >> 2) & 511; jb = (a & 3) * 128;
      for (int b = 0; b < 128; b++)
        word[b] = l01 ? (i < NI ? w_in[i][jb + b] : 1'b0) : w_loc[i][jb + b];
      dut.u_syn_sram.mem[a] = word;
    end
    repeat (3) @(negedge clk);
    rst = 0;

    // the inhibitory axon: L0 axon INH, inhibitory, exponent 2 (x4)
    send({PT_CFG, 2'd0, MEM_PARAM, PB_L0_BASE + 16'(INH), 8'b0000_0110});
    wait_idle();

    for (int t = 0; t < T; t++)
      for (int i = 0; i < NI; i++)
        if ($urandom_range(255) < pix[i]) begin
          int n;
          n_in++;
          n = xbar(i, 1'b1);
          if (n > max_burst) max_burst = n;
          while (loc_q.size() > 0) begin
            n = xbar(loc_q.pop_front(), 1'b0);
            if (n > max_burst) max_burst = n;
          end
          send({PT_L1SPK, 4'b0001, 9'(i), 15'b0});
          wait_idle();
        end

    // final neuron state
    bad = 0;
    for (int j = 0; j < 512; j++) begin
      neur_word_t h;
      h = neur_word_t'(dut.u_neur_sram.mem[j]);
      if (int'(h.state.vmem) != vm[j] || int'(h.state.ca) != ca[j]) begin
        bad++;
        if (bad < 4) $display("neuron %0d rtl v=%0d ca=%0d model v=%0d ca=%0d", j,
                              h.state.vmem, h.state.ca, vm[j], ca[j]);
      end
    end
    checks++; if (bad != 0) failures++;
    checks++;
    if (exp_src.size() != 0) begin failures++; $display("%0d output spikes missing", exp_src.size()); end
    checks++;
    if (busy_cycles != 1024 * n_xbar) begin
      failures++; $display("busy %0d for %0d crossbar events", busy_cycles, n_xbar);
    end
    checks++; if (n_hid_spk == 0) begin failures++; $display("no hidden spike"); end
    checks++; if (n_inh_spk == 0) begin failures++; $display("no inhibitory spike"); end
    best = 0; bestn = 0;
    for (int k = 0; k < NO; k++) if (out_spk[k] > bestn) begin best = k; bestn = out_spk[k]; end
    checks++; if (bestn == 0) begin failures++; $display("no output spike"); end

    $display("input events %0d, crossbar events %0d, SOPs %0d, hidden spikes %0d, inhibitory %0d",
             n_in, n_xbar, 512 * n_xbar, n_hid_spk, n_inh_spk);
    $display("largest number of spikes in one crossbar event %0d (local FIFO holds 16)", max_burst);
    for (int k = 0; k < NO; k++) $display("class %0d: %0d output spikes", k, out_spk[k]);
    $display("winning class %0d", best);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
