// tb_two_chips: two full-size chips side by side, chip A to the West of
// chip B, joined by their East/West AER links and running from unrelated
// clocks (10 ns and 14 ns). The testbench talks to each chip only through
// its North link.
//
// Chip A, core 0, neuron 5 has L2 connectivity dx = +1, dy = 0, cores 1 and
// 2, synapse 3 of neuron 77. A virtual event makes it fire; its spike must
// cross the link and reach neuron 77 in cores 1 and 2 of chip B, and no
// other neuron there. In chip B learning is on with q+ = 511 for distance 2
// only and 0 for every other distance, and neuron 77 meets the potentiation
// condition: the synapse that was 0 (core 1) must become 1, which shows
// that the packet arrived with distance 2. The synapse that was 1 (core 2)
// adds 1 to the membrane potential, which reaches that neuron's threshold of
// 1. Neuron 77 of core 2 then fires back West (dx = -1) to synapse 7 of
// neuron 9 in core 0 of chip A, which must then hold a potential of 1.
`timescale 1ns/1ps
module tb_two_chips;
  import morphic_pkg::*;

  localparam int N = 0, S = 1, E = 2, W = 3;

  logic clk_a = 0, clk_b = 0, rst = 1;
  logic inj_req_a = 0, inj_req_b = 0;
  logic [7:0] inj_addr_a = 0, inj_addr_b = 0;

  logic [3:0] a_rx_req, a_rx_ack, a_tx_req, a_tx_ack;
  logic [3:0] b_rx_req, b_rx_ack, b_tx_req, b_tx_ack;
  logic [7:0] a_rx_addr [4], a_tx_addr [4], b_rx_addr [4], b_tx_addr [4];

  // A.East <-> B.West; the testbench drives both North receivers
  assign a_rx_req  = {1'b0, b_tx_req[W], 1'b0, inj_req_a};
  assign a_rx_addr = '{inj_addr_a, 8'h00, b_tx_addr[W], 8'h00};
  assign a_tx_ack  = {1'b0, b_rx_ack[W], 2'b00};
  assign b_rx_req  = {a_tx_req[E], 1'b0, 1'b0, inj_req_b};
  assign b_rx_addr = '{inj_addr_b, 8'h00, 8'h00, a_tx_addr[E]};
  assign b_tx_ack  = {a_rx_ack[E], 3'b000};

  morphic_top chip_a (.clk_ext (clk_a), .clk_int_en (1'b0), .clk_int_len (3'd0), .rst,
                      .l1_prio (1'b0), .l2_prio (1'b0),
                      .rx_req (a_rx_req), .rx_addr (a_rx_addr), .rx_ack (a_rx_ack),
                      .tx_req (a_tx_req), .tx_addr (a_tx_addr), .tx_ack (a_tx_ack));
  morphic_top chip_b (.clk_ext (clk_b), .clk_int_en (1'b0), .clk_int_len (3'd0), .rst,
                      .l1_prio (1'b1), .l2_prio (1'b1),
                      .rx_req (b_rx_req), .rx_addr (b_rx_addr), .rx_ack (b_rx_ack),
                      .tx_req (b_tx_req), .tx_addr (b_tx_addr), .tx_ack (b_tx_ack));

  always #5 clk_a = ~clk_a;
  always #7 clk_b = ~clk_b;

  int checks = 0, failures = 0, hops_ab = 0, hops_ba = 0;

  always @(posedge a_tx_req[E]) hops_ab++;
  always @(posedge b_tx_req[W]) hops_ba++;

  // -------------------------------------------------- memory back doors
  function automatic neur_word_t nrd(bit chip, int c, int j);
    case ({chip, 2'(c)})
      3'd0: return chip_a.g_core[0].u_core.u_neur_sram.mem[j];
      3'd1: return chip_a.g_core[1].u_core.u_neur_sram.mem[j];
      3'd2: return chip_a.g_core[2].u_core.u_neur_sram.mem[j];
      3'd3: return chip_a.g_core[3].u_core.u_neur_sram.mem[j];
      3'd4: return chip_b.g_core[0].u_core.u_neur_sram.mem[j];
      3'd5: return chip_b.g_core[1].u_core.u_neur_sram.mem[j];
      3'd6: return chip_b.g_core[2].u_core.u_neur_sram.mem[j];
      default: return chip_b.g_core[3].u_core.u_neur_sram.mem[j];
    endcase
  endfunction

  task automatic nwr(bit chip, int c, int j, neur_word_t w);
    case ({chip, 2'(c)})
      3'd0: chip_a.g_core[0].u_core.u_neur_sram.mem[j] = w;
      3'd1: chip_a.g_core[1].u_core.u_neur_sram.mem[j] = w;
      3'd2: chip_a.g_core[2].u_core.u_neur_sram.mem[j] = w;
      3'd3: chip_a.g_core[3].u_core.u_neur_sram.mem[j] = w;
      3'd4: chip_b.g_core[0].u_core.u_neur_sram.mem[j] = w;
      3'd5: chip_b.g_core[1].u_core.u_neur_sram.mem[j] = w;
      3'd6: chip_b.g_core[2].u_core.u_neur_sram.mem[j] = w;
      default: chip_b.g_core[3].u_core.u_neur_sram.mem[j] = w;
    endcase
  endtask

  task automatic sclear(bit chip, int c);
    for (int a = 0; a < 4096; a++)
      case ({chip, 2'(c)})
        3'd0: chip_a.g_core[0].u_core.u_syn_sram.mem[a] = '0;
        3'd1: chip_a.g_core[1].u_core.u_syn_sram.mem[a] = '0;
        3'd2: chip_a.g_core[2].u_core.u_syn_sram.mem[a] = '0;
        3'd3: chip_a.g_core[3].u_core.u_syn_sram.mem[a] = '0;
        3'd4: chip_b.g_core[0].u_core.u_syn_sram.mem[a] = '0;
        3'd5: chip_b.g_core[1].u_core.u_syn_sram.mem[a] = '0;
        3'd6: chip_b.g_core[2].u_core.u_syn_sram.mem[a] = '0;
        default: chip_b.g_core[3].u_core.u_syn_sram.mem[a] = '0;
      endcase
  endtask

  // ------------------------------------------------------- AER sender
  task automatic send_a(logic [31:0] p);
    for (int b = 0; b < 4; b++) begin
      inj_addr_a = p[b*8 +: 8];
      #2 inj_req_a = 1;
      wait (a_rx_ack[N]);
      #3 inj_req_a = 0;
      wait (!a_rx_ack[N]);
      #2;
    end
  endtask

  task automatic send_b(logic [31:0] p);
    for (int b = 0; b < 4; b++) begin
      inj_addr_b = p[b*8 +: 8];
      #2 inj_req_b = 1;
      wait (b_rx_ack[N]);
      #3 inj_req_b = 0;
      wait (!b_rx_ack[N]);
      #2;
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    neur_word_t w;
    // memories are loaded while reset is held, after the first reset edges
    repeat (2) @(posedge clk_b);
    for (int ch = 0; ch < 2; ch++)
      for (int c = 0; c < 4; c++) begin
        sclear(ch[0], c);
        for (int j = 0; j < 512; j++) begin
          w = '0;
          w.lifp.thr = 11'sd1000;
          w.sdsp.thm = 11'sd1023;
          nwr(ch[0], c, j, w);
        end
      end
    // chip A, core 0, neuron 5: fires East to synapse 3 of neuron 77, cores 1 and 2
    w = nrd(0, 0, 5);
    w.lifp.thr = 11'sd50;
    w.l2 = '{dx: 3'b001, dy: 3'b000, cores: 4'b0110, syn: 5'd3, neur: 9'd77};
    nwr(0, 0, 5, w);
    // chip A, core 0, neuron 9: L2 synapse 7 set
    w = nrd(0, 0, 9);
    w.l2syn[7] = 1'b1;
    nwr(0, 0, 9, w);
    // chip B, cores 1 and 2, neuron 77: potentiation condition met
    for (int c = 1; c <= 2; c++) begin
      w = nrd(1, c, 77);
      w.sdsp.thm = -11'sd1024;
      w.sdsp.th1 = 4'd0;
      w.sdsp.th2 = 4'd0;
      w.sdsp.th3 = 4'd15;
      w.l2syn[3] = (c == 2);
      if (c == 2) begin
        w.lifp.thr = 11'sd1;
        w.l2 = '{dx: 3'b101, dy: 3'b000, cores: 4'b0001, syn: 5'd7, neur: 9'd9};
      end
      nwr(1, c, 77, w);
    end
    repeat (4) @(posedge clk_b);
    rst = 0;
    repeat (4) @(posedge clk_b);

    // chip B: learning on in cores 1 and 2, q+ = 511 at distance 2 only
    for (int c = 1; c <= 2; c++) begin
      send_b({PT_CFG, 2'(c), MEM_PARAM, PB_CTRL, 8'b11});
      send_b({PT_CFG, 2'(c), MEM_PARAM, PB_QP_BASE + 16'd4, 8'hFF});
      send_b({PT_CFG, 2'(c), MEM_PARAM, PB_QP_BASE + 16'd5, 8'h01});
    end
    // a virtual event of value 0 rewrites neuron 77 so that its up/down
    // bits follow the preloaded state
    send_b({PT_VIRT, 4'b0110, 9'd77, 8'd0, 7'b0});
    #2us;

    // make chip A, core 0, neuron 5 fire
    send_a({PT_VIRT, 4'b0001, 9'd5, 8'd100, 7'b0});
    #60us;

    w = nrd(0, 0, 5);
    check(w.state.vmem == 0 && w.state.ca == 1, "A neuron 5 fired once");
    check(hops_ab == 4, "one packet (4 link transfers) A -> B");
    check(hops_ba == 4, "one packet (4 link transfers) B -> A");
    w = nrd(1, 1, 77);
    check(w.l2syn[3] == 1'b1, "B core 1 synapse learned at distance 2");
    check(w.state.vmem == 0 && w.state.ca == 0, "B core 1 neuron 77 saw a zero weight");
    w = nrd(1, 2, 77);
    check(w.l2syn[3] == 1'b1, "B core 2 synapse still 1");
    check(w.state.vmem == 0 && w.state.ca == 1, "B core 2 neuron 77 fired once");
    for (int c = 0; c < 4; c += 3) begin
      w = nrd(1, c, 77);
      check(w.state.vmem == 0 && w.state.ca == 0 && w.l2syn == '0, "B cores 0 and 3 untouched");
    end
    w = nrd(0, 0, 9);
    check(w.state.vmem == 1 && w.state.ca == 0, "A neuron 9 received the reply spike");
    for (int c = 1; c < 4; c++) begin
      w = nrd(0, c, 9);
      check(w.state.vmem == 0, "A cores 1-3 neuron 9 untouched");
    end

    $display("link transfers A->B %0d, B->A %0d", hops_ab, hops_ba);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
