// lif_update: combinational leaky integrate-and-fire update of one neuron,
// shared by all 512 neurons of a core through time multiplexing.
//
// The neuron state is an 11-bit signed membrane potential, a 4-bit Calcium
// variable and a 4-bit counter that slows the Calcium leak. Three operations:
//   OP_INTEG  add a signed synaptic contribution (saturating to 11 bits);
//             if the result reaches the threshold the neuron fires, the
//             potential resets to 0 and Calcium increments (saturating).
//   OP_LEAK   move the potential toward 0 by the leak step, never past 0;
//             count one leak event and, every ca_leak events, decrement
//             Calcium (ca_leak = 0 disables Calcium leakage).
//   OP_TEACH  write the Calcium variable with the teacher value, which is
//             how a teacher steers the S-SDSP learning window.
//   OP_NONE   state unchanged.
// A disabled neuron (lifp.dis) keeps its state and never fires.
//
// Follows the chip: the 11/4/4-bit state, threshold firing, leak events
// driving the leakage, teacher events acting through Calcium. Own choices:
// reset to 0 on firing, saturation, the leak-toward-zero rule, Calcium +1 per
// output spike and the meaning of the teacher value (Calcium overwrite).
module lif_update
  import morphic_pkg::*;
(
  input  lif_state_t               state,
  input  lif_param_t               lifp,
  input  logic [3:0]               ca_leak,  // leak events per Calcium decrement
  input  logic [1:0]               op,
  input  logic signed [VMEM_W+1:0] value,    // signed contribution, 13 bits
  input  logic [CA_W-1:0]          teach_ca,
  output lif_state_t               state_nxt,
  output logic                     spike
);

  localparam logic [1:0] OP_NONE  = 2'd0;
  localparam logic [1:0] OP_INTEG = 2'd1;
  localparam logic [1:0] OP_LEAK  = 2'd2;
  localparam logic [1:0] OP_TEACH = 2'd3;

  localparam logic signed [VMEM_W+1:0] VMAX = 13'sd1023;
  localparam logic signed [VMEM_W+1:0] VMIN = -13'sd1024;

  logic signed [VMEM_W+1:0] v_ext, sum, leaked, lk, thr_ext;

  always_comb begin
    state_nxt = state;
    spike     = 1'b0;
    v_ext     = state.vmem;   // sign-extending assignments
    thr_ext   = lifp.thr;
    lk        = {3'b000, lifp.leak};
    sum       = v_ext + value;
    leaked    = v_ext; // bits above VMEM_W stay sign copies: |leaked| <= |vmem|
    if (!lifp.dis) begin
      unique case (op)
        OP_INTEG: begin
          if (sum > VMAX)      sum = VMAX;
          else if (sum < VMIN) sum = VMIN;
          if (sum >= thr_ext) begin
            spike           = 1'b1;
            state_nxt.vmem  = '0;
            state_nxt.ca    = (state.ca == '1) ? state.ca : state.ca + 1'b1;
          end else begin
            state_nxt.vmem  = sum[VMEM_W-1:0];
          end
        end
        OP_LEAK: begin
          if (v_ext > 0)      leaked = (v_ext > lk) ? v_ext - lk : '0;
          else if (v_ext < 0) leaked = (-v_ext > lk) ? v_ext + lk : '0;
          state_nxt.vmem = leaked[VMEM_W-1:0];
          if (ca_leak != '0) begin
            if ({1'b0, state.ca_cnt} + 5'd1 >= {1'b0, ca_leak}) begin
              state_nxt.ca_cnt = '0;
              state_nxt.ca     = (state.ca != '0) ? state.ca - 1'b1 : '0;
            end else begin
              state_nxt.ca_cnt = state.ca_cnt + 4'd1;
            end
          end
        end
        OP_TEACH: state_nxt.ca = teach_ca;
        default: ;
      endcase
    end
  end

endmodule
