// One lane of the LIF neuron logic (combinational).
//
// For a synaptic operation (OP_SOP) the signed 4-bit weight is added to the
// 8-bit membrane potential, saturating at 0 and 255.  If the result reaches
// the threshold (byte 2) the neuron fires and the potential returns to its
// resting value 0; with online learning enabled each spike also increments the
// calcium variable (byte 4, saturating at CA_MAX).  For a time-reference event
// (OP_LEAK) the potential is reduced by the leakage (byte 1) down to 0 and,
// with learning enabled, the calcium decays by one.  An inactive lane returns
// its state unchanged and never fires.  Integrate-and-fire with a calcium
// update block is the paper's structure; the exact arithmetic (widths,
// saturation, reset to 0, leak by subtraction) is this design's choice.
module lif_neuron
  import thor_pkg::*;
(
  input  logic          active,
  input  op_e           op,
  input  logic          learn_en,
  input  neuron_state_t state,
  input  logic [3:0]    weight,        // two's complement
  output logic [7:0]    vmem_next,
  output logic [7:0]    calcium_next,
  output logic          spike
);

  logic signed [9:0] sum;

  always_comb begin
    vmem_next    = state.vmem;
    calcium_next = state.calcium;
    spike        = 1'b0;
    sum          = $signed({2'b00, state.vmem}) + 10'($signed(weight));
    if (active) begin
      unique case (op)
        OP_SOP: begin
          if (sum < 0)            vmem_next = 8'd0;
          else if (sum > 10'sd255) vmem_next = 8'd255;
          else                    vmem_next = sum[7:0];
          if (vmem_next >= state.threshold) begin
            spike     = 1'b1;
            vmem_next = 8'd0;
            if (learn_en && state.calcium < 8'(CA_MAX))
              calcium_next = state.calcium + 8'd1;
          end
        end
        OP_LEAK: begin
          vmem_next = (state.vmem > state.leak) ? state.vmem - state.leak : 8'd0;
          if (learn_en && state.calcium != 8'd0)
            calcium_next = state.calcium - 8'd1;
        end
        default: ;
      endcase
    end
  end

endmodule
