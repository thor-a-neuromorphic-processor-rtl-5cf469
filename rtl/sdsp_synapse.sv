// One lane of the synapse logic: spike-driven synaptic plasticity (SDSP).
//
// When a synapse is triggered by a pre-synaptic spike and learning is
// enabled, its 4-bit signed weight is moved by one step according to the
// post-synaptic neuron's state as read before this update:
//   up   (+1, saturating at +7) if vmem >= mem_th and ca_th1 <= calcium < ca_th3
//   down (-1, saturating at -8) if vmem <  mem_th and ca_th1 <= calcium < ca_th2
// otherwise it is kept.  The paper states that updates depend on the
// post-synaptic membrane potential and calcium and follow the SDSP rule of its
// baseline; the thresholds' placement in the state bytes and the step size are
// this design's choices.  Combinational.
module sdsp_synapse
  import thor_pkg::*;
(
  input  logic          active,
  input  logic          learn_en,
  input  logic [3:0]    weight,
  input  neuron_state_t post_state,
  output logic [3:0]    weight_next
);

  logic up, down;
  logic [7:0] ca;

  always_comb begin
    ca   = post_state.calcium;
    up   = (post_state.vmem >= post_state.mem_th) &&
           (ca >= 8'(post_state.ca_th1)) && (ca < 8'(post_state.ca_th3));
    down = (post_state.vmem <  post_state.mem_th) &&
           (ca >= 8'(post_state.ca_th1)) && (ca < 8'(post_state.ca_th2));
    weight_next = weight;
    if (active && learn_en) begin
      if (up && weight != 4'b0111)        weight_next = weight + 4'd1;
      else if (down && weight != 4'b1000) weight_next = weight - 4'd1;
    end
  end

endmodule
