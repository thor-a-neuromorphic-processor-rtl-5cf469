// Testbench for sdsp_synapse: random weights and post-synaptic states
// compared with an integer model of the SDSP up/down rule with saturation,
// including inactive lanes and learning disabled.
module tb_sdsp_synapse;
  import thor_pkg::*;
  logic active, learn_en;
  logic [3:0] weight, weight_next;
  neuron_state_t post_state;
  int checks = 0, failures = 0, ups = 0, downs = 0;

  sdsp_synapse dut (.*);

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int w, ew, ca;
      active = ($urandom_range(5) !== 0);
      learn_en = ($urandom_range(5) !== 0);
      weight = 4'($urandom);
      post_state = {$urandom, $urandom};
      post_state.calcium = 8'($urandom_range(15));
      #1;
      w = $signed(weight); ew = w; ca = post_state.calcium;
      if (active && learn_en) begin
        if (post_state.vmem >= post_state.mem_th && ca >= post_state.ca_th1 && ca < post_state.ca_th3) begin
          if (w < 7) ew = w + 1;
          ups++;
        end else if (post_state.vmem < post_state.mem_th && ca >= post_state.ca_th1 && ca < post_state.ca_th2) begin
          if (w > -8) ew = w - 1;
          downs++;
        end
      end
      checks++;
      if ($signed(weight_next) !== ew) begin
        failures++;
        $display("FAIL: w=%0d v=%0d mth=%0d ca=%0d th=%0d/%0d/%0d -> %0d exp %0d", w, post_state.vmem,
                 post_state.mem_th, ca, post_state.ca_th1, post_state.ca_th2, post_state.ca_th3, $signed(weight_next), ew);
      end
    end
    checks++;
    if (ups === 0 || downs === 0) begin failures++; $display("FAIL: up/down never exercised"); end
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
