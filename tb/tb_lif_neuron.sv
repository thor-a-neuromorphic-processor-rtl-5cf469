// Testbench for lif_neuron: random states, weights and operations compared
// with an integer reference model of integrate, fire, reset, leak and the
// calcium update; plus directed corner cases (saturation, exact threshold).
module tb_lif_neuron;
  import thor_pkg::*;
  logic active, learn_en, spike;
  op_e op;
  neuron_state_t state;
  logic [3:0] weight;
  logic [7:0] vmem_next, calcium_next;
  int checks = 0, failures = 0;

  lif_neuron dut (.*);

  task automatic run_one();
    int v, w, ca, ev, eca, esp;
    #1;
    v = state.vmem; w = $signed(weight); ca = state.calcium;
    ev = v; eca = ca; esp = 0;
    if (active) begin
      if (op === OP_SOP) begin
        ev = v + w;
        if (ev < 0) ev = 0;
        if (ev > 255) ev = 255;
        if (ev >= state.threshold) begin
          esp = 1; ev = 0;
          if (learn_en && ca < 15) eca = ca + 1;
        end
      end else begin
        ev = v - state.leak;
        if (ev < 0) ev = 0;
        if (learn_en && ca > 0) eca = ca - 1;
      end
    end
    checks++;
    if (vmem_next !== 8'(ev) || calcium_next !== 8'(eca) || spike !== 1'(esp)) begin
      failures++;
      $display("FAIL: op=%0d act=%0d v=%0d w=%0d thr=%0d leak=%0d ca=%0d -> v=%0d ca=%0d s=%0d exp v=%0d ca=%0d s=%0d",
               op, active, v, w, state.threshold, state.leak, ca, vmem_next, calcium_next, spike, ev, eca, esp);
    end
  endtask

  initial begin
    // directed: saturation at 255 below a threshold of 255 does fire
    active = 1; learn_en = 1; op = OP_SOP;
    state = '0; state.vmem = 8'd250; state.threshold = 8'd255; state.calcium = 8'd15; weight = 4'd7;
    run_one();
    // negative weight floors at 0
    state.vmem = 8'd3; weight = 4'b1000; state.threshold = 8'd10; run_one();
    // exactly at threshold
    state.vmem = 8'd5; weight = 4'd5; run_one();
    // leak below zero
    op = OP_LEAK; state.vmem = 8'd4; state.leak = 8'd9; state.calcium = 8'd0; run_one();
    for (int i = 0; i < 3000; i++) begin
      active = ($urandom_range(7) !== 0);
      learn_en = $urandom_range(1);
      op = op_e'($urandom_range(1));
      state = {$urandom, $urandom};
      state.calcium = 8'($urandom_range(15));
      if ($urandom_range(1)) state.threshold = 8'($urandom_range(40));
      weight = 4'($urandom);
      run_one();
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
