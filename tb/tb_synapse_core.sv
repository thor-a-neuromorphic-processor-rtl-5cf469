// Testbench for synapse_core (N=32, P=8, 4 groups).  Writes the whole synapse
// matrix through the configuration port, then issues sweeps and single-lane
// slots for random pre-synaptic neurons with random post-synaptic states,
// learning off and on, and leak slots.  Checks the weights handed to the
// neuron core in each W stage against the model (masked lanes read 0) and,
// at the end, reads back every synapse byte to check the SDSP updates.
module tb_synapse_core;
  import thor_pkg::*;
  localparam int N = 32, P = 8, G = N / P;
  logic clk = 0, rst_n = 0;
  logic rd_valid, learn_en, cfg_valid, cfg_we;
  op_e rd_op;
  logic [1:0] rd_group;
  logic [4:0] rd_pre;
  logic [P-1:0] rd_mask;
  neuron_state_t [P-1:0] post_states;
  logic [P-1:0][3:0] weights;
  logic [8:0] cfg_addr;
  logic [7:0] cfg_wdata, cfg_rdata;

  logic [3:0] model [N][N];
  int checks = 0, failures = 0, changed = 0;
  logic w_v; logic [1:0] w_g; op_e w_op; logic [P-1:0] w_m; logic [4:0] w_pre;

  synapse_core #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    w_v <= rd_valid; w_g <= rd_group; w_op <= rd_op; w_m <= rd_mask; w_pre <= rd_pre;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // W stage: fresh post-synaptic states, check weights, update model
  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < P; l++) begin
      post_states[l] = {$urandom, $urandom};
      post_states[l].calcium = 8'($urandom_range(15));
      post_states[l].ca_th1 = 4'($urandom_range(4));
      post_states[l].ca_th2 = 4'($urandom_range(6, 15));
      post_states[l].ca_th3 = 4'($urandom_range(6, 15));
    end
    #1;
    if (w_v) for (int l = 0; l < P; l++) begin
      int j, w, ca;
      j = int'(w_g) * P + l;
      if (w_op === OP_SOP && w_m[l]) begin
        chk(weights[l] === model[w_pre][j], $sformatf("weight %0d->%0d = %0d exp %0d", w_pre, j, weights[l], model[w_pre][j]));
        w = $signed(model[w_pre][j]); ca = post_states[l].calcium;
        if (learn_en) begin
          if (post_states[l].vmem >= post_states[l].mem_th && ca >= post_states[l].ca_th1 && ca < post_states[l].ca_th3) begin
            if (w < 7) begin w++; changed++; end
          end else if (post_states[l].vmem < post_states[l].mem_th && ca >= post_states[l].ca_th1 && ca < post_states[l].ca_th2) begin
            if (w > -8) begin w--; changed++; end
          end
        end
        model[w_pre][j] = 4'(w);
      end else begin
        chk(weights[l] === 4'd0, "masked or leak lane shows weight 0");
      end
    end
  end

  task automatic issue(op_e op, int pre, int g, logic [P-1:0] m);
    rd_valid = 1; rd_op = op; rd_pre = 5'(pre); rd_group = 2'(g); rd_mask = m;
    @(negedge clk);
    rd_valid = 0;
  endtask

  initial begin
    rd_valid = 0; rd_op = OP_SOP; rd_group = 0; rd_pre = 0; rd_mask = 0; learn_en = 0;
    cfg_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j += 2) begin
      model[i][j] = 4'($urandom); model[i][j+1] = 4'($urandom);
      cfg_valid = 1; cfg_we = 1; cfg_addr = {5'(i), 4'(j / 2)}; cfg_wdata = {model[i][j+1], model[i][j]};
      @(negedge clk);
    end
    cfg_valid = 0; cfg_we = 0;
    for (int rep = 0; rep < 60; rep++) begin
      int pre;
      learn_en = (rep >= 20);
      pre = $urandom_range(N - 1);
      case (rep % 4)
        0, 1: begin
          for (int g = 0; g < G; g++) begin rd_valid = 1; rd_op = OP_SOP; rd_pre = 5'(pre); rd_group = 2'(g); rd_mask = '1; @(negedge clk); end
          rd_valid = 0;
        end
        2: issue(OP_SOP, pre, $urandom_range(G - 1), P'(1) << $urandom_range(P - 1));
        default: begin
          for (int g = 0; g < G; g++) begin rd_valid = 1; rd_op = OP_LEAK; rd_group = 2'(g); rd_mask = '1; @(negedge clk); end
          rd_valid = 0;
        end
      endcase
      @(negedge clk);
    end
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j += 2) begin
      cfg_valid = 1; cfg_we = 0; cfg_addr = {5'(i), 4'(j / 2)};
      @(negedge clk);
      cfg_valid = 0;
      chk(cfg_rdata === {model[i][j+1], model[i][j]}, $sformatf("readback %0d,%0d = %h exp %h", i, j, cfg_rdata, {model[i][j+1], model[i][j]}));
    end
    chk(changed > 0, "learning changed some weight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
