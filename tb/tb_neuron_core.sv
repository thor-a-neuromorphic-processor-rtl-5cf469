// Testbench for neuron_core (N=64, P=8, 8 groups).  Configures every byte of
// every neuron through the configuration port, then runs full SOP sweeps,
// leak sweeps and single-lane slots with learning off and on, feeding weights
// from a table as the synapse core would.  Checks every spike vector and
// offset against a reference model, checks that a sweep of 8 groups ends its
// last write-back 9 cycles after its first read (N/P + 1), and finally reads
// back all neuron states through the configuration port.
module tb_neuron_core;
  import thor_pkg::*;
  localparam int N = 64, P = 8, G = N / P;
  logic clk = 0, rst_n = 0;
  logic rd_valid, learn_en, wr_valid, spike_valid, cfg_valid, cfg_we;
  op_e rd_op;
  logic [2:0] rd_group;
  logic [P-1:0] rd_mask, spike_vec;
  neuron_state_t [P-1:0] wr_states;
  logic [P-1:0][3:0] weights;
  logic [5:0] spike_offset;
  logic [8:0] cfg_addr;
  logic [7:0] cfg_wdata, cfg_rdata;

  neuron_state_t model [N];
  logic [3:0] wtab [G][P];
  int checks = 0, failures = 0;
  // W-stage tracking in the testbench
  logic w_v; logic [2:0] w_g; op_e w_op; logic [P-1:0] w_m;
  int cyc = 0, first_rd_cyc, last_wr_cyc;

  neuron_core #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always_ff @(posedge clk) begin
    w_v <= rd_valid; w_g <= rd_group; w_op <= rd_op; w_m <= rd_mask;
  end
  always_comb for (int l = 0; l < P; l++) weights[l] = wtab[w_g][l];

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model of one lane
  function automatic void ref_lane(int j, op_e op, logic [3:0] w, output logic sp);
    int v, ca;
    v = model[j].vmem; ca = model[j].calcium; sp = 0;
    if (op === OP_SOP) begin
      v = v + $signed(w);
      if (v < 0) v = 0;
      if (v > 255) v = 255;
      if (v >= model[j].threshold) begin
        sp = 1; v = 0;
        if (learn_en && ca < 15) ca++;
      end
    end else begin
      v = v - model[j].leak;
      if (v < 0) v = 0;
      if (learn_en && ca > 0) ca--;
    end
    model[j].vmem = 8'(v); model[j].calcium = 8'(ca);
  endfunction

  // check the W stage each cycle
  always @(negedge clk) if (rst_n && w_v) begin
    logic [P-1:0] exp_vec;
    logic s;
    for (int l = 0; l < P; l++) begin
      s = 0;
      if (w_m[l]) ref_lane(int'(w_g) * P + l, w_op, wtab[w_g][l], s);
      exp_vec[l] = s;
    end
    chk(spike_valid && spike_vec === exp_vec && spike_offset === 6'(int'(w_g) * P),
        $sformatf("group %0d: spikes %b exp %b offset %0d", w_g, spike_vec, exp_vec, spike_offset));
    last_wr_cyc = cyc;
  end

  task automatic cfg_write(int j, int b, logic [7:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 1; cfg_addr = {6'(j), 3'(b)}; cfg_wdata = d;
    @(negedge clk);
    cfg_valid = 0; cfg_we = 0;
  endtask

  task automatic cfg_read_check(int j, int b);
    @(negedge clk);
    cfg_valid = 1; cfg_we = 0; cfg_addr = {6'(j), 3'(b)};
    @(negedge clk);
    cfg_valid = 0;
    chk(cfg_rdata === model[j][8*b +: 8], $sformatf("cfg read n%0d b%0d = %h exp %h", j, b, cfg_rdata, model[j][8*b +: 8]));
  endtask

  task automatic sweep(op_e op, int g0, int g1, logic [P-1:0] mask);
    @(negedge clk);
    first_rd_cyc = cyc;
    for (int g = g0; g <= g1; g++) begin
      rd_valid = 1; rd_op = op; rd_group = 3'(g); rd_mask = mask;
      @(negedge clk);
    end
    rd_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    rd_valid = 0; rd_op = OP_SOP; rd_group = 0; rd_mask = 0; learn_en = 0;
    cfg_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      model[j] = {$urandom, $urandom};
      model[j].vmem = 8'($urandom_range(30));
      model[j].threshold = 8'($urandom_range(10, 40));
      model[j].leak = 8'($urandom_range(5));
      model[j].calcium = 8'($urandom_range(15));
      for (int b = 0; b < NSTATE_BYTES; b++) cfg_write(j, b, model[j][8*b +: 8]);
    end
    for (int j = 0; j < N; j += 5) cfg_read_check(j, j % NSTATE_BYTES);
    for (int rep = 0; rep < 30; rep++) begin
      learn_en = (rep >= 15);
      for (int g = 0; g < G; g++) for (int l = 0; l < P; l++) wtab[g][l] = 4'($urandom_range(0, 9));
      case (rep % 5)
        3: sweep(OP_LEAK, 0, G - 1, '1);
        4: begin
          int g = $urandom_range(G - 1);
          sweep(OP_SOP, g, g, P'(1) << $urandom_range(P - 1));
        end
        default: begin
          sweep(OP_SOP, 0, G - 1, '1);
          chk(last_wr_cyc - first_rd_cyc === G, $sformatf("sweep took %0d cycles, expected %0d", last_wr_cyc - first_rd_cyc + 1, G + 1));
        end
      endcase
    end
    for (int j = 0; j < N; j++) for (int b = 0; b < NSTATE_BYTES; b++) cfg_read_check(j, b);
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
