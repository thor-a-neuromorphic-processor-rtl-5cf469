// Testbench for controller (N=64, P=8, 8 groups).  Drives AER events,
// internal spikes and SPI requests and records every stage-R slot issued.
// Checks: a neuron event issues groups 0..7 on 8 consecutive cycles for the
// right pre-synaptic neuron; a synapse event issues one slot with one lane;
// a time-reference event issues 8 leak slots; SPI beats internal spikes,
// which beat AER events; a full output FIFO stalls issue and issue resumes
// when it drains; register and memory accesses over the SPI port.
module tb_controller;
  import thor_pkg::*;
  localparam int N = 64, P = 8, G = N / P;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready, isch_valid, isch_send_next, isch_overflow, osch_overflow;
  logic [13:0] ev_addr;
  logic [5:0] isch_addr, rd_pre;
  logic [3:0] osch_count;
  logic req_valid, req_we, req_ready;
  spi_target_e req_target;
  logic [20:0] req_addr, cfg_addr;
  logic [7:0] req_wdata, req_rdata, cfg_wdata, ncfg_rdata, scfg_rdata;
  logic rd_valid, ncfg_valid, scfg_valid, cfg_we, learn_en, busy, stall;
  op_e rd_op;
  logic [2:0] rd_group;
  logic [P-1:0] rd_mask;
  int checks = 0, failures = 0, cyc = 0, nstall = 0;
  typedef struct { int c; op_e op; int g; int pre; logic [P-1:0] m; } slot_t;
  slot_t slots[$];

  controller #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rd_valid) slots.push_back('{cyc, rd_op, int'(rd_group), int'(rd_pre), rd_mask});
    if (stall) nstall++;
  end
  assign ncfg_rdata = 8'hA5;
  assign scfg_rdata = 8'h3C;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || ev_valid || isch_valid) @(negedge clk);
  endtask

  task automatic aer_event(ev_type_e t, int pre, int post);
    @(negedge clk);
    ev_valid = 1; ev_addr = {t, 6'(pre), 6'(post)};
    do @(negedge clk); while (!ev_taken);
    ev_valid = 0;
  endtask
  logic ev_taken = 0;
  always @(posedge clk) ev_taken <= ev_valid && ev_ready;

  task automatic check_sweep(op_e op, int pre, string what);
    chk(slots.size() === G, $sformatf("%s: %0d slots", what, slots.size()));
    for (int i = 0; i < slots.size(); i++)
      chk(slots[i].g === i && slots[i].op === op && (op === OP_LEAK || slots[i].pre === pre) && slots[i].m === '1 &&
          slots[i].c === slots[0].c + i, $sformatf("%s slot %0d", what, i));
  endtask

  task automatic spi(logic we, spi_target_e t, int a, logic [7:0] d, output logic [7:0] r);
    @(negedge clk);
    req_valid = 1; req_we = we; req_target = t; req_addr = 21'(a); req_wdata = d;
    forever begin
      @(posedge clk);
      if (req_ready) begin r = req_rdata; break; end
    end
    #1 req_valid = 0;
  endtask

  initial begin
    logic [7:0] r;
    ev_valid = 0; ev_addr = 0; isch_valid = 0; isch_addr = 0; isch_overflow = 0; osch_overflow = 0;
    osch_count = 0; req_valid = 0; req_we = 0; req_target = TGT_REG; req_addr = 0; req_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // neuron event
    slots.delete(); aer_event(EV_NEURON, 13, 0); wait_idle();
    check_sweep(OP_SOP, 13, "neuron event");
    // leak event
    slots.delete(); aer_event(EV_LEAK, 0, 0); wait_idle();
    check_sweep(OP_LEAK, 0, "leak event");
    // synapse event 5 -> 42 : group 5, lane 2
    slots.delete(); aer_event(EV_SYNAPSE, 5, 42); wait_idle();
    chk(slots.size() === 1 && slots[0].g === 5 && slots[0].pre === 5 && slots[0].m === 8'b0000_0100 && slots[0].op === OP_SOP,
        "synapse event slot");
    // ignored event type
    slots.delete(); aer_event(EV_NONE, 1, 1); wait_idle();
    chk(slots.size() === 0, "EV_NONE issues nothing");
    // internal spike has priority over AER event
    slots.delete();
    @(negedge clk);
    isch_valid = 1; isch_addr = 6'd33; ev_valid = 1; ev_addr = {EV_NEURON, 6'd7, 6'd0};
    #1;
    chk(isch_send_next && !ev_ready, "internal spike taken before AER event");
    @(negedge clk); isch_valid = 0;
    do @(negedge clk); while (!ev_taken);
    ev_valid = 0;
    wait_idle();
    chk(slots.size() === 2 * G && slots[0].pre === 33 && slots[G].pre === 7, "internal then external sweep");
    // stall on a full output FIFO
    slots.delete();
    osch_count = 4'(G);         // output FIFO full
    aer_event(EV_NEURON, 2, 0);
    repeat (10) @(negedge clk);
    chk(stall && slots.size() === 0, $sformatf("stalled after %0d slots", slots.size()));
    osch_count = 0;
    wait_idle();
    chk(slots.size() === G && nstall > 5, "sweep completes after stall");
    // SPI: registers
    spi(1, TGT_REG, 0, 8'h01, r);
    chk(learn_en, "learn_en set by register write");
    spi(0, TGT_REG, 0, 8'h00, r);
    chk(r === 8'h01, "control register read");
    isch_overflow = 1;
    spi(0, TGT_REG, 1, 8'h00, r);
    chk(r === 8'h01, "status register read");
    isch_overflow = 0;
    spi(0, TGT_NEURON, 77, 8'h00, r);
    chk(r === 8'hA5, "neuron read returns neuron core data");
    spi(0, TGT_SYN, 77, 8'h00, r);
    chk(r === 8'h3C, "synapse read returns synapse core data");
    // SPI beats a pending internal spike
    @(negedge clk);
    isch_valid = 1; isch_addr = 6'd1;
    req_valid = 1; req_we = 1; req_target = TGT_REG; req_addr = 0; req_wdata = 0;
    #1;
    chk(req_ready && !isch_send_next, "SPI before internal spike");
    @(posedge clk); #1;
    req_valid = 0;
    #1;
    chk(isch_send_next, "internal spike next");
    @(negedge clk); isch_valid = 0;
    wait_idle();
    chk(!learn_en, "learn_en cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
