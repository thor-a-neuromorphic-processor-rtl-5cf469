// Testbench for spike_fifo: random push/pop traffic against a queue model,
// checking head data, count, empty/full and the sticky overflow flag.
module tb_spike_fifo;
  localparam int DEPTH = 8, WIDTH = 12;
  logic clk = 0, rst_n = 0, push, pop, empty, full, overflow;
  logic [WIDTH-1:0] din, dout;
  logic [3:0] count;
  logic [WIDTH-1:0] q[$];
  logic exp_ovf = 0;
  int checks = 0, failures = 0, n_full = 0;

  spike_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (count !== 4'(q.size()) || empty !== (q.size() === 0) || full !== (q.size() === DEPTH) ||
          (q.size() > 0 && dout !== q[0]) || overflow !== exp_ovf) begin
        failures++;
        $display("FAIL @%0d: count=%0d exp=%0d dout=%h", i, count, q.size(), dout);
      end
      if (full) n_full++;
      // bias towards filling in the first half, draining in the second
      push = (i < 1500) ? ($urandom_range(3) !== 0) : ($urandom_range(3) === 0);
      pop  = (i < 1500) ? ($urandom_range(3) === 0) : ($urandom_range(3) !== 0);
      din  = WIDTH'($urandom);
      @(posedge clk);
      begin
        bit did_pop, room;
        did_pop = pop && q.size() > 0;
        room = (q.size() < DEPTH) || did_pop;
        if (did_pop) void'(q.pop_front());
        if (push && room) q.push_back(din);
        if (push && !room) exp_ovf = 1;
      end
    end
    checks++;
    if (n_full === 0 || !exp_ovf) begin failures++; $display("FAIL: full/overflow never reached"); end
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
