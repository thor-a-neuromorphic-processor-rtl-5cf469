// Testbench for spike_scheduler (N=64, P=8, FIFO depth 8).  Random spike
// vectors are pushed while a consumer answers `send_next` at random; every
// spike taken must be the next one of a reference queue (entries in push
// order, neurons in ascending order within an entry, empty vectors never
// queued).  Also checks that spikes of one entry are sent every two cycles
// when the consumer always accepts, and that the overflow flag rises when
// more than N/P vectors are queued without consumption.
module tb_spike_scheduler;
  localparam int N = 64, P = 8;
  logic clk = 0, rst_n = 0;
  logic spike_valid, send_next, out_valid, overflow;
  logic [P-1:0] spike_vec;
  logic [5:0] spike_offset, out_addr;
  logic [3:0] fifo_count;
  int q[$];
  int checks = 0, failures = 0, sent = 0, last_take = -10, cyc = 0, gap2 = 0;
  bit always_take = 0, dbg = 0;

  spike_scheduler #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // consumer
  always @(negedge clk) begin
    send_next = out_valid && (always_take || $urandom_range(1) === 0);
    if (send_next) begin
      chk(q.size() > 0 && out_addr === 6'(q[0]), $sformatf("sent %0d expected %0d", out_addr, q.size() ? q[0] : -1));
      if (q.size() > 0) void'(q.pop_front());
      sent++;
      if (dbg) $display("%0d sent %0d", cyc, out_addr);
      if (always_take && cyc - last_take === 2) gap2++;
      last_take = cyc;
    end
  end

  task automatic push_vec(logic [P-1:0] v, int g);
    @(negedge clk);
    #2;
    spike_valid = 1; spike_vec = v; spike_offset = 6'(g * P);
    for (int l = 0; l < P; l++) if (v[l]) q.push_back(g * P + l);
    if (dbg) $display("%0d push g%0d %b", cyc, g, v);
    @(negedge clk);
    #2;
    spike_valid = 0;
  endtask

  initial begin
    spike_valid = 0; spike_vec = 0; spike_offset = 0; send_next = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      logic [P-1:0] v;
      v = ($urandom_range(3) === 0) ? '0 : P'($urandom);
      push_vec(v, $urandom_range(N / P - 1));
      repeat ($urandom_range(4, 24)) @(negedge clk);
    end
    repeat (200) @(negedge clk);
    chk(q.size() === 0 && !out_valid, "all spikes delivered");
    chk(!overflow, "no overflow under moderate load");
    // rate: one spike every two cycles
    always_take = 1;
    push_vec(8'b1011_0110, 3);
    repeat (30) @(negedge clk);
    chk(gap2 >= 4, $sformatf("spikes of one entry sent every 2 cycles (%0d gaps)", gap2));
    // overflow: 10 vectors with no consumer
    always_take = 0;
    force send_next = 0;
    for (int i = 0; i < 10; i++) push_vec(8'hff, i % 8);
    chk(overflow, "overflow flag after N/P+2 pushes");
    chk(fifo_count === 4'd8, "FIFO holds N/P entries");
    release send_next;
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
