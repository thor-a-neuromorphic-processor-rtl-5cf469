// Testbench for aer_input: an off-chip sender performs four-phase handshakes
// with random addresses and delays; the controller side takes events after a
// random wait.  Each event must be offered exactly once with its address, ACK
// must not rise before the controller took the event, and must fall after REQ.
module tb_aer_input;
  localparam int AW = 18;
  logic clk = 0, rst_n = 0;
  logic aerin_req, aerin_ack, ev_valid, ev_ready;
  logic [AW-1:0] aerin_addr, ev_addr;
  int sentq[$], got[$];
  int checks = 0, failures = 0, ndone = 0, taken = 0;

  aer_input #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // sender
  initial begin
    aerin_req = 0; aerin_addr = 0;
    wait (rst_n);
    for (int i = 0; i < 50; i++) begin
      int t0;
      @(negedge clk);
      aerin_addr = AW'($urandom);
      sentq.push_back(int'(aerin_addr));
      t0 = taken;
      aerin_req = 1;
      @(posedge clk iff aerin_ack);
      chk(taken === t0 + 1, "ACK only after the controller took the event");
      repeat ($urandom_range(0, 4)) @(negedge clk);
      aerin_req = 0;
      aerin_addr = AW'($urandom);
      @(posedge clk iff !aerin_ack);
      ndone++;
    end
  end

  // controller side
  always @(negedge clk) begin
    ev_ready = ev_valid && ($urandom_range(3) === 0);
    if (ev_ready) begin got.push_back(int'(ev_addr)); taken++; end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (ndone === 50);
    repeat (20) @(posedge clk);
    chk(got.size() === 50, $sformatf("took %0d of 50 events", got.size()));
    for (int i = 0; i < got.size() && i < sentq.size(); i++)
      chk(got[i] === sentq[i], $sformatf("event %0d: %h exp %h", i, got[i], sentq[i]));
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
