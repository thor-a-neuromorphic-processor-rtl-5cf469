// Testbench for aer_output: a producer offers random addresses and holds each
// until `send_next`; an off-chip receiver answers REQ with ACK after random
// delays.  Every address must arrive once, in order, `send_next` must pulse
// once per address, and REQ must follow the four-phase rules.
module tb_aer_output;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, send_next, aerout_req, aerout_ack;
  logic [AW-1:0] in_addr, aerout_addr;
  int sentq[$], got[$];
  int checks = 0, failures = 0, nsend = 0;

  aer_output #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // producer
  initial begin
    in_valid = 0; in_addr = 0;
    wait (rst_n);
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      in_valid = 1; in_addr = AW'($urandom);
      sentq.push_back(int'(in_addr));
      do @(negedge clk); while (!send_next);
      nsend++;
      in_valid = 0;
      repeat ($urandom_range(3)) @(negedge clk);
    end
  end

  // receiver
  initial begin
    aerout_ack = 0;
    forever begin
      @(posedge clk iff aerout_req);
      repeat ($urandom_range(1, 6)) @(posedge clk);
      got.push_back(int'(aerout_addr));
      chk(aerout_req, "REQ held until ACK");
      aerout_ack = 1;
      @(posedge clk iff !aerout_req);
      repeat ($urandom_range(0, 6)) @(posedge clk);
      chk(!aerout_req, "REQ stays low while ACK high");
      aerout_ack = 0;
    end
  end

  // four-phase rule: REQ may only rise while ACK is low
  logic req_q = 0;
  always @(posedge clk) begin
    if (rst_n && aerout_req && !req_q) chk(!aerout_ack, "REQ rose while ACK high");
    req_q <= aerout_req;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nsend === 60);
    repeat (30) @(posedge clk);
    chk(got.size() === 60, $sformatf("received %0d of 60", got.size()));
    for (int i = 0; i < got.size() && i < sentq.size(); i++)
      chk(got[i] === sentq[i], $sformatf("event %0d: %0d exp %0d", i, got[i], sentq[i]));
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
