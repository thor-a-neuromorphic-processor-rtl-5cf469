// Testbench for scm_bank: random byte-masked writes and reads against a
// reference array; also checks that a disabled bank neither writes nor
// changes its read data, and that read data arrives one cycle after the read.
module tb_scm_bank;
  localparam int WORDS = 8, BYTES = 4;
  logic clk = 0, en, we;
  logic [BYTES-1:0] be;
  logic [2:0] addr;
  logic [8*BYTES-1:0] wdata, rdata;
  logic [8*BYTES-1:0] model [WORDS];
  int checks = 0, failures = 0;

  scm_bank #(.WORDS(WORDS), .BYTES(BYTES)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(int a, logic [BYTES-1:0] m, logic [8*BYTES-1:0] d);
    en = 1; we = 1; addr = 3'(a); be = m; wdata = d;
    @(posedge clk); #1;
    for (int b = 0; b < BYTES; b++) if (m[b]) model[a][8*b +: 8] = d[8*b +: 8];
    en = 0;
  endtask

  task automatic read_check(int a);
    en = 1; we = 0; addr = 3'(a);
    @(posedge clk); #1;
    en = 0;
    chk(rdata === model[a], $sformatf("read word %0d: %h expected %h", a, rdata, model[a]));
  endtask

  initial begin
    en = 0; we = 0; be = 0; addr = 0; wdata = 0;
    @(posedge clk); #1;
    for (int a = 0; a < WORDS; a++) write(a, '1, $urandom);
    for (int i = 0; i < 200; i++) begin
      if ($urandom_range(1)) write($urandom_range(WORDS-1), BYTES'($urandom), $urandom);
      else read_check($urandom_range(WORDS-1));
    end
    // disabled bank: no write, read data held
    read_check(3);
    en = 0; we = 1; addr = 3; be = '1; wdata = ~model[3];
    @(posedge clk); #1;
    chk(rdata === model[3], "rdata held while disabled");
    we = 0;
    read_check(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
