// Testbench for spi_slave: a mode-0 SPI master sends random write and read
// frames (SCK half period of 8 clock cycles); a controller model answers
// requests after 1-3 cycles, returning a data byte derived from the address.
// Checks the decoded fields of every request and the byte shifted out on MISO.
module tb_spi_slave;
  import thor_pkg::*;
  localparam int HALF = 8;
  logic clk = 0, rst_n = 0, sck, mosi, miso, req_valid, req_we, req_ready;
  spi_target_e req_target;
  logic [20:0] req_addr;
  logic [7:0] req_wdata, req_rdata;
  int checks = 0, failures = 0;

  spi_slave dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] rd_value(logic [20:0] a);
    return 8'(a * 37 + (a >> 8) + 5);
  endfunction

  // controller model
  typedef struct { logic we; spi_target_e t; logic [20:0] a; logic [7:0] d; } req_t;
  req_t reqs[$];
  initial begin
    req_ready = 0; req_rdata = 0;
    forever begin
      @(posedge clk iff req_valid);
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
      req_ready = 1; req_rdata = rd_value(req_addr);
      reqs.push_back('{req_we, req_target, req_addr, req_wdata});
      @(posedge clk); #1;
      req_ready = 0;
    end
  end

  task automatic frame(logic we, logic [1:0] t, logic [20:0] a, logic [7:0] d, output logic [7:0] r);
    logic [31:0] f;
    f = {we, t, a, d};
    for (int i = 31; i >= 0; i--) begin
      mosi = f[i];
      repeat (HALF) @(posedge clk);
      sck = 1;                       // slave samples on this edge
      if (i < 8) r[i] = miso;        // master samples MISO
      repeat (HALF) @(posedge clk);
      sck = 0;
    end
    repeat (HALF) @(posedge clk);
  endtask

  initial begin
    sck = 0; mosi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      logic we; logic [1:0] t; logic [20:0] a; logic [7:0] d, r;
      we = 1'($urandom); t = 2'($urandom); a = 21'($urandom); d = 8'($urandom);
      reqs.delete();
      frame(we, t, a, d, r);
      chk(reqs.size() === 1, $sformatf("frame %0d: %0d requests", i, reqs.size()));
      if (reqs.size() === 1)
        chk(reqs[0].we === we && reqs[0].t === spi_target_e'(t) && reqs[0].a === a && (!we || reqs[0].d === d),
            $sformatf("frame %0d fields", i));
      if (!we) chk(r === rd_value(a), $sformatf("frame %0d read %h exp %h", i, r, rd_value(a)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
