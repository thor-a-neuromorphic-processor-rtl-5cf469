// Testbench for synapse_memory (N=32, P=8, 64 words of 32 bits per bank):
// fills both banks, then random byte-masked writes and reads on both banks at
// once, compared with a model.  Two copies run side by side: one with a single
// SCM bank per interleave bank (the default S) and one built from eight SCM
// banks of S = 256 bits each (8 words), which exercises the bank decoder and
// the read-out multiplexer.
module tb_synapse_memory;
  localparam int N = 32, P = 8, WORDS = N * N / (2 * P), WB = P / 2;
  logic clk = 0;
  logic [1:0] bank_en, bank_we;
  logic [1:0][WB-1:0] bank_be;
  logic [1:0][5:0] bank_addr;
  logic [1:0][4*P-1:0] bank_wdata, bank_rdata, rdata_small;
  logic [4*P-1:0] model [2][WORDS];
  int checks = 0, failures = 0;

  synapse_memory #(.N(N), .P(P)) dut (.*);
  synapse_memory #(.N(N), .P(P), .S(256)) dut_small (
    .clk, .bank_en, .bank_we, .bank_be, .bank_addr, .bank_wdata, .bank_rdata(rdata_small));
  always #5 clk = ~clk;

  initial begin
    bank_en = 0; bank_we = 0; bank_be = 0; bank_addr = 0; bank_wdata = 0;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      bank_en = 2'b11; bank_we = 2'b11; bank_be = '1; bank_addr = {6'(w), 6'(w)};
      bank_wdata = {$urandom, $urandom};
      model[0][w] = bank_wdata[0]; model[1][w] = bank_wdata[1];
      @(posedge clk);
    end
    for (int i = 0; i < 600; i++) begin
      logic [1:0] rd;
      @(negedge clk);
      bank_en = 2'($urandom); bank_we = 2'($urandom); bank_be = 8'($urandom);
      bank_addr = {6'($urandom), 6'($urandom)};
      bank_wdata = {$urandom, $urandom};
      rd = bank_en & ~bank_we;
      @(posedge clk);
      for (int b = 0; b < 2; b++) if (bank_en[b] && bank_we[b])
        for (int k = 0; k < WB; k++) if (bank_be[b][k]) model[b][bank_addr[b]][8*k +: 8] = bank_wdata[b][8*k +: 8];
      #1;
      for (int b = 0; b < 2; b++) if (rd[b]) begin
        checks++;
        if (bank_rdata[b] !== model[b][bank_addr[b]]) begin
          failures++;
          $display("FAIL: bank %0d word %0d: %h exp %h", b, bank_addr[b], bank_rdata[b], model[b][bank_addr[b]]);
        end
        checks++;
        if (rdata_small[b] !== model[b][bank_addr[b]]) begin
          failures++;
          $display("FAIL (S=256): bank %0d word %0d: %h exp %h", b, bank_addr[b], rdata_small[b], model[b][bank_addr[b]]);
        end
      end
    end
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
