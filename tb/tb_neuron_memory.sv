// Testbench for neuron_memory (N=64, P=8): both banks accessed at once with
// random per-sub-bank, per-lane byte enables, checked against a model of
// 2 banks x 4 entries x 8 lanes x 7 bytes.  Reads enable random sub-banks;
// a sub-bank left out must keep its previous output.
module tb_neuron_memory;
  import thor_pkg::*;
  localparam int N = 64, P = 8, ENT = N / (2 * P);
  logic clk = 0;
  logic [1:0] bank_en, bank_we;
  logic [1:0][1:0] bank_addr;
  logic [1:0][NSTATE_BYTES-1:0][P-1:0] bank_be;
  logic [1:0][NSTATE_BYTES-1:0] bank_re;
  neuron_state_t held [2][P];
  logic held_ok [2][NSTATE_BYTES];
  neuron_state_t [1:0][P-1:0] bank_wdata, bank_rdata;
  neuron_state_t model [2][ENT][P];
  int checks = 0, failures = 0;

  neuron_memory #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    bank_en = 0; bank_we = 0; bank_addr = 0; bank_be = 0; bank_re = 0; bank_wdata = 0;
    foreach (held_ok[b, s]) held_ok[b][s] = 0;
    // fill everything
    for (int e = 0; e < ENT; e++) begin
      @(negedge clk);
      bank_en = 2'b11; bank_we = 2'b11; bank_be = '1;
      bank_addr = {2'(e), 2'(e)};
      for (int b = 0; b < 2; b++) for (int l = 0; l < P; l++) begin
        bank_wdata[b][l] = {$urandom, $urandom};
        model[b][e][l] = bank_wdata[b][l];
      end
      @(posedge clk);
    end
    for (int i = 0; i < 400; i++) begin
      logic [1:0] rd;
      @(negedge clk);
      bank_en = 2'($urandom); bank_we = 2'($urandom);
      for (int b = 0; b < 2; b++) begin
        bank_addr[b] = 2'($urandom);
        for (int s = 0; s < NSTATE_BYTES; s++) bank_be[b][s] = P'($urandom);
        bank_re[b] = ($urandom_range(1) === 1) ? '1 : NSTATE_BYTES'($urandom);
        for (int l = 0; l < P; l++) bank_wdata[b][l] = {$urandom, $urandom};
      end
      rd = bank_en & ~bank_we;
      @(posedge clk);
      for (int b = 0; b < 2; b++) if (bank_en[b] && bank_we[b])
        for (int l = 0; l < P; l++) for (int s = 0; s < NSTATE_BYTES; s++)
          if (bank_be[b][s][l]) model[b][bank_addr[b]][l][8*s +: 8] = bank_wdata[b][l][8*s +: 8];
      #1;
      for (int b = 0; b < 2; b++) if (rd[b]) begin
        checks++;
        for (int l = 0; l < P; l++) begin
          neuron_state_t e;
          e = model[b][bank_addr[b]][l];
          for (int s = 0; s < NSTATE_BYTES; s++)
            if (!bank_re[b][s]) begin
              if (held_ok[b][s]) e[8*s +: 8] = held[b][l][8*s +: 8];
              else e[8*s +: 8] = bank_rdata[b][l][8*s +: 8];
            end
          if (bank_rdata[b][l] !== e) begin
            failures++;
            $display("FAIL: bank %0d entry %0d lane %0d: %h exp %h", b, bank_addr[b], l,
                     bank_rdata[b][l], e);
            break;
          end
        end
        for (int s = 0; s < NSTATE_BYTES; s++) if (bank_re[b][s]) held_ok[b][s] = 1;
        for (int l = 0; l < P; l++) held[b][l] = bank_rdata[b][l];
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
