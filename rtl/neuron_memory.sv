// Neuron state memory: two interleaved banks of seven sub-banks.
//
// The N neurons are processed in groups of P (group g = neurons g*P ..
// g*P+P-1).  Even groups live in bank 0 and odd groups in bank 1, at entry
// g/2, so that consecutive groups of a sweep alternate between the banks.
// Each bank is seven standard-cell sub-banks, one per byte of neuron state,
// each P bytes wide and N/2P entries deep, exactly as the paper describes.
// Every sub-bank has its own byte enables, so bytes that are read-only during
// operation (leakage, thresholds, calcium windows) are never written except
// by configuration.  Reads likewise have one enable per sub-bank
// (`bank_re`): a sub-bank that is not enabled is not accessed and keeps its
// last output, which lets the core leave the four calcium sub-banks idle
// while learning is off, as the paper suggests.  Each bank is single-port with
// a one-cycle read latency.
module neuron_memory
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  localparam int unsigned ENTRIES = N / (2 * P),
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                                   clk,
  input  logic [1:0]                             bank_en,
  input  logic [1:0]                             bank_we,
  input  logic [1:0][EW-1:0]                     bank_addr,
  input  logic [1:0][NSTATE_BYTES-1:0][P-1:0]    bank_be,     // [bank][sub-bank][lane]
  input  logic [1:0][NSTATE_BYTES-1:0]           bank_re,     // [bank][sub-bank], reads
  input  neuron_state_t [1:0][P-1:0]             bank_wdata,  // [bank][lane]
  output neuron_state_t [1:0][P-1:0]             bank_rdata
);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    for (genvar s = 0; s < NSTATE_BYTES; s++) begin : g_sub
      logic [8*P-1:0] wd, rd;
      for (genvar l = 0; l < P; l++) begin : g_lane
        assign wd[8*l +: 8] = bank_wdata[b][l][8*s +: 8];
        assign bank_rdata[b][l][8*s +: 8] = rd[8*l +: 8];
      end
      scm_bank #(.WORDS(ENTRIES), .BYTES(P)) u_sub (
        .clk   (clk),
        .en    (bank_en[b] & (bank_we[b] ? (|bank_be[b][s]) : bank_re[b][s])),
        .we    (bank_we[b]),
        .be    (bank_be[b][s]),
        .addr  (bank_addr[b]),
        .wdata (wd),
        .rdata (rd)
      );
    end
  end

endmodule
