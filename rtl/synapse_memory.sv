// Synapse memory: the N x N crossbar of 4-bit weights in two interleaved banks.
//
// A word holds the P weights from one pre-synaptic neuron i to one group g of
// P post-synaptic neurons (4P bits, lane l in bits [4l+3:4l]).  Group g of row
// i is stored in bank g mod 2 at word {i, g/2}; each bank therefore holds
// N*N/2P words and the two together the 4*N*N bits the paper gives.
//
// Following the paper's generalised synapse-memory hierarchy, the array is
// built from standard-cell banks of S bits, each a full 4P bits wide (one
// bank per row), 4*N*N/S banks in all: every interleave bank is a column of
// NB = (4*N*N/2)/S such SCM banks of S/4P words.  A write decoder enables only
// the SCM bank that holds the addressed word; on a read, the number of that
// bank is registered and selects its output (the read-out multiplexer).
// S defaults to 2*N*N bits, one SCM bank per interleave bank; the paper does
// not say which S it chose in the end.  Each interleave bank is single-port
// with byte write enables and a one-cycle read latency.
module synapse_memory
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  parameter int unsigned S = 2 * N * N,     // bits per SCM bank
  localparam int unsigned WORDS = N * N / (2 * P),
  localparam int unsigned WAW = $clog2(WORDS),
  localparam int unsigned WB = 4 * P / 8,   // bytes per word
  localparam int unsigned WPB = S / (4 * P),  // words per SCM bank
  localparam int unsigned NB = WORDS / WPB,   // SCM banks per interleave bank
  localparam int unsigned IW = (WPB > 1) ? $clog2(WPB) : 1,
  localparam int unsigned RW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                      clk,
  input  logic [1:0]                bank_en,
  input  logic [1:0]                bank_we,
  input  logic [1:0][WB-1:0]        bank_be,
  input  logic [1:0][WAW-1:0]       bank_addr,
  input  logic [1:0][4*P-1:0]       bank_wdata,
  output logic [1:0][4*P-1:0]       bank_rdata
);

  initial begin
    assert (WPB >= 1 && NB >= 1 && WPB * NB == WORDS)
      else $fatal(1, "synapse_memory: S must be 4P times a power of two, at most 2*N*N");
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic [NB-1:0][4*P-1:0] rd;
    logic [RW-1:0]          row, sel_q;
    logic [IW-1:0]          idx;
    assign row = RW'(32'(bank_addr[b]) / WPB);
    assign idx = IW'(32'(bank_addr[b]) % WPB);

    for (genvar r = 0; r < NB; r++) begin : g_row
      scm_bank #(.WORDS(WPB), .BYTES(WB)) u_bank (
        .clk   (clk),
        .en    (bank_en[b] && (NB == 1 || row == RW'(r))),
        .we    (bank_we[b]),
        .be    (bank_be[b]),
        .addr  (idx),
        .wdata (bank_wdata[b]),
        .rdata (rd[r])
      );
    end

    // read-out multiplexer: the bank of the last read
    always_ff @(posedge clk)
      if (bank_en[b] && !bank_we[b]) sel_q <= row;
    assign bank_rdata[b] = rd[(NB == 1) ? 0 : sel_q];
  end

endmodule
