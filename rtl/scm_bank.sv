// Standard-cell memory bank.
//
// A single-port array of flip-flops, WORDS words of BYTES bytes, as used for
// every neuron and synapse memory bank of THOR.  Each cycle it performs at most
// one access: a write of the bytes selected by `be`, or a read whose data
// appears on `rdata` on the next cycle and stays there until the next read.
// With `en` low the bank does nothing (this is where the chip's input and
// clock gating acts).  The paper chose standard-cell memory over SRAM macros;
// the byte write enables and the registered read port are this design's own
// choices.  The contents are not reset.
module scm_bank #(
  parameter int unsigned WORDS = 4,
  parameter int unsigned BYTES = 32,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 we,
  input  logic [BYTES-1:0]     be,
  input  logic [AW-1:0]        addr,
  input  logic [8*BYTES-1:0]   wdata,
  output logic [8*BYTES-1:0]   rdata
);

  logic [BYTES-1:0][7:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < BYTES; b++)
          if (be[b]) mem[addr][b] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
