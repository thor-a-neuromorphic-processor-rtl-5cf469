// Spike FIFO of one scheduler thread.
//
// A circular buffer of DEPTH entries of WIDTH bits ({offset, spike vector}
// in THOR).  `push` stores `din` at the tail, `pop` drops the head, which is
// always visible on `dout`.  Push and pop may happen in the same cycle, even
// when the FIFO is full.  A push that finds the FIFO full (and no pop) is
// dropped and sets the sticky `overflow` flag, which only reset clears.  The
// depth of N/P entries is the paper's; dropping on overflow is this design's
// choice.
module spike_fifo #(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned WIDTH = 40,
  localparam int unsigned PTRW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count,
  output logic             overflow
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTRW-1:0]  rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rd_ptr];

  function automatic logic [PTRW-1:0] inc(logic [PTRW-1:0] p);
    return (p == PTRW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
      if (push && !do_push) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

endmodule
