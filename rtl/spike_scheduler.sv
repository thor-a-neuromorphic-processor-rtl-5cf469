// One thread of THOR's multi-threaded spike scheduler.
//
// During a neuron event the neuron core presents, each cycle, a P-bit spike
// vector and the number of the first neuron of its group.  Vectors with at
// least one spike are pushed into a FIFO of N/P entries.  A controller FSM
// (IDLE, SEND_SPIKE, UPDATE_STATUS, POP) then decodes the head entry one spike
// at a time: in SEND_SPIKE the lowest-numbered spiking neuron not yet sent is
// presented on `out_addr` with `out_valid`; when the consumer answers with
// `send_next` the FSM moves to UPDATE_STATUS, marks that neuron in the status
// register and, once the status equals the spike vector, goes to POP, which
// drops the entry, clears the status and returns to SEND_SPIKE or, if the
// FIFO is now empty, to IDLE.  One spike is thus sent at most every two cycles.
// The same module serves as the input (internal spike) scheduler, paced by
// the controller, and as the output scheduler, paced by the AER output.
// The structure and the FSM follow the paper's scheduler figures; the decode
// order and the exact timing of the empty test in POP are this design's.
module spike_scheduler
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  parameter int unsigned DEPTH = N / P,
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned PW = $clog2(P),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          spike_valid,
  input  logic [P-1:0]  spike_vec,
  input  logic [NW-1:0] spike_offset,
  input  logic          send_next,
  output logic          out_valid,
  output logic [NW-1:0] out_addr,
  output logic [CW-1:0] fifo_count,
  output logic          overflow
);

  typedef enum logic [1:0] {S_IDLE, S_SEND, S_UPDATE, S_POP} state_e;
  state_e state, state_nx;

  logic [NW+P-1:0] head;
  logic [P-1:0]    head_vec, status, pending;
  logic [NW-1:0]   head_off;
  logic            empty, full, push, pop;
  logic [PW-1:0]   idx;

  assign push = spike_valid && (|spike_vec);
  assign pop  = (state == S_POP);

  spike_fifo #(.DEPTH(DEPTH), .WIDTH(NW + P)) u_fifo (
    .clk      (clk),
    .rst_n    (rst_n),
    .push     (push),
    .din      ({spike_offset, spike_vec}),
    .pop      (pop),
    .dout     (head),
    .empty    (empty),
    .full     (full),
    .count    (fifo_count),
    .overflow (overflow)
  );

  assign {head_off, head_vec} = head;
  assign pending = head_vec & ~status;

  // decoder: lowest pending spike of the head entry
  always_comb begin
    idx = '0;
    for (int i = P - 1; i >= 0; i--)
      if (pending[i]) idx = PW'(i);
  end

  assign out_valid = (state == S_SEND);
  assign out_addr  = head_off + NW'(idx);

  always_comb begin
    state_nx = state;
    unique case (state)
      S_IDLE:   if (!empty) state_nx = S_SEND;
      S_SEND:   if (send_next) state_nx = S_UPDATE;
      S_UPDATE: state_nx = ((status | (P'(1) << idx)) == head_vec) ? S_POP : S_SEND;
      // empty as it will be once this entry is gone
      S_POP:    state_nx = (fifo_count == CW'(1) && !push) ? S_IDLE : S_SEND;
      default:  state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      status <= '0;
    end else begin
      state <= state_nx;
      if (state == S_UPDATE) status <= status | (P'(1) << idx);
      if (state == S_POP)    status <= '0;
    end
  end

  a_send_only_when_sending: assert property (@(posedge clk) disable iff (!rst_n)
    send_next |-> state == S_SEND);
  a_not_empty_when_sending: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_SEND |-> !empty && (|pending));

endmodule
