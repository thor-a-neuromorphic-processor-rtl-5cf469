// AER input port of the controller: receives events from off-chip.
//
// Four-phase handshake.  When `aerin_req` (synchronised with two flip-flops)
// is seen high, `aerin_addr` is captured (it must be stable while REQ is high)
// and offered to the controller FSM on `ev_valid`/`ev_addr`.  When the
// controller takes it (`ev_ready`), `aerin_ack` is raised; once the sender
// drops REQ, ACK is dropped and the port is ready for the next event.  The
// pins are the paper's; the protocol details are this design's choice.
module aer_input #(
  parameter int unsigned AW = 18
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] aerin_addr,
  input  logic          aerin_req,
  output logic          aerin_ack,
  output logic          ev_valid,
  output logic [AW-1:0] ev_addr,
  input  logic          ev_ready
);

  typedef enum logic [1:0] {S_IDLE, S_PEND, S_ACK} state_e;
  state_e state;
  logic [1:0] req_sync;
  logic       req_s;

  assign req_s     = req_sync[1];
  assign ev_valid  = (state == S_PEND);
  assign aerin_ack = (state == S_ACK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      req_sync <= '0;
      ev_addr  <= '0;
    end else begin
      req_sync <= {req_sync[0], aerin_req};
      unique case (state)
        S_IDLE: if (req_s) begin
          ev_addr <= aerin_addr;
          state   <= S_PEND;
        end
        S_PEND: if (ev_ready) state <= S_ACK;
        S_ACK:  if (!req_s) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
