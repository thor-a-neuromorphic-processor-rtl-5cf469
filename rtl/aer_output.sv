// AER output port: sends each spike of the output scheduler off-chip.
//
// Four-phase handshake.  When the output scheduler presents a spike
// (`in_valid`), its address is driven on `aerout_addr` and `aerout_req` is
// raised.  When the receiver raises `aerout_ack` (synchronised with two
// flip-flops), `aerout_req` is dropped and `send_next` is pulsed for one cycle
// so that the scheduler moves on; the port then waits for `aerout_ack` to fall
// before it takes the next spike.  The pins are the paper's; the protocol
// details are this design's choice.
module aer_output #(
  parameter int unsigned AW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  output logic          send_next,
  output logic [AW-1:0] aerout_addr,
  output logic          aerout_req,
  input  logic          aerout_ack
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RELEASE} state_e;
  state_e state;
  logic [1:0] ack_sync;
  logic       ack_s;

  assign ack_s     = ack_sync[1];
  assign send_next = (state == S_REQ) && ack_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      ack_sync    <= '0;
      aerout_addr <= '0;
      aerout_req  <= 1'b0;
    end else begin
      ack_sync <= {ack_sync[0], aerout_ack};
      unique case (state)
        S_IDLE: if (in_valid && !ack_s) begin
          aerout_addr <= in_addr;
          aerout_req  <= 1'b1;
          state       <= S_REQ;
        end
        S_REQ: if (ack_s) begin
          aerout_req <= 1'b0;
          state      <= S_RELEASE;
        end
        S_RELEASE: if (!ack_s) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
