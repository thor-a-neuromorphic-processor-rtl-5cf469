// THOR controller: the main FSM that decides what the neuron and synapse cores
// do each cycle.
//
// In IDLE it serves, in this order of priority: a pending SPI access, an
// internal spike offered by the input scheduler, an event from the AER input.
//  * SPI: register accesses complete at once; memory writes take one cycle,
//    memory reads two (S_CFG_RD waits for the bank's registered output).
//  * Internal spike from neuron i, or AER neuron event for i: a sweep of all
//    N/P groups with OP_SOP over row i of the synapse matrix.
//  * AER synapse event pre -> post: one slot for the group of `post`, with
//    only that lane enabled.
//  * AER time-reference event: a sweep of all groups with OP_LEAK.
// In RUN one group is issued per cycle to stage R of both cores; the next
// cycle the cores write it back while the following group is read from the
// other bank, so a full sweep of N/P groups is N/P issue cycles plus one
// write cycle (9 cycles for 256 neurons and P = 32).  A group is only issued
// if the output scheduler's FIFO can take the spike vectors still in flight
// (`stall` otherwise), so spikes for the AER output are never lost; the input
// scheduler is not waited for (its FIFO flags an overflow instead, as waiting
// for it could deadlock).  The accept cycle in IDLE between two sweeps also
// guarantees that no bank is read in the cycle it is written.
// Register 0 bit 0 is the learning enable; register 1 reads the two scheduler
// overflow flags.  The configuration write strobe, address and data go to the
// cores unregistered, straight from the SPI request; only the valid strobes
// are generated here.  The event types and priorities, the stall rule and the
// register map are this design's choices; the one-group-per-cycle interleaved
// sweep is the paper's.
module controller
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  parameter int unsigned DEPTH = N / P,
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned PW = $clog2(P),
  localparam int unsigned GW = $clog2(N / P),
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned EVW = 2 + 2 * NW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AER input events {type, pre, post}
  input  logic                  ev_valid,
  input  logic [EVW-1:0]        ev_addr,
  output logic                  ev_ready,
  // input (internal) scheduler
  input  logic                  isch_valid,
  input  logic [NW-1:0]         isch_addr,
  output logic                  isch_send_next,
  input  logic                  isch_overflow,
  // output scheduler
  input  logic [CW-1:0]         osch_count,
  input  logic                  osch_overflow,
  // SPI requests
  input  logic                  req_valid,
  input  logic                  req_we,
  input  spi_target_e           req_target,
  input  logic [SPI_ADDR_W-1:0] req_addr,
  input  logic [7:0]            req_wdata,
  output logic                  req_ready,
  output logic [7:0]            req_rdata,
  // stage R command to both cores
  output logic                  rd_valid,
  output op_e                   rd_op,
  output logic [GW-1:0]         rd_group,
  output logic [NW-1:0]         rd_pre,
  output logic [P-1:0]          rd_mask,
  // configuration ports of the cores
  output logic                  ncfg_valid,
  output logic                  scfg_valid,
  output logic                  cfg_we,
  output logic [SPI_ADDR_W-1:0] cfg_addr,
  output logic [7:0]            cfg_wdata,
  input  logic [7:0]            ncfg_rdata,
  input  logic [7:0]            scfg_rdata,
  // status
  output logic                  learn_en,
  output logic                  busy,
  output logic                  stall
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_CFG_RD} state_e;
  state_e state;

  op_e           ev_op;
  logic [NW-1:0] ev_pre;
  logic [P-1:0]  ev_mask;
  logic [GW-1:0] grp, last_grp;
  logic          w_inflight;
  logic          rd_tgt_syn;

  ev_type_e      ev_type;
  logic [NW-1:0] ev_in_pre, ev_in_post;
  assign {ev_type, ev_in_pre, ev_in_post} = {ev_addr[EVW-1 -: 2], ev_addr[2*NW-1 -: NW], ev_addr[NW-1:0]};

  logic spi_take, isch_take, ev_take;
  assign spi_take  = (state == S_IDLE) && req_valid && !w_inflight;
  assign isch_take = (state == S_IDLE) && !req_valid && isch_valid;
  assign ev_take   = (state == S_IDLE) && !req_valid && !isch_valid && ev_valid;

  assign ev_ready       = ev_take;
  assign isch_send_next = isch_take;
  assign busy           = (state != S_IDLE) || w_inflight;

  // room in the output FIFO for this group and the one already in flight
  logic out_room;
  assign out_room = (32'(osch_count) + 32'(w_inflight) + 1) <= DEPTH;

  assign rd_valid = (state == S_RUN) && out_room;
  assign stall    = (state == S_RUN) && !out_room;
  assign rd_op    = ev_op;
  assign rd_group = grp;
  assign rd_pre   = ev_pre;
  assign rd_mask  = ev_mask;

  // configuration accesses
  assign ncfg_valid = spi_take && req_target == TGT_NEURON;
  assign scfg_valid = spi_take && req_target == TGT_SYN;
  assign cfg_we     = req_we;
  assign cfg_addr   = req_addr;
  assign cfg_wdata  = req_wdata;

  always_comb begin
    req_ready = 1'b0;
    req_rdata = 8'd0;
    if (state == S_CFG_RD) begin
      req_ready = 1'b1;
      req_rdata = rd_tgt_syn ? scfg_rdata : ncfg_rdata;
    end else if (spi_take && (req_we || req_target == TGT_REG || req_target == TGT_NONE)) begin
      req_ready = 1'b1;
      if (req_target == TGT_REG && !req_we) begin
        if (req_addr == REG_CTRL)   req_rdata = {7'd0, learn_en};
        if (req_addr == REG_STATUS) req_rdata = {6'd0, osch_overflow, isch_overflow};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ev_op      <= OP_SOP;
      ev_pre     <= '0;
      ev_mask    <= '0;
      grp        <= '0;
      last_grp   <= '0;
      w_inflight <= 1'b0;
      rd_tgt_syn <= 1'b0;
      learn_en   <= 1'b0;
    end else begin
      w_inflight <= rd_valid;
      unique case (state)
        S_IDLE: begin
          if (spi_take) begin
            if (req_target == TGT_REG && req_we && req_addr == REG_CTRL)
              learn_en <= req_wdata[0];
            if (!req_we && (req_target == TGT_NEURON || req_target == TGT_SYN)) begin
              rd_tgt_syn <= (req_target == TGT_SYN);
              state      <= S_CFG_RD;
            end
          end else if (isch_take) begin
            ev_op    <= OP_SOP;
            ev_pre   <= isch_addr;
            ev_mask  <= '1;
            grp      <= '0;
            last_grp <= GW'(N / P - 1);
            state    <= S_RUN;
          end else if (ev_take) begin
            ev_pre  <= ev_in_pre;
            ev_mask <= '1;
            grp     <= '0;
            last_grp <= GW'(N / P - 1);
            unique case (ev_type)
              EV_NEURON: begin ev_op <= OP_SOP;  state <= S_RUN; end
              EV_LEAK:   begin ev_op <= OP_LEAK; state <= S_RUN; end
              EV_SYNAPSE: begin
                ev_op    <= OP_SOP;
                ev_mask  <= P'(1) << ev_in_post[PW-1:0];
                grp      <= ev_in_post[NW-1:PW];
                last_grp <= ev_in_post[NW-1:PW];
                state    <= S_RUN;
              end
              default: ;  // EV_NONE: acknowledged and ignored
            endcase
          end
        end
        S_RUN: if (rd_valid) begin
          if (grp == last_grp) state <= S_IDLE;
          else                 grp   <= grp + 1'b1;
        end
        S_CFG_RD: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // configuration accesses never overlap a pipeline slot
  a_cfg_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (ncfg_valid || scfg_valid) |-> !w_inflight);

endmodule
