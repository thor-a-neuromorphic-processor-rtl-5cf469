// THOR neuromorphic core, top level.
//
// An all-to-all network of N leaky integrate-and-fire neurons with an N x N
// matrix of 4-bit synapses that can learn on-line (spike-driven synaptic
// plasticity).  A neuron event (a spike of neuron i) adds row i of the
// synapse matrix to all N neurons, P neurons per cycle: the neuron core and
// the synapse core each keep their state in two interleaved banks, so one
// group of P neurons is read while the previous one is written back.  The
// P-bit spike vector of every group goes to two independent schedulers: the
// input scheduler feeds the spikes back to the controller as new neuron
// events, the output scheduler sends them off-chip through the AER output.
// External events arrive through the AER input, and all memories and the
// control register are reached through the SPI slave.
//
// Ports: clock and active-low asynchronous reset; SPI (SCK, MOSI, MISO);
// AER input (address {type[1:0], pre, post}, REQ, ACK); AER output
// (neuron address, REQ, ACK).  Block structure and wiring follow the paper's
// top-level figure; reset and the encodings are this design's choices.
module thor_top
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  parameter int unsigned S = 2 * N * N,   // bits per synapse SCM bank
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned GW = $clog2(N / P),
  localparam int unsigned DEPTH = N / P,
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned EVW = 2 + 2 * NW
) (
  input  logic           clk,
  input  logic           rst_n,
  // SPI
  input  logic           sck,
  input  logic           mosi,
  output logic           miso,
  // AER input
  input  logic [EVW-1:0] aerin_addr,
  input  logic           aerin_req,
  output logic           aerin_ack,
  // AER output
  output logic [NW-1:0]  aerout_addr,
  output logic           aerout_req,
  input  logic           aerout_ack
);

  // SPI <-> controller
  logic                  req_valid, req_we, req_ready;
  spi_target_e           req_target;
  logic [SPI_ADDR_W-1:0] req_addr;
  logic [7:0]            req_wdata, req_rdata;

  spi_slave u_spi (
    .clk, .rst_n, .sck, .mosi, .miso,
    .req_valid, .req_we, .req_target, .req_addr, .req_wdata, .req_ready, .req_rdata
  );

  // AER input <-> controller
  logic           ev_valid, ev_ready;
  logic [EVW-1:0] ev_addr;

  aer_input #(.AW(EVW)) u_aerin (
    .clk, .rst_n, .aerin_addr, .aerin_req, .aerin_ack, .ev_valid, .ev_addr, .ev_ready
  );

  // schedulers
  logic          spike_valid;
  logic [P-1:0]  spike_vec;
  logic [NW-1:0] spike_offset;
  logic          isch_valid, isch_send_next, isch_overflow;
  logic [NW-1:0] isch_addr;
  logic [CW-1:0] isch_count, osch_count;
  logic          osch_valid, osch_send_next, osch_overflow;
  logic [NW-1:0] osch_addr;

  spike_scheduler #(.N(N), .P(P), .DEPTH(DEPTH)) u_isched (
    .clk, .rst_n, .spike_valid, .spike_vec, .spike_offset,
    .send_next (isch_send_next),
    .out_valid (isch_valid),
    .out_addr  (isch_addr),
    .fifo_count(isch_count),
    .overflow  (isch_overflow)
  );

  spike_scheduler #(.N(N), .P(P), .DEPTH(DEPTH)) u_osched (
    .clk, .rst_n, .spike_valid, .spike_vec, .spike_offset,
    .send_next (osch_send_next),
    .out_valid (osch_valid),
    .out_addr  (osch_addr),
    .fifo_count(osch_count),
    .overflow  (osch_overflow)
  );

  aer_output #(.AW(NW)) u_aerout (
    .clk, .rst_n,
    .in_valid  (osch_valid),
    .in_addr   (osch_addr),
    .send_next (osch_send_next),
    .aerout_addr, .aerout_req, .aerout_ack
  );

  // controller
  logic                  rd_valid;
  op_e                   rd_op;
  logic [GW-1:0]         rd_group;
  logic [NW-1:0]         rd_pre;
  logic [P-1:0]          rd_mask;
  logic                  ncfg_valid, scfg_valid, cfg_we, learn_en, busy, stall;
  logic [SPI_ADDR_W-1:0] cfg_addr;
  logic [7:0]            cfg_wdata, ncfg_rdata, scfg_rdata;

  controller #(.N(N), .P(P), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev_addr, .ev_ready,
    .isch_valid, .isch_addr, .isch_send_next, .isch_overflow,
    .osch_count, .osch_overflow,
    .req_valid, .req_we, .req_target, .req_addr, .req_wdata, .req_ready, .req_rdata,
    .rd_valid, .rd_op, .rd_group, .rd_pre, .rd_mask,
    .ncfg_valid, .scfg_valid, .cfg_we, .cfg_addr, .cfg_wdata, .ncfg_rdata, .scfg_rdata,
    .learn_en, .busy, .stall
  );

  // neuron and synapse cores
  logic                  wr_valid;
  neuron_state_t [P-1:0] wr_states;
  logic [P-1:0][3:0]     weights;

  neuron_core #(.N(N), .P(P)) u_ncore (
    .clk, .rst_n,
    .rd_valid, .rd_op, .rd_group, .rd_mask, .learn_en,
    .wr_valid, .wr_states, .weights,
    .spike_valid, .spike_vec, .spike_offset,
    .cfg_valid (ncfg_valid),
    .cfg_we,
    .cfg_addr  (cfg_addr[NW+2:0]),
    .cfg_wdata,
    .cfg_rdata (ncfg_rdata)
  );

  synapse_core #(.N(N), .P(P), .S(S)) u_score (
    .clk, .rst_n,
    .rd_valid, .rd_op, .rd_group, .rd_pre, .rd_mask, .learn_en,
    .post_states (wr_states),
    .weights,
    .cfg_valid (scfg_valid),
    .cfg_we,
    .cfg_addr  (cfg_addr[2*NW-2:0]),
    .cfg_wdata,
    .cfg_rdata (scfg_rdata)
  );

endmodule
