// Package shared by all THOR blocks.
//
// Holds the design-wide defaults (N neurons, P parallel lanes), the 7-byte
// neuron state record, the operation codes that travel down the neuron/synapse
// pipeline and the SPI/AER encodings.  The neuron state layout (byte 0
// membrane potential, byte 1 leakage, byte 2 threshold, bytes 3-6 calcium
// information) follows the paper's neuron-state table; how the four calcium
// bytes are split into fields is this design's own choice.
package thor_pkg;

  // Default network size and degree of parallelism of the main configuration.
  localparam int unsigned N_DEFAULT = 256;
  localparam int unsigned P_DEFAULT = 32;

  // Bytes of state per neuron and their indices.
  localparam int unsigned NSTATE_BYTES = 7;
  localparam int unsigned B_VMEM   = 0;  // membrane potential (read/write)
  localparam int unsigned B_LEAK   = 1;  // leakage (read-only)
  localparam int unsigned B_THR    = 2;  // firing threshold (read-only)
  localparam int unsigned B_MTH    = 3;  // SDSP membrane learning threshold (read-only)
  localparam int unsigned B_CA     = 4;  // calcium variable (read/write when learning)
  localparam int unsigned B_CATH12 = 5;  // {theta2, theta1} calcium windows (read-only)
  localparam int unsigned B_CATH3  = 6;  // {unused, theta3} (read-only)

  localparam int unsigned CA_MAX = 15;   // calcium saturates here

  // Neuron state, byte 6 in the top bits so that byte b is bits [8b+7:8b].
  typedef struct packed {
    logic [3:0] unused6;
    logic [3:0] ca_th3;
    logic [3:0] ca_th2;
    logic [3:0] ca_th1;
    logic [7:0] calcium;
    logic [7:0] mem_th;
    logic [7:0] threshold;
    logic [7:0] leak;
    logic [7:0] vmem;
  } neuron_state_t;

  // Operation carried by a pipeline slot.
  typedef enum logic [0:0] {
    OP_SOP  = 1'b0,  // integrate the weight of the addressed synapse(s)
    OP_LEAK = 1'b1   // time reference: apply leakage, decay calcium
  } op_e;

  // AER input event types (two top bits of the AER input address).
  typedef enum logic [1:0] {
    EV_NEURON  = 2'd0,  // all N synapses of pre-synaptic neuron 'pre'
    EV_SYNAPSE = 2'd1,  // the single synapse pre -> post
    EV_LEAK    = 2'd2,  // time reference for all neurons
    EV_NONE    = 2'd3   // ignored
  } ev_type_e;

  // SPI access targets.
  typedef enum logic [1:0] {
    TGT_REG    = 2'd0,
    TGT_NEURON = 2'd1,
    TGT_SYN    = 2'd2,
    TGT_NONE   = 2'd3
  } spi_target_e;

  localparam int unsigned SPI_ADDR_W  = 21;
  localparam int unsigned SPI_FRAME_W = 32;  // {we, target[1:0], addr[20:0], data[7:0]}

  // Registers reachable through TGT_REG.
  localparam logic [SPI_ADDR_W-1:0] REG_CTRL   = 'd0;  // bit 0: learning enable
  localparam logic [SPI_ADDR_W-1:0] REG_STATUS = 'd1;  // bit 0: input FIFO overflow, bit 1: output FIFO overflow

endpackage
