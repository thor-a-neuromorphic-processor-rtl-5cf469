// Neuron core: neuron state memory and P parallel LIF lanes in a two-stage
// pipeline.
//
// Stage R (cycle k): a command {op, group, lane mask} reads the P neuron
// states of `rd_group` from bank rd_group mod 2.
// Stage W (cycle k+1): the states come out of the bank, are shown to the
// synapse core on `wr_states`, the P weights of the same group come back on
// `weights`, the P LIF lanes compute the new potential and calcium, and the
// result is written back into the same bank and entry.  The spike vector of
// the group and its first neuron number (`spike_offset`, a multiple of P, so
// its low log2(P) bits are always zero) are valid in the same cycle.  Because consecutive groups alternate between the two banks, a
// new group can be read every cycle while the previous one is written: a full
// sweep of N/P groups takes N/P + 1 cycles (9 for N=256, P=32), as in the
// paper's neuron-event timing diagram.  The issuer must not read a bank in the
// cycle it is written (the controller checks this).
//
// Only the membrane byte is written during operation, plus the calcium byte
// when learning is enabled; the read-only bytes are written only through the
// configuration port.  With learning disabled the four sub-banks of the
// learning bytes (3-6) are not read either; their lanes then see stale values,
// which the LIF and SDSP lanes ignore in that mode.  The configuration port reads or writes one byte of
// one neuron ({neuron, byte index}); read data is on `cfg_rdata` one cycle
// later.  It must only be used while no R or W slot is active.
module neuron_core
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned PW = $clog2(P),
  localparam int unsigned GW = $clog2(N / P),
  localparam int unsigned ENTRIES = N / (2 * P),
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // stage R command
  input  logic                  rd_valid,
  input  op_e                   rd_op,
  input  logic [GW-1:0]         rd_group,
  input  logic [P-1:0]          rd_mask,
  input  logic                  learn_en,
  // stage W exchange with the synapse core
  output logic                  wr_valid,
  output neuron_state_t [P-1:0] wr_states,
  input  logic [P-1:0][3:0]     weights,
  // spikes of the group in stage W
  output logic                  spike_valid,
  output logic [P-1:0]          spike_vec,
  output logic [NW-1:0]         spike_offset,
  // configuration byte access
  input  logic                  cfg_valid,
  input  logic                  cfg_we,
  input  logic [NW+2:0]         cfg_addr,   // {neuron, byte index}
  input  logic [7:0]            cfg_wdata,
  output logic [7:0]            cfg_rdata
);

  initial begin
    assert (P >= 2 && N >= 2 * P) else $fatal(1, "neuron_core: need P >= 2 and N >= 2P");
  end

  // configuration address split
  logic [NW-1:0] cfg_neuron;
  logic [GW-1:0] cfg_n_group;
  logic [PW-1:0] cfg_n_lane;
  assign cfg_neuron  = cfg_addr[NW+2:3];
  assign cfg_n_group = cfg_neuron[NW-1:PW];
  assign cfg_n_lane  = cfg_neuron[PW-1:0];

  // stage W registers
  logic          w_valid;
  op_e           w_op;
  logic [GW-1:0] w_group;
  logic [P-1:0]  w_mask;
  // configuration read registers
  logic          c_bank;
  logic [PW-1:0] c_lane;
  logic [2:0]    c_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid <= 1'b0;
      w_op    <= OP_SOP;
      w_group <= '0;
      w_mask  <= '0;
      c_bank  <= 1'b0;
      c_lane  <= '0;
      c_byte  <= '0;
    end else begin
      w_valid <= rd_valid;
      if (rd_valid) begin
        w_op    <= rd_op;
        w_group <= rd_group;
        w_mask  <= rd_mask;
      end
      if (cfg_valid && !cfg_we) begin
        c_bank <= cfg_n_group[0];
        c_lane <= cfg_n_lane;
        c_byte <= cfg_addr[2:0];
      end
    end
  end

  // memory
  logic [1:0]                          bank_en, bank_we;
  logic [1:0][EW-1:0]                  bank_addr;
  logic [1:0][NSTATE_BYTES-1:0][P-1:0] bank_be;
  logic [1:0][NSTATE_BYTES-1:0]        bank_re;
  neuron_state_t [1:0][P-1:0]          bank_wdata, bank_rdata;

  neuron_memory #(.N(N), .P(P)) u_mem (
    .clk        (clk),
    .bank_en    (bank_en),
    .bank_we    (bank_we),
    .bank_addr  (bank_addr),
    .bank_be    (bank_be),
    .bank_re    (bank_re),
    .bank_wdata (bank_wdata),
    .bank_rdata (bank_rdata)
  );

  // stage W: states of the group, lane logic
  logic [P-1:0][7:0] vmem_next, ca_next;
  logic [P-1:0]      lane_spike;

  assign wr_valid  = w_valid;
  assign wr_states = bank_rdata[w_group[0]];

  for (genvar l = 0; l < P; l++) begin : g_lane
    lif_neuron u_lif (
      .active       (w_valid && w_mask[l]),
      .op           (w_op),
      .learn_en     (learn_en),
      .state        (wr_states[l]),
      .weight       (weights[l]),
      .vmem_next    (vmem_next[l]),
      .calcium_next (ca_next[l]),
      .spike        (lane_spike[l])
    );
  end

  assign spike_vec    = lane_spike;
  assign spike_valid  = w_valid;
  assign spike_offset = {w_group, {PW{1'b0}}};

  // bank control: W-stage write, R-stage read, else configuration
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      bank_en[b]   = 1'b0;
      bank_we[b]   = 1'b0;
      bank_addr[b] = '0;
      bank_be[b]   = '0;
      bank_re[b]   = '0;
      for (int l = 0; l < P; l++) begin
        bank_wdata[b][l] = wr_states[l];
        if (w_valid) begin
          bank_wdata[b][l].vmem    = vmem_next[l];
          bank_wdata[b][l].calcium = ca_next[l];
        end else begin
          bank_wdata[b][l] = {NSTATE_BYTES{cfg_wdata}};
        end
      end
      if (w_valid && w_group[0] == 1'(b)) begin
        bank_en[b]       = 1'b1;
        bank_we[b]       = 1'b1;
        bank_addr[b]     = EW'(w_group >> 1);
        bank_be[b][B_VMEM] = w_mask;
        if (learn_en) bank_be[b][B_CA] = w_mask;
      end else if (rd_valid && rd_group[0] == 1'(b)) begin
        bank_en[b]   = 1'b1;
        bank_addr[b] = EW'(rd_group >> 1);
        // bytes 3-6 (learning threshold, calcium, calcium windows) only
        // matter while learning is enabled
        bank_re[b]   = learn_en ? '1 : NSTATE_BYTES'(7'b0000111);
      end else if (cfg_valid && cfg_n_group[0] == 1'(b)) begin
        bank_en[b]   = 1'b1;
        bank_we[b]   = cfg_we;
        bank_addr[b] = EW'(cfg_n_group >> 1);
        if (cfg_addr[2:0] < 3'(NSTATE_BYTES)) bank_re[b][cfg_addr[2:0]] = 1'b1;
        if (cfg_we && cfg_addr[2:0] < 3'(NSTATE_BYTES))
          bank_be[b][cfg_addr[2:0]][cfg_n_lane] = 1'b1;
      end
    end
  end

  always_comb begin
    cfg_rdata = 8'd0;
    if (c_byte < 3'(NSTATE_BYTES))
      cfg_rdata = bank_rdata[c_bank][c_lane][8*c_byte +: 8];
  end

  // a bank is never read and written in the same cycle
  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(rd_valid && w_valid && rd_group[0] == w_group[0]));
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
    !(cfg_valid && (rd_valid || w_valid)));

endmodule
