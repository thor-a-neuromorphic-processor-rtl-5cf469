// Synapse core: synapse memory and P parallel SDSP lanes, pipelined in step
// with the neuron core.
//
// Stage R (cycle k): for a synaptic operation the word of pre-synaptic neuron
// `rd_pre` and post-synaptic group `rd_group` is read from bank rd_group mod 2.
// Stage W (cycle k+1): the P weights go to the neuron core on `weights`
// (lanes outside the mask show 0); the neuron core returns the P
// post-synaptic states read in the same cycle on `post_states`, the SDSP lanes
// compute the new weights and, with learning enabled, the word is written back
// to the same bank and address.  With learning disabled nothing is written.
// Time-reference (leak) slots do not touch the synapse memory.
//
// The configuration port reads or writes one byte, i.e. two neighbouring
// synapses: address {pre, post[NW-1:1]}; post even is the low nibble.  Read
// data is on `cfg_rdata` one cycle later.  It must only be used while no R or
// W slot is active.  The two-bank, 4P-bit word organisation is the paper's;
// the address mapping and configuration port are this design's choices.
module synapse_core
  import thor_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned P = P_DEFAULT,
  parameter int unsigned S = 2 * N * N,   // bits per synapse SCM bank
  localparam int unsigned NW = $clog2(N),
  localparam int unsigned PW = $clog2(P),
  localparam int unsigned GW = $clog2(N / P),
  localparam int unsigned WORDS = N * N / (2 * P),
  localparam int unsigned WAW = $clog2(WORDS),
  localparam int unsigned WB = P / 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  rd_valid,
  input  op_e                   rd_op,
  input  logic [GW-1:0]         rd_group,
  input  logic [NW-1:0]         rd_pre,
  input  logic [P-1:0]          rd_mask,
  input  logic                  learn_en,
  input  neuron_state_t [P-1:0] post_states,
  output logic [P-1:0][3:0]     weights,
  input  logic                  cfg_valid,
  input  logic                  cfg_we,
  input  logic [2*NW-2:0]       cfg_addr,
  input  logic [7:0]            cfg_wdata,
  output logic [7:0]            cfg_rdata
);

  initial begin
    assert (P >= 4 && N >= 2 * P) else $fatal(1, "synapse_core: need P >= 4 and N >= 2P");
  end

  function automatic logic [WAW-1:0] word_addr(logic [NW-1:0] pre, logic [GW-1:0] grp);
    return WAW'(pre * (N / (2 * P)) + (grp >> 1));
  endfunction

  // configuration address split
  logic [NW-1:0] cfg_pre, cfg_post;
  logic [GW-1:0] cfg_group;
  logic [PW-2:0] cfg_byte;
  assign cfg_pre   = cfg_addr[2*NW-2 -: NW];
  assign cfg_post  = {cfg_addr[NW-2:0], 1'b0};
  assign cfg_group = cfg_post[NW-1:PW];
  assign cfg_byte  = cfg_post[PW-1:1];

  // stage W registers
  logic          w_sop;
  logic [GW-1:0] w_group;
  logic [NW-1:0] w_pre;
  logic [P-1:0]  w_mask;
  logic          c_bank;
  logic [PW-2:0] c_byte;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_sop   <= 1'b0;
      w_group <= '0;
      w_pre   <= '0;
      w_mask  <= '0;
      c_bank  <= 1'b0;
      c_byte  <= '0;
    end else begin
      w_sop <= rd_valid && rd_op == OP_SOP;
      if (rd_valid) begin
        w_group <= rd_group;
        w_pre   <= rd_pre;
        w_mask  <= rd_mask;
      end
      if (cfg_valid && !cfg_we) begin
        c_bank <= cfg_group[0];
        c_byte <= cfg_byte;
      end
    end
  end

  logic [1:0]           bank_en, bank_we;
  logic [1:0][WB-1:0]   bank_be;
  logic [1:0][WAW-1:0]  bank_addr;
  logic [1:0][4*P-1:0]  bank_wdata, bank_rdata;

  synapse_memory #(.N(N), .P(P), .S(S)) u_mem (
    .clk        (clk),
    .bank_en    (bank_en),
    .bank_we    (bank_we),
    .bank_be    (bank_be),
    .bank_addr  (bank_addr),
    .bank_wdata (bank_wdata),
    .bank_rdata (bank_rdata)
  );

  logic [4*P-1:0]   w_word;
  logic [P-1:0][3:0] new_w;
  assign w_word = bank_rdata[w_group[0]];

  for (genvar l = 0; l < P; l++) begin : g_lane
    assign weights[l] = (w_sop && w_mask[l]) ? w_word[4*l +: 4] : 4'd0;
    sdsp_synapse u_sdsp (
      .active      (w_sop && w_mask[l]),
      .learn_en    (learn_en),
      .weight      (w_word[4*l +: 4]),
      .post_state  (post_states[l]),
      .weight_next (new_w[l])
    );
  end

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      bank_en[b]    = 1'b0;
      bank_we[b]    = 1'b0;
      bank_be[b]    = '0;
      bank_addr[b]  = '0;
      bank_wdata[b] = w_sop ? new_w : {WB{cfg_wdata}};
      if (w_sop && w_group[0] == 1'(b)) begin
        if (learn_en) begin
          bank_en[b]   = 1'b1;
          bank_we[b]   = 1'b1;
          bank_be[b]   = '1;
          bank_addr[b] = word_addr(w_pre, w_group);
        end
      end else if (rd_valid && rd_op == OP_SOP && rd_group[0] == 1'(b)) begin
        bank_en[b]   = 1'b1;
        bank_addr[b] = word_addr(rd_pre, rd_group);
      end else if (cfg_valid && cfg_group[0] == 1'(b)) begin
        bank_en[b]   = 1'b1;
        bank_we[b]   = cfg_we;
        bank_addr[b] = word_addr(cfg_pre, cfg_group);
        bank_be[b][cfg_byte] = cfg_we;
      end
    end
  end

  assign cfg_rdata = bank_rdata[c_bank][8*c_byte +: 8];

  a_no_bank_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(rd_valid && rd_op == OP_SOP && w_sop && rd_group[0] == w_group[0]));

endmodule
