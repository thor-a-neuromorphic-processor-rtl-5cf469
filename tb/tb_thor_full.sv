// End-to-end testbench for thor_top at the default size (N=256 neurons, P=32 lanes),
// with the top instantiated without parameters.
//
// Acts as the host: configures every neuron byte and every synapse through the
// SPI pins, sends events through the AER input with four-phase handshakes and
// acknowledges the AER output with random delays.  A reference model of the
// whole network (LIF neurons, SDSP learning, all-to-all recurrence in the
// order the schedulers deliver spikes) predicts every output spike; the test
// compares the AER output stream spike by spike and, at the end of each
// phase, reads neuron states and learned synapse rows back over SPI.
// Phase A runs with learning off, phase B with learning on (mode switch
// through the control register).  Phase C drives the network into saturation
// with a slow AER receiver, so the controller stalls on the full output FIFO
// and the input FIFO overflows; there only these mechanisms are checked.
// Each mechanism (neuron, synapse and time-reference events, recurrent
// spikes, learning updates, SPI read-back, stalls, overflow) is counted and
// must occur at least once.
module tb_thor_full;
  import thor_pkg::*;
  localparam int N = 256, P = 32, G = N / P;
  localparam int NW = $clog2(N), EVW = 2 + 2 * NW;
  localparam int HALF_WR = 3, HALF_RD = 8;
  localparam int NEV = 40;

  logic clk = 0, rst_n = 0;
  logic sck, mosi, miso;
  logic [EVW-1:0] aerin_addr;
  logic aerin_req, aerin_ack;
  logic [NW-1:0] aerout_addr;
  logic aerout_req, aerout_ack;

  thor_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- reference model ----------------
  neuron_state_t st [N];
  logic [3:0] wm [N][N];
  bit learn = 0;
  bit row_touched [N];
  int exp_out[$];
  int n_neuron_ev = 0, n_syn_ev = 0, n_leak_ev = 0, n_recur = 0, n_wchange = 0;

  function automatic void m_lane(int pre, int j, bit leak, ref int spikes[$]);
    int v, ca, w;
    v = st[j].vmem; ca = st[j].calcium;
    if (!leak) begin
      w = $signed(wm[pre][j]);
      // SDSP on the state before this update
      if (learn) begin
        int nw = w;
        if (v >= st[j].mem_th && ca >= st[j].ca_th1 && ca < st[j].ca_th3) begin if (w < 7) nw = w + 1; end
        else if (v < st[j].mem_th && ca >= st[j].ca_th1 && ca < st[j].ca_th2) begin if (w > -8) nw = w - 1; end
        if (nw !== w) n_wchange++;
        wm[pre][j] = 4'(nw);
        row_touched[pre] = 1;
      end
      v = v + w;
      if (v < 0) v = 0;
      if (v > 255) v = 255;
      if (v >= st[j].threshold) begin
        v = 0;
        if (learn && ca < 15) ca++;
        spikes.push_back(j);
      end
    end else begin
      v = v - st[j].leak;
      if (v < 0) v = 0;
      if (learn && ca > 0) ca--;
    end
    st[j].vmem = 8'(v);
    if (learn) st[j].calcium = 8'(ca);
  endfunction

  // one external event and the cascade of internal spikes it causes
  function automatic void m_event(ev_type_e t, int pre, int post);
    int q[$], sp[$];
    if (t === EV_LEAK) begin
      for (int j = 0; j < N; j++) m_lane(0, j, 1, sp);
      n_leak_ev++;
    end else if (t === EV_SYNAPSE) begin
      m_lane(pre, post, 0, sp);
      n_syn_ev++;
    end else begin
      for (int j = 0; j < N; j++) m_lane(pre, j, 0, sp);
      n_neuron_ev++;
    end
    foreach (sp[k]) begin q.push_back(sp[k]); exp_out.push_back(sp[k]); end
    while (q.size() > 0) begin
      int i;
      i = q.pop_front();
      sp.delete();
      for (int j = 0; j < N; j++) m_lane(i, j, 0, sp);
      n_recur++;
      foreach (sp[k]) begin q.push_back(sp[k]); exp_out.push_back(sp[k]); end
    end
  endfunction

  // ---------------- SPI master ----------------
  task automatic spi_frame(logic we, spi_target_e t, int a, logic [7:0] d, output logic [7:0] r);
    logic [31:0] f;
    int half;
    half = we ? HALF_WR : HALF_RD;
    f = {we, t, 21'(a), d};
    r = 0;
    while (dut.u_spi.req_valid) @(posedge clk);
    for (int i = 31; i >= 0; i--) begin
      mosi = f[i];
      repeat (half) @(posedge clk);
      sck = 1;
      if (i < 8) r[i] = miso;
      repeat (half) @(posedge clk);
      sck = 0;
    end
  endtask

  task automatic spi_wr(spi_target_e t, int a, logic [7:0] d);
    logic [7:0] r;
    spi_frame(1, t, a, d, r);
  endtask

  int n_spi_rd = 0;
  task automatic spi_rd(spi_target_e t, int a, output logic [7:0] r);
    spi_frame(0, t, a, 8'h00, r);
    n_spi_rd++;
  endtask

  // ---------------- AER ----------------
  task automatic aer_send(ev_type_e t, int pre, int post);
    @(negedge clk);
    aerin_addr = {t, NW'(pre), NW'(post)};
    aerin_req = 1;
    @(posedge clk iff aerin_ack);
    @(negedge clk);
    aerin_req = 0;
    @(posedge clk iff !aerin_ack);
  endtask

  int ack_min = 0, ack_max = 4;
  int got_out[$];
  initial begin
    aerout_ack = 0;
    wait (rst_n);
    repeat (2) @(posedge clk);
    forever begin
      @(posedge clk iff aerout_req);
      repeat ($urandom_range(ack_min, ack_max)) @(posedge clk);
      got_out.push_back(int'(aerout_addr));
      aerout_ack = 1;
      @(posedge clk iff !aerout_req);
      repeat ($urandom_range(0, 2)) @(posedge clk);
      aerout_ack = 0;
    end
  end

  task automatic wait_quiet();
    int quiet;
    quiet = 0;
    while (quiet < 20) begin
      @(posedge clk);
      if (dut.u_ctrl.busy || dut.u_isched.state !== 0 || dut.u_osched.state !== 0 ||
          aerout_req || aerout_ack || dut.u_aerin.state !== 0 || dut.u_spi.req_valid) quiet = 0;
      else quiet++;
    end
  endtask

  // ---------------- monitors ----------------
  // with learning off, core reads must leave the sub-banks of bytes 3-6 idle
  int n_gated_reads = 0, n_gate_viol = 0;
  always @(posedge clk) if (rst_n && dut.u_ctrl.rd_valid && !dut.u_ctrl.learn_en) begin
    n_gated_reads++;
    if (dut.u_ncore.u_mem.g_bank[0].g_sub[3].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[0].g_sub[4].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[0].g_sub[5].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[0].g_sub[6].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[1].g_sub[3].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[1].g_sub[4].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[1].g_sub[5].u_sub.en ||
        dut.u_ncore.u_mem.g_bank[1].g_sub[6].u_sub.en) n_gate_viol++;
  end

  int n_stall = 0, sweep_start = -1, n_sweeps_timed = 0, cyc = 0;
  bit stalled_in_sweep = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_ctrl.stall) begin n_stall++; stalled_in_sweep = 1; end
    if (dut.u_ctrl.rd_valid && dut.u_ctrl.rd_mask === '1) begin
      if (dut.u_ctrl.rd_group === 0) begin sweep_start = cyc; stalled_in_sweep = 0; end
      if (int'(dut.u_ctrl.rd_group) === G - 1 && sweep_start >= 0 && !stalled_in_sweep) begin
        // G groups issued on G consecutive cycles; the last is written one cycle later
        chk(cyc - sweep_start === G - 1, $sformatf("sweep of %0d groups took %0d issue cycles", G, cyc - sweep_start + 1));
        n_sweeps_timed++;
      end
    end
  end

  // ---------------- checks ----------------
  task automatic check_outputs(string phase);
    chk(got_out.size() === exp_out.size(), $sformatf("%s: %0d output spikes, expected %0d", phase, got_out.size(), exp_out.size()));
    for (int k = 0; k < got_out.size() && k < exp_out.size(); k++)
      chk(got_out[k] === exp_out[k], $sformatf("%s: output spike %0d is %0d, expected %0d", phase, k, got_out[k], exp_out[k]));
    got_out.delete(); exp_out.delete();
  endtask

  task automatic check_state(string phase);
    logic [7:0] r;
    for (int j = 0; j < N; j++) begin
      spi_rd(TGT_NEURON, j * 8 + B_VMEM, r);
      chk(r === st[j].vmem, $sformatf("%s: vmem[%0d] = %0d, expected %0d", phase, j, r, st[j].vmem));
      spi_rd(TGT_NEURON, j * 8 + B_CA, r);
      chk(r === st[j].calcium, $sformatf("%s: calcium[%0d] = %0d, expected %0d", phase, j, r, st[j].calcium));
    end
    for (int i = 0; i < N; i++) if (row_touched[i]) begin
      for (int j = 0; j < N; j += 2) begin
        spi_rd(TGT_SYN, i * (N / 2) + j / 2, r);
        chk(r === {wm[i][j+1], wm[i][j]}, $sformatf("%s: synapses %0d->%0d/%0d = %h, expected %h", phase, i, j, j+1, r, {wm[i][j+1], wm[i][j]}));
      end
      row_touched[i] = 0;
    end
  endtask

  task automatic run_events(int n);
    for (int e = 0; e < n; e++) begin
      int r, pre, post;
      ev_type_e t;
      r = $urandom_range(9);
      t = (r < 6) ? EV_NEURON : (r < 8) ? EV_SYNAPSE : EV_LEAK;
      pre = $urandom_range(N - 1); post = $urandom_range(N - 1);
      m_event(t, pre, post);
      aer_send(t, pre, post);
      wait_quiet();
    end
  endtask

  initial begin
    logic [7:0] r;
    int thr_lo, thr_hi;
    sck = 0; mosi = 0; aerin_req = 0; aerin_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    // ---- configuration over SPI ----
    thr_lo = N / 4 + 8; thr_hi = (N / 2 + 8 > 255) ? 255 : N / 2 + 8;
    for (int j = 0; j < N; j++) begin
      st[j] = '0;
      st[j].vmem = 8'($urandom_range(thr_lo));
      st[j].leak = 8'($urandom_range(1, 6));
      st[j].threshold = 8'($urandom_range(thr_lo, thr_hi));
      st[j].mem_th = 8'($urandom_range(thr_lo / 2, thr_lo));
      st[j].calcium = 8'($urandom_range(4));
      st[j].ca_th1 = 4'($urandom_range(0, 1));
      st[j].ca_th2 = 4'($urandom_range(3, 8));
      st[j].ca_th3 = 4'($urandom_range(3, 10));
      for (int b = 0; b < NSTATE_BYTES; b++) spi_wr(TGT_NEURON, j * 8 + b, st[j][8*b +: 8]);
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) wm[i][j] = 4'($urandom_range(0, 8) - 4);
      for (int j = 0; j < N; j += 2) spi_wr(TGT_SYN, i * (N / 2) + j / 2, {wm[i][j+1], wm[i][j]});
    end
    wait_quiet();
    for (int k = 0; k < 8; k++) begin
      int j, b;
      j = $urandom_range(N - 1); b = $urandom_range(NSTATE_BYTES - 1);
      spi_rd(TGT_NEURON, j * 8 + b, r);
      chk(r === st[j][8*b +: 8], $sformatf("config read-back neuron %0d byte %0d", j, b));
    end
    $display("configured at cycle %0d", cyc);

    // ---- phase A: inference only ----
    run_events(NEV);
    check_outputs("phase A");
    check_state("phase A");
    $display("phase A done at cycle %0d", cyc);

    // ---- phase B: online learning on ----
    spi_wr(TGT_REG, REG_CTRL, 8'h01);
    learn = 1;
    wait_quiet();
    spi_rd(TGT_REG, REG_CTRL, r);
    chk(r === 8'h01, "learning enable reads back");
    run_events(NEV);
    check_outputs("phase B");
    check_state("phase B");
    spi_rd(TGT_REG, REG_STATUS, r);
    chk(r === 8'h00, "no FIFO overflow in phases A and B");
    $display("phase B done at cycle %0d", cyc);

    // ---- phase C: saturation with a slow AER receiver ----
    ack_min = 20; ack_max = 40;
    for (int j = 0; j < N; j++) begin
      spi_wr(TGT_NEURON, j * 8 + B_THR, 8'd4);
      spi_wr(TGT_NEURON, j * 8 + B_VMEM, 8'd3);
    end
    for (int j = 0; j < N; j++) spi_wr(TGT_SYN, 0 * (N / 2) + j / 2, 8'h77);
    wait_quiet();
    aer_send(EV_NEURON, 0, 0);
    repeat (40 * N) @(posedge clk);
    // calm the network down: unreachable thresholds
    for (int j = 0; j < N; j++) spi_wr(TGT_NEURON, j * 8 + B_THR, 8'd255);
    ack_min = 0; ack_max = 2;
    wait_quiet();
    spi_rd(TGT_REG, REG_STATUS, r);
    chk(r[0] === 1'b1, "input FIFO overflow flagged under saturation");

    // ---- mechanisms ----
    $display("neuron events %0d, synapse events %0d, leak events %0d, recurrent spikes %0d, weight changes %0d, spi reads %0d, stall cycles %0d, timed sweeps %0d",
             n_neuron_ev, n_syn_ev, n_leak_ev, n_recur, n_wchange, n_spi_rd, n_stall, n_sweeps_timed);
    chk(n_neuron_ev > 0, "neuron event exercised");
    chk(n_syn_ev > 0, "synapse event exercised");
    chk(n_leak_ev > 0, "time-reference event exercised");
    chk(n_recur > 0, "recurrent (internal) spike exercised");
    chk(n_wchange > 0, "learning changed weights");
    chk(n_spi_rd > 0, "SPI read-back exercised");
    chk(n_stall > 0, "output-FIFO stall exercised");
    chk(n_sweeps_timed > 0, "sweep timing measured");
    $display("reads with learning sub-banks gated %0d", n_gated_reads);
    chk(n_gated_reads > 0, "reads with learning off exercised");
    chk(n_gate_viol === 0, $sformatf("%0d reads touched the learning sub-banks with learning off", n_gate_viol));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
