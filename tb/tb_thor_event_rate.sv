// One run of the event-rate measurement, for a THOR core of N neurons and P
// lanes (instantiated by tb_thor_throughput).
//
// Over SPI, every neuron gets threshold 255 and potential 0, except neurons
// 1..M, whose potential is set to 250, and row 0 of the synapse matrix gets
// weight +7 towards neurons 0..M+1.  One AER neuron event for neuron 0 then
// makes neurons 1..M fire together; the input scheduler thread feeds these M
// spikes back as M internal neuron events, which the controller runs back to
// back.  Whatever the other weights are, no further neuron can reach 255
// within M+1 events (at most (M+1) x 7 < 255), so exactly M internal sweeps and
// M output spikes (1..M, in order) must follow.  The monitor takes the cycle
// in which each sweep issues its first group and checks that consecutive
// internal sweeps start G+1 = N/P+1 cycles apart: G read cycles, the last
// write overlapping the controller's accept cycle.  That is N SOPs every
// N/P+1 cycles, the core's saturated throughput.  With only two groups
// (P = N/2) the output FIFO has two entries; while the first event's spikes
// are still leaving, the room check (pending entry + vector in flight + the
// new one) then holds each sweep for one cycle, so there the expected spacing
// is G+2 with one stall cycle per internal sweep.
module tb_thor_event_rate #(
  parameter int N = 256,
  parameter int P = 32,
  parameter int M = 16
) (
  output int  checks,
  output int  failures,
  output bit  done
);
  import thor_pkg::*;
  localparam int NW  = $clog2(N);
  localparam int G   = N / P;
  localparam int EVW = 2 + 2 * NW;
  localparam int HALF = 3;
  localparam int EXP_GAP = (G >= 3) ? G + 1 : G + 2;

  logic clk = 0, rst_n = 0;
  logic sck = 0, mosi = 0, miso;
  logic [EVW-1:0] aerin_addr = '0;
  logic aerin_req = 0, aerin_ack;
  logic [NW-1:0] aerout_addr;
  logic aerout_req, aerout_ack = 0;

  thor_top #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin checks = 0; failures = 0; done = 0; end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (N=%0d P=%0d): %s", N, P, what); end
  endtask

  task automatic spi_wr(spi_target_e t, int a, logic [7:0] d);
    logic [31:0] f;
    f = {1'b1, t, 21'(a), d};
    while (dut.u_spi.req_valid) @(posedge clk);
    for (int i = 31; i >= 0; i--) begin
      mosi = f[i];
      repeat (HALF) @(posedge clk);
      sck = 1;
      repeat (HALF) @(posedge clk);
      sck = 0;
    end
    repeat (4) @(posedge clk);
  endtask

  // AER output receiver: answers at once
  int got[$];
  initial begin
    wait (rst_n);
    repeat (2) @(posedge clk);
    forever begin
      @(posedge clk iff aerout_req);
      got.push_back(int'(aerout_addr));
      aerout_ack = 1;
      @(posedge clk iff !aerout_req);
      aerout_ack = 0;
    end
  end

  // sweep-start monitor
  int cyc = 0, starts[$];
  int n_stall = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.u_ctrl.stall) n_stall++;
    if (dut.u_ctrl.rd_valid && dut.u_ctrl.rd_mask === '1 && dut.u_ctrl.rd_group === 0)
      starts.push_back(cyc);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    spi_wr(TGT_REG, REG_CTRL, 8'h00);
    for (int n = 0; n < N; n++) begin
      spi_wr(TGT_NEURON, n * 8 + B_THR, 8'd255);
      spi_wr(TGT_NEURON, n * 8 + B_VMEM, (n >= 1 && n <= M) ? 8'd250 : 8'd0);
    end
    for (int j = 0; j <= (M + 1) / 2; j++)
      spi_wr(TGT_SYN, j, 8'h77);
    repeat (20) @(posedge clk);
    starts.delete();

    // one external neuron event for neuron 0
    @(negedge clk);
    aerin_addr = {EV_NEURON, NW'(0), NW'(0)};
    aerin_req = 1;
    @(posedge clk iff aerin_ack);
    @(negedge clk);
    aerin_req = 0;

    repeat ((M + 4) * (G + 1) + 200) @(posedge clk);

    chk(starts.size() === M + 1, $sformatf("%0d sweeps, expected %0d", starts.size(), M + 1));
    for (int k = 2; k < starts.size(); k++)
      chk(starts[k] - starts[k-1] === EXP_GAP,
          $sformatf("internal sweeps %0d and %0d start %0d cycles apart, expected %0d",
                    k - 1, k, starts[k] - starts[k-1], EXP_GAP));
    chk(got.size() === M, $sformatf("%0d output spikes, expected %0d", got.size(), M));
    for (int k = 0; k < got.size(); k++)
      chk(got[k] === k + 1, $sformatf("output spike %0d is neuron %0d", k, got[k]));
    chk(n_stall === ((G >= 3) ? 0 : M), $sformatf("%0d stall cycles", n_stall));
    if (starts.size() > 2)
      $display("N=%0d P=%0d: %0d back-to-back neuron events, %0d cycles each, %0d SOPs per cycle (x100: %0d)",
               N, P, starts.size() - 1, (starts[starts.size()-1] - starts[1]) / (starts.size() - 2),
               N / EXP_GAP, 100 * N / EXP_GAP);
    done = 1;
  end
endmodule
