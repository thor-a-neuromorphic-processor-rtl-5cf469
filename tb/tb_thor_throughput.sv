// Saturated neuron-event throughput of THOR at N = 256 for the degrees of
// parallelism P = 8, 16, 32, 64 and 128 (P = 32 is the default).  Each size runs
// its own core in tb_thor_event_rate, which checks that back-to-back neuron
// events start every N/P + 1 cycles and produce the expected spikes; this
// module adds up the checks.  A size whose run does not finish within the
// watchdog counts as a failure.
module tb_thor_throughput;
  int c[5], f[5];
  bit d[5];

  tb_thor_event_rate #(.N(256), .P(8))  r8  (.checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_thor_event_rate #(.N(256), .P(16)) r16 (.checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_thor_event_rate #(.N(256), .P(32)) r32 (.checks(c[2]), .failures(f[2]), .done(d[2]));
  tb_thor_event_rate #(.N(256), .P(64)) r64 (.checks(c[3]), .failures(f[3]), .done(d[3]));
  tb_thor_event_rate #(.N(256), .P(128)) r128 (.checks(c[4]), .failures(f[4]), .done(d[4]));

  int checks, failures;
  initial begin
    fork
      wait (d[0] && d[1] && d[2] && d[3] && d[4]);
      #50ms;
    join_any
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin
      checks += c[i];
      failures += f[i] + (d[i] ? 0 : 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
