// tb_pcn_top_versions: end-to-end test of the accelerator at the sizes of two larger
// evaluated configurations, to show that the parameters scale:
//   version D: NMAX = 64 points, PAR = 2, 16-bit data (Top-K with three merge levels);
//   version E: NMAX = 128 points, PAR = 1, 8-bit data (one point per cycle).
// Versions B and C each change only one of the sizes that version D changes, and
// version F combines the sizes of versions D and E. Both runs go in parallel on one
// clock, each through pcn_top_e2e_run, which compares every output row with the
// sequential reference model and checks the latency and the event rate. The test ends
// when both runs are done; a watchdog ends it with a failure otherwise.
module tb_pcn_top_versions;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks_d, failures_d, checks_e, failures_e;
  logic done_d, done_e;
  int checks = 0, failures = 0;

  pcn_top_e2e_run #(.N(64), .PAR(2), .W(16)) u_ver_d (
    .clk, .checks(checks_d), .failures(failures_d), .done(done_d));
  pcn_top_e2e_run #(.N(128), .PAR(1), .W(8)) u_ver_e (
    .clk, .checks(checks_e), .failures(failures_e), .done(done_e));

  initial begin
    repeat (12000) @(posedge clk);
    checks = checks_d + checks_e + 1;
    failures = failures_d + failures_e + 1;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done_d && done_e);
    @(posedge clk);
    checks = checks_d + checks_e;
    failures = failures_d + failures_e;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
