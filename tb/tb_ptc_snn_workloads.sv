// tb_ptc_snn_workloads: end-to-end runs of the accelerator at the network
// sizes of the two other evaluated data sets, which differ from the default
// build only in size:
//   * 15x15-pixel image classification with a rate code: 225 input channels,
//     135 reservoir neurons, 18 classes;
//   * event-based spoken digits: 64 input channels, 300 reservoir neurons,
//     10 classes.
// Each size is one tb_ptc_size_run instance (reference-model check of every
// spike at ratios 1 and 16, serial and parallel input). Both run in parallel;
// the results are added up when both are done.
module tb_ptc_snn_workloads;

  logic done_a, done_b;
  int   checks_a, failures_a, checks_b, failures_b;
  int   checks, failures;

  tb_ptc_size_run #(.NI(225), .NR(135), .NO(18), .T(48), .RATE(20)) u_img (
    .done(done_a), .checks(checks_a), .failures(failures_a));
  tb_ptc_size_run #(.NI(64), .NR(300), .NO(10), .T(48), .RATE(20)) u_digit (
    .done(done_b), .checks(checks_b), .failures(failures_b));

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    #1;
    wait (done_a && done_b);
    checks   = checks_a + checks_b;
    failures = failures_a + failures_b;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
