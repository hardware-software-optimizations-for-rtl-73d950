// tb_workload_sizes: runs the two simulated case studies, the chaotic Lorenz system
// and the F8 Cruiser aircraft, on the accelerator rebuilt at each one's sizes.
//
// The two differ from the default build (and from each other) only in their sizes,
// so one testbench runs both, each on its own copy of the accelerator (workload_run),
// at the same time. Lorenz has 3 states and no control input: X = 3, and the 7
// non-zero terms of its usual polynomial model as P = 7 coefficients, Q = 0. F8 has
// 3 states and 1 control input: X = 4, its polynomial model has 20 terms (P = 20),
// and Q = 1 for the one input. These sizes are common knowledge of the two models;
// the sequence length T and the random data are this testbench's own choice, as
// the numbers only have to exercise the datapath. Lorenz runs with random gaps on
// both streams, F8 with free-running streams and a check of the step interval.
// Every output word of both runs is compared with a bit-exact model.
module tb_workload_sizes;
  bit done_l, done_f;
  int checks_l, checks_f, failures_l, failures_f;

  workload_run #(.X(3), .P(7), .Q(0), .T(60), .GAP(30), .NAME("Lorenz")) u_lorenz (
    .done(done_l), .checks(checks_l), .failures(failures_l));
  workload_run #(.X(4), .P(20), .Q(1), .T(60), .GAP(0), .NAME("F8 Cruiser")) u_f8 (
    .done(done_f), .checks(checks_f), .failures(failures_f));

  initial begin
    fork
      wait (done_l && done_f);
      begin
        #2000000;
        failures_l++;
        $display("FAIL: watchdog");
      end
    join_any
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks_l + checks_f, failures_l + failures_f);
    $finish;
  end
endmodule
