// tb_softmax_accuracy: the standalone numerical study. 1000-element vectors
// of random values in (-1, 1), 16-bit data, run through accelerators with
// first-, second- and third-order Taylor and 64-segment linear and quadratic
// interpolation. Reports the RMSE of each against exact softmax and checks
// every output against its own approximation model (softmax_workload).
module tb_softmax_accuracy;
  softmax_workload #(
    .NAME("standalone, 16-bit"), .DATA_W(16), .FRAC_W(12), .IN_SHIFT(0),
    .LEN(1000), .NVEC(3), .IN_RANGE(1.0), .NCFG(5),
    .METHOD('{0, 0, 0, 1, 2, 0}), .ORDER('{1, 2, 3, 3, 3, 3}),
    .SAMPLES('{64, 64, 64, 64, 64, 64}), .STANDALONE_CHECKS(1'b1)
  ) u_run ();

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_run.checks, u_run.failures + 1);
    $finish;
  end

  initial begin
    wait (u_run.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_run.checks, u_run.failures);
    $finish;
  end

endmodule
