// tb_softmax_lenet: the LeNet 5 output layer configuration. 10-element
// vectors of 12-bit data with a 6-bit integer part, scaled by a right shift
// of 3 bits, run through accelerators with 32-, 16- and 8-segment linear
// interpolation and third-, second- and first-order Taylor. The logits are
// random in (-16, 16), not taken from a trained network.
module tb_softmax_lenet;
  softmax_workload #(
    .NAME("LeNet 5 layer, 12-bit"), .DATA_W(12), .FRAC_W(6), .IN_SHIFT(3),
    .LEN(10), .NVEC(200), .IN_RANGE(16.0), .NCFG(6),
    .METHOD('{1, 1, 1, 0, 0, 0}), .ORDER('{1, 1, 1, 3, 2, 1}),
    .SAMPLES('{32, 16, 8, 64, 64, 64})
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
