// tb_softmax_mobilenet: the MobileNet v2 output layer configuration.
// 1000-element vectors of 20-bit data with a 10-bit integer part, scaled by
// a right shift of 1 bit, run through accelerators with 64-, 32- and
// 16-segment linear interpolation and third-, second- and first-order
// Taylor. The logits are random in (-16, 16), not taken from a network.
module tb_softmax_mobilenet;
  softmax_workload #(
    .NAME("MobileNet v2 layer, 20-bit"), .DATA_W(20), .FRAC_W(10), .IN_SHIFT(1),
    .LEN(1000), .NVEC(3), .IN_RANGE(16.0), .NCFG(6),
    .METHOD('{1, 1, 1, 0, 0, 0}), .ORDER('{1, 1, 1, 3, 2, 1}),
    .SAMPLES('{64, 32, 16, 64, 64, 64})
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
