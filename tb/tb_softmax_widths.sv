// tb_softmax_widths: the data-length sweep of the resource/latency study.
// The accelerator is built at 8, 12, 24 and 32 bits (16 bits is covered by
// tb_softmax_top and tb_softmax_accuracy), each with the third-order Taylor
// and the 64-segment linear exponential, and run on 1024-element vectors of
// random values in (-1, 1). The integer part is 4 bits (3 at 8 bits, so that
// 64 segments still have a distinct code each); this split is a choice, as
// the sweep's formats are not given. Each build is checked element by
// element against its own approximation model, and for its cycle count.
module tb_softmax_widths;

  softmax_workload #(
    .NAME("sweep, 8-bit"), .DATA_W(8), .FRAC_W(5), .LEN(1024), .NVEC(1),
    .IN_RANGE(1.0), .NCFG(2), .METHOD('{0, 1, 0, 0, 0, 0}),
    .ORDER('{3, 1, 3, 3, 3, 3}), .SAMPLES('{64, 64, 64, 64, 64, 64})
  ) u_w8 ();

  softmax_workload #(
    .NAME("sweep, 12-bit"), .DATA_W(12), .FRAC_W(8), .LEN(1024), .NVEC(1),
    .IN_RANGE(1.0), .NCFG(2), .METHOD('{0, 1, 0, 0, 0, 0}),
    .ORDER('{3, 1, 3, 3, 3, 3}), .SAMPLES('{64, 64, 64, 64, 64, 64})
  ) u_w12 ();

  softmax_workload #(
    .NAME("sweep, 24-bit"), .DATA_W(24), .FRAC_W(20), .LEN(1024), .NVEC(1),
    .IN_RANGE(1.0), .NCFG(2), .METHOD('{0, 1, 0, 0, 0, 0}),
    .ORDER('{3, 1, 3, 3, 3, 3}), .SAMPLES('{64, 64, 64, 64, 64, 64})
  ) u_w24 ();

  softmax_workload #(
    .NAME("sweep, 32-bit"), .DATA_W(32), .FRAC_W(28), .LEN(1024), .NVEC(1),
    .IN_RANGE(1.0), .NCFG(2), .METHOD('{0, 1, 0, 0, 0, 0}),
    .ORDER('{3, 1, 3, 3, 3, 3}), .SAMPLES('{64, 64, 64, 64, 64, 64})
  ) u_w32 ();

  function automatic int total_checks();
    return u_w8.checks + u_w12.checks + u_w24.checks + u_w32.checks;
  endfunction

  function automatic int total_failures();
    return u_w8.failures + u_w12.failures + u_w24.failures + u_w32.failures;
  endfunction

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures() + 1);
    $finish;
  end

  initial begin
    wait (u_w8.finished && u_w12.finished && u_w24.finished && u_w32.finished);
    $display("TB_RESULT checks=%0d failures=%0d", total_checks(), total_failures());
    $finish;
  end

endmodule
