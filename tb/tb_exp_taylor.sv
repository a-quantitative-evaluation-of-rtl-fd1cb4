// tb_exp_taylor: self-checking test of exp_taylor at orders 1, 2 and 3.
//
// Each order gets its own instance. Inputs are swept over the whole 16-bit
// range (every 7th code) plus the codes around -1, 0, +1 and the extremes.
// The reference is the exact real-valued polynomial 1 + x + ... + x^N/N!,
// clipped to [0, largest code]; a result passes if it is within a bound
// that covers the fixed-point truncation of each term (a few LSBs, growing
// with |x|^2 because earlier truncation errors are multiplied by x). The
// saturation and clamp flags are checked against the reference too.
module tb_exp_taylor;

  localparam int DATA_W = 16;
  localparam int FRAC_W = 12;
  localparam real LSB   = 1.0 / (1 << FRAC_W);
  localparam real MAXV  = ((1 << (DATA_W - 1)) - 1) * LSB;

  int checks = 0, failures = 0;

  logic signed [DATA_W-1:0] x;
  logic signed [DATA_W-1:0] y [3];
  logic                     hi [3], lo [3];

  for (genvar o = 1; o <= 3; o++) begin : g_dut
    exp_taylor #(.DATA_W(DATA_W), .FRAC_W(FRAC_W), .ORDER(o)) dut (
      .x(x), .y(y[o-1]), .sat_hi(hi[o-1]), .sat_lo(lo[o-1]));
  end

  function automatic real poly(real v, int order);
    real s = 1.0, t = 1.0;
    for (int n = 1; n <= order; n++) begin
      t = t * v / n;
      s = s + t;
    end
    return s;
  endfunction

  task automatic check_one(int code);
    real xv, ref_v, got, tol;
    x = DATA_W'(code);
    #1;
    xv = real'(x) * LSB;
    for (int o = 1; o <= 3; o++) begin
      ref_v = poly(xv, o);
      got   = real'(y[o-1]) * LSB;
      tol   = (3.0 + 2.0 * xv * xv) * LSB;
      checks++;
      if (ref_v < 0.0) begin
        if (y[o-1] != 0 || !lo[o-1]) begin
          failures++;
          $display("FAIL order %0d x=%f: expected clamp to 0, got %f", o, xv, got);
        end
      end else if (ref_v > MAXV + tol) begin
        if (got != MAXV || !hi[o-1]) begin
          failures++;
          $display("FAIL order %0d x=%f: expected saturation, got %f", o, xv, got);
        end
      end else begin
        if ((got - ref_v > tol || ref_v - got > tol) && !(ref_v > MAXV - tol && hi[o-1])) begin
          failures++;
          $display("FAIL order %0d x=%f: got %f expected %f", o, xv, got, ref_v);
        end
      end
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = -32768; c < 32768; c += 7) check_one(c);
    for (int c = -8; c <= 8; c++) begin
      check_one(c);
      check_one(4096 + c);
      check_one(-4096 + c);
    end
    check_one(32767);
    check_one(-32768);
    // exact spot values, in LSBs: e(0)=1, order-3 at x=1 is 8/3
    x = 0; #1;
    checks++;
    if (y[0] != 4096 || y[1] != 4096 || y[2] != 4096) begin
      failures++; $display("FAIL e^0 != 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
