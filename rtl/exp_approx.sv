// exp_approx: selects, at build time, which exponential approximation the
// softmax accelerator uses.
//
// EXP_METHOD = EXP_TAYLOR builds exp_taylor with TAYLOR_ORDER terms beyond
// the constant; EXP_LUT_LINEAR / EXP_LUT_QUAD build exp_lut_interp with
// LUT_SAMPLES segments and a linear or quadratic polynomial per segment.
// Only the chosen unit exists in hardware. sat flags that the result was
// clipped at the top of the output range.
//
// Timing: combinational, as the units it wraps.
module exp_approx
  import softmax_pkg::*;
#(
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned FRAC_W       = 12,
  parameter exp_method_e EXP_METHOD   = EXP_TAYLOR,
  parameter int unsigned TAYLOR_ORDER = 3,
  parameter int unsigned LUT_SAMPLES  = 64
) (
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat
);

  if (EXP_METHOD == EXP_TAYLOR) begin : g_taylor
    logic sat_lo;
    exp_taylor #(
      .DATA_W(DATA_W), .FRAC_W(FRAC_W), .ORDER(TAYLOR_ORDER)
    ) u_exp (
      .x(x), .y(y), .sat_hi(sat), .sat_lo(sat_lo)
    );
  end else begin : g_lut
    exp_lut_interp #(
      .DATA_W(DATA_W), .FRAC_W(FRAC_W), .SAMPLES(LUT_SAMPLES),
      .QUADRATIC(EXP_METHOD == EXP_LUT_QUAD)
    ) u_exp (
      .x(x), .y(y), .sat_hi(sat)
    );
  end

endmodule
