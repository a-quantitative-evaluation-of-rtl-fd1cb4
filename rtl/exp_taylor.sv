// exp_taylor: e^x by a truncated Taylor series centred at zero,
//   e^x ~= 1 + x + x^2/2! + ... + x^ORDER/ORDER!
//
// How it works: the terms are built by the recurrence t_n = t_(n-1) * x / n,
// starting from t_0 = 1. Each product is brought back to FRAC_W fractional
// bits with an arithmetic shift (floor) and divided by the constant n
// (truncation toward zero), which is what a fixed-point C++ model of the
// series does. The terms are summed in a wide register and the result is
// clipped to the output format: a negative polynomial value (possible for
// odd orders when x < -1) is clamped to zero, a value above the largest
// representable number is saturated.
//
// Interface: x and y are two's-complement fixed-point numbers with DATA_W
// bits of which FRAC_W are fractional (the ap_fixed<DATA_W, DATA_W-FRAC_W>
// convention). sat_hi / sat_lo flag that the result was saturated or clamped.
//
// Timing: purely combinational; the accelerator registers around it.
//
// From the paper: the series (centred at a = 0) and orders 1 to 3, with the
// third order as the configuration of its resource/latency study. This
// design's own choices: the term recurrence, the truncating rounding and the
// clamping at both ends of the range.
module exp_taylor #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned FRAC_W = 12,
  parameter int unsigned ORDER  = 3
) (
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat_hi,
  output logic                     sat_lo
);

  localparam int unsigned WW = 2 * DATA_W + 8;   // width of terms and sum
  localparam logic signed [WW-1:0] ONE    = WW'(1) << FRAC_W;
  localparam logic signed [WW-1:0] MAXPOS = WW'({(DATA_W-1){1'b1}});

  initial begin
    assert (ORDER >= 1 && ORDER <= 3)
      else $error("exp_taylor: ORDER must be 1, 2 or 3");
  end

  logic signed [WW-1:0]        term [ORDER+1];
  logic signed [WW-1:0]        sum;
  logic signed [WW+DATA_W-1:0] prod [ORDER+1];

  always_comb begin
    term[0] = ONE;
    prod[0] = '0;
    sum     = ONE;
    for (int n = 1; n <= ORDER; n++) begin
      prod[n] = (WW+DATA_W)'(term[n-1]) * (WW+DATA_W)'(x);
      term[n] = WW'((prod[n] >>> FRAC_W) / n);
      sum     = sum + term[n];
    end
    sat_lo = sum < 0;
    sat_hi = sum > MAXPOS;
    if (sat_lo)      y = '0;
    else if (sat_hi) y = MAXPOS[DATA_W-1:0];
    else             y = sum[DATA_W-1:0];
  end

endmodule
