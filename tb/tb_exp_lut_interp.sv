// tb_exp_lut_interp: self-checking test of exp_lut_interp, linear with 64
// and 8 segments and quadratic with 64 segments.
//
// The reference is built independently in the testbench: the segment of x
// is found by real arithmetic (floor((x + 1) / h), clipped to the table),
// the chord or the three-point parabola through e^x is evaluated in real
// numbers, and the result is clipped to [0, largest code]. The output must
// match within 2 LSBs (rounding of stored coefficients and of the result).
// Inside the domain the output is also held against e^x itself, with the
// interpolation error bound of each method: linear h^2/8 * e, quadratic
// h^3/(9*sqrt(3)) * e, plus 2 LSBs.
module tb_exp_lut_interp;

  localparam int DATA_W = 16;
  localparam int FRAC_W = 12;
  localparam real LSB   = 1.0 / (1 << FRAC_W);
  localparam real MAXV  = ((1 << (DATA_W - 1)) - 1) * LSB;
  localparam int NCFG   = 3;
  localparam int SAMP [NCFG] = '{64, 64, 8};
  localparam bit QUAD [NCFG] = '{1'b0, 1'b1, 1'b0};

  int checks = 0, failures = 0;

  logic signed [DATA_W-1:0] x;
  logic signed [DATA_W-1:0] y [NCFG];
  logic                     hi [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_dut
    exp_lut_interp #(.DATA_W(DATA_W), .FRAC_W(FRAC_W), .SAMPLES(SAMP[k]),
                     .QUADRATIC(QUAD[k])) dut (.x(x), .y(y[k]), .sat_hi(hi[k]));
  end

  function automatic real model(real v, int samples, bit quad);
    real h, x0, x1, xm, y0, y1, ym, r;
    int  p;
    h = 2.0 / samples;
    p = $rtoi($floor((v + 1.0) / h));
    if (p < 0) p = 0;
    if (p > samples - 1) p = samples - 1;
    x0 = -1.0 + p * h; x1 = x0 + h; xm = x0 + h / 2.0;
    y0 = $exp(x0); y1 = $exp(x1); ym = $exp(xm);
    if (!quad)
      r = y0 + (y1 - y0) * (v - x0) / h;
    else  // Lagrange form through (x0,y0), (xm,ym), (x1,y1)
      r = y0 * (v - xm) * (v - x1) / ((x0 - xm) * (x0 - x1))
        + ym * (v - x0) * (v - x1) / ((xm - x0) * (xm - x1))
        + y1 * (v - x0) * (v - xm) / ((x1 - x0) * (x1 - xm));
    if (r < 0.0) r = 0.0;
    if (r > MAXV) r = MAXV;
    return r;
  endfunction

  task automatic check_one(int code);
    real xv, m, got, h, bound;
    x = DATA_W'(code);
    #1;
    xv = real'(x) * LSB;
    for (int k = 0; k < NCFG; k++) begin
      m   = model(xv, SAMP[k], QUAD[k]);
      got = real'(y[k]) * LSB;
      checks++;
      if (got - m > 2.0 * LSB || m - got > 2.0 * LSB) begin
        failures++;
        $display("FAIL cfg %0d x=%f: got %f model %f", k, xv, got, m);
      end
      if (xv >= -1.0 && xv < 1.0) begin
        h = 2.0 / SAMP[k];
        bound = (QUAD[k] ? h * h * h / 15.5 : h * h / 8.0) * 2.72 + 2.0 * LSB;
        checks++;
        if (got - $exp(xv) > bound || $exp(xv) - got > bound) begin
          failures++;
          $display("FAIL cfg %0d x=%f: got %f, e^x %f", k, xv, got, $exp(xv));
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
    for (int c = -4096; c < 4096; c++) check_one(c);       // whole domain
    for (int c = -32768; c < 32768; c += 61) check_one(c); // extrapolation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
