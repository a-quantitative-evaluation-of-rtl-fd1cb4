// exp_lut_interp: e^x by piecewise interpolation with coefficient look-up
// tables filled at synthesis time.
//
// How it works: the domain [-1, 1) is cut into SAMPLES equal segments
// (SAMPLES a power of two). The segment index is found without a division:
// the input is offset by +1 so that it becomes non-negative and shifted right,
//   p = (x + 1) >> (FRAC_W + 1 - log2(SAMPLES)).
// Inputs left of the domain use segment 0, inputs right of it the last
// segment, so the edge polynomials extrapolate.
//   Linear (QUADRATIC = 0): M[p], B[p] are the slope and intercept of the
//     chord through e^x at the two segment ends, y = M[p]*x + B[p].
//   Quadratic (QUADRATIC = 1): A[p], M[p], B[p] are the coefficients of the
//     parabola through e^x at the start, middle and end of the segment,
//     y = A[p]*x^2 + M[p]*x + B[p].
// Coefficients are stored with GUARD_W more fractional bits than the data;
// the sum is rounded to nearest when brought back to FRAC_W bits and then
// clipped to [0, max].
//
// Interface: x and y are signed fixed point, DATA_W bits with FRAC_W
// fractional. sat_hi flags that the result was saturated.
//
// Timing: combinational (table read, one or two multiplies, adds).
//
// From the paper: uniform sampling, slope/intercept (and for the quadratic
// case a three-point fit) precomputed at synthesis time, a power-of-two
// number of samples so that the index is a shift, 64 samples as the main
// size. This design's own choices: the domain offset, the segment edges as
// fit points, the guard bits, rounding and clipping.
module exp_lut_interp #(
  parameter int unsigned DATA_W    = 16,
  parameter int unsigned FRAC_W    = 12,
  parameter int unsigned SAMPLES   = 64,
  parameter bit          QUADRATIC = 1'b0,
  parameter int unsigned GUARD_W   = 8
) (
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat_hi
);

  localparam int unsigned LOG2S  = $clog2(SAMPLES);
  localparam int unsigned CF     = FRAC_W + GUARD_W;  // coefficient fraction bits
  localparam int unsigned CW     = CF + 4;            // coefficients lie in (-8, 8)
  localparam int unsigned IDX_SH = FRAC_W + 1 - LOG2S;
  localparam int unsigned PW     = CW + 2 * DATA_W + 2;
  localparam logic signed [PW-1:0] MAXPOS = PW'({(DATA_W-1){1'b1}});

  initial begin
    assert (SAMPLES == (1 << LOG2S) && FRAC_W + 1 >= LOG2S)
      else $error("exp_lut_interp: SAMPLES must be a power of two <= 2^(FRAC_W+1)");
  end

  // ---- elaboration-time coefficient computation -------------------------
  function automatic logic signed [CW-1:0] quant(input real v);
    return CW'(longint'(v * (2.0 ** CF)));
  endfunction

  // which: 0 = x^0 coefficient (B), 1 = x^1 (M), 2 = x^2 (A)
  function automatic logic signed [CW-1:0] coef(input int p, input int which);
    real h, x0, x1, xm, y0, y1, ym, a, b, c;
    h  = 2.0 / SAMPLES;
    x0 = -1.0 + p * h;
    x1 = x0 + h;
    xm = x0 + h / 2.0;
    y0 = softmax_pkg::real_exp(x0);
    y1 = softmax_pkg::real_exp(x1);
    ym = softmax_pkg::real_exp(xm);
    if (!QUADRATIC) begin
      b = (y1 - y0) / h;                  // slope m_p
      c = y1 - b * x1;                    // intercept b_p
      a = 0.0;
    end else begin
      // parabola in t = x - xm, then expanded into powers of x
      a = (y0 - 2.0 * ym + y1) / (2.0 * (h / 2.0) * (h / 2.0));
      b = (y1 - y0) / h;
      c = ym - b * xm + a * xm * xm;
      b = b - 2.0 * a * xm;
    end
    case (which)
      0:       return quant(c);
      1:       return quant(b);
      default: return quant(a);
    endcase
  endfunction

  logic signed [CW-1:0] lut_a [SAMPLES];
  logic signed [CW-1:0] lut_m [SAMPLES];
  logic signed [CW-1:0] lut_b [SAMPLES];

  for (genvar p = 0; p < SAMPLES; p++) begin : g_lut
    localparam logic signed [CW-1:0] AV = coef(p, 2);
    localparam logic signed [CW-1:0] MV = coef(p, 1);
    localparam logic signed [CW-1:0] BV = coef(p, 0);
    assign lut_a[p] = QUADRATIC ? AV : '0;
    assign lut_m[p] = MV;
    assign lut_b[p] = BV;
  end

  // ---- segment index -----------------------------------------------------
  logic signed [DATA_W:0]  u;      // x + 1.0
  logic [LOG2S-1:0]        p_idx;

  always_comb begin
    u = (DATA_W+1)'(x) + ((DATA_W+1)'(1) <<< FRAC_W);
    if (u < 0)
      p_idx = '0;
    else if (u >= ((DATA_W+1)'(2) <<< FRAC_W))
      p_idx = LOG2S'(SAMPLES - 1);
    else
      p_idx = LOG2S'(u >>> IDX_SH);
  end

  // ---- polynomial evaluation -------------------------------------------
  logic signed [PW-1:0] xx, acc, rnd;

  always_comb begin
    xx  = (PW'(x) * PW'(x)) >>> FRAC_W;                 // x^2, FRAC_W bits
    acc = PW'(lut_b[p_idx])
        + ((PW'(lut_m[p_idx]) * PW'(x)) >>> FRAC_W)
        + ((PW'(lut_a[p_idx]) * xx) >>> FRAC_W);         // CF fraction bits
    rnd = (acc + PW'(1 << (GUARD_W - 1))) >>> GUARD_W;  // FRAC_W bits
    sat_hi = rnd > MAXPOS;
    if (rnd < 0)     y = '0;
    else if (sat_hi) y = MAXPOS[DATA_W-1:0];
    else             y = rnd[DATA_W-1:0];
  end

endmodule
