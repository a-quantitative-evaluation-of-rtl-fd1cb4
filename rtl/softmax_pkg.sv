// softmax_pkg: types and elaboration-time helpers shared by the softmax
// accelerator.
//
// exp_method_e selects how the accelerator approximates e^x: a Taylor
// polynomial centred at zero, or a piecewise polynomial whose per-segment
// coefficients sit in look-up tables. The paper evaluates both families; the
// choice is fixed when the design is built, as it is a synthesis-time option.
//
// real_exp() is used only while elaborating, to fill the interpolation
// tables. It evaluates e^x by range reduction (x / 2^8), a 24-term series
// and eight squarings, which is accurate to well below one LSB of any table
// width used here. It is never turned into hardware.
package softmax_pkg;

  typedef enum logic [1:0] {
    EXP_TAYLOR     = 2'd0,  // 1 + x + x^2/2! + ... up to the chosen order
    EXP_LUT_LINEAR = 2'd1,  // f_p(x) = M[p]*x + B[p]
    EXP_LUT_QUAD   = 2'd2   // f_p(x) = A[p]*x^2 + M[p]*x + B[p]
  } exp_method_e;

  function automatic real real_exp(input real x);
    real r, term, s;
    r    = x / 256.0;
    term = 1.0;
    s    = 1.0;
    for (int n = 1; n < 24; n++) begin
      term = term * r / n;
      s    = s + term;
    end
    for (int k = 0; k < 8; k++) s = s * s;
    return s;
  endfunction

endpackage
