// softmax_workload: testbench harness that runs one evaluation of the paper
// on several builds of the softmax accelerator side by side.
//
// NCFG (up to 6) accelerators share one input stream; configuration k uses exponential
// METHOD[k] (0 Taylor, 1 linear LUT, 2 quadratic LUT) with TAYLOR_ORDER
// ORDER[k] or LUT_SAMPLES SAMPLES[k]. NVEC random vectors of LEN elements,
// uniform in (-IN_RANGE, IN_RANGE), are pushed through all of them.
// For every output the harness checks:
//   - the value against softmax computed in real numbers from the same
//     approximation (softmax_ref_pkg), within 2 LSBs plus the propagated
//     datapath error bound;
//   - out_last on the last element, and the cycle count from start to done,
//     2*LEN + NUM_W + 5 with no stalls.
// It also reports, per configuration, the RMSE of the probabilities against
// exact softmax and how often the arg-max agrees with exact softmax. With
// STANDALONE_CHECKS set it checks the error pattern of the standalone study:
// third-order Taylor more accurate than orders 1 and 2, and Taylor-3 and
// both 64-sample interpolations within one LSB RMSE.
// The harness does not end the simulation: it counts into checks and
// failures and raises finished; the testbench that instantiates it prints
// the result and stops.
module softmax_workload
  import softmax_pkg::*;
  import softmax_ref_pkg::*;
#(
  parameter string NAME              = "workload",
  parameter int    DATA_W            = 16,
  parameter int    FRAC_W            = 12,
  parameter int    IN_SHIFT          = 0,
  parameter int    VEC_LEN           = 1024,
  parameter int    LEN               = 1000,
  parameter int    NVEC              = 2,
  parameter real   IN_RANGE          = 1.0,
  parameter int    NCFG              = 1,   // at most 6
  parameter int    METHOD  [6]       = '{0, 0, 0, 0, 0, 0},
  parameter int    ORDER   [6]       = '{3, 3, 3, 3, 3, 3},
  parameter int    SAMPLES [6]       = '{64, 64, 64, 64, 64, 64},
  parameter bit    STANDALONE_CHECKS = 1'b0
) ();

  localparam int  LEN_W = $clog2(VEC_LEN + 1);
  localparam int  NUM_W = FRAC_W + DATA_W + $clog2(VEC_LEN) + 1;
  localparam real LSB   = 1.0 / (64'sd1 << FRAC_W);
  localparam real MAXV  = ((64'sd1 << (DATA_W - 1)) - 1) * LSB;

  int checks = 0, failures = 0;
  bit finished = 1'b0;

  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic signed [DATA_W-1:0] in_data = '0;
  logic [NCFG-1:0] busy, done, in_ready, out_valid, out_last, exp_sat;
  logic signed [DATA_W-1:0] out_data [NCFG];

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic signed [DATA_W-1:0] got [NCFG][LEN];
  int  n_got [NCFG];
  int  done_cycle [NCFG];
  int  n_sat [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    softmax_top #(
      .DATA_W(DATA_W), .FRAC_W(FRAC_W), .VEC_LEN(VEC_LEN), .IN_SHIFT(IN_SHIFT),
      .EXP_METHOD(exp_method_e'(METHOD[k])), .TAYLOR_ORDER(ORDER[k]),
      .LUT_SAMPLES(SAMPLES[k])
    ) dut (
      .clk(clk), .rst_n(rst_n), .start(start), .len(LEN_W'(LEN)),
      .busy(busy[k]), .done(done[k]),
      .in_valid(in_valid), .in_ready(in_ready[k]), .in_data(in_data),
      .out_valid(out_valid[k]), .out_ready(1'b1), .out_data(out_data[k]),
      .out_last(out_last[k]), .exp_sat(exp_sat[k])
    );

    always @(posedge clk) begin
      if (rst_n && exp_sat[k]) n_sat[k]++;
      if (out_valid[k]) begin
        if (n_got[k] < LEN) got[k][n_got[k]] = out_data[k];
        checks++;
        if (out_last[k] != (n_got[k] == LEN - 1)) begin
          failures++;
          $display("FAIL %s cfg %0d: out_last wrong at element %0d", NAME, k, n_got[k]);
        end
        n_got[k]++;
      end
      if (done[k]) done_cycle[k] = cycle;
    end
  end

  logic signed [DATA_W-1:0] vec [LEN];
  real sq_err [NCFG];
  int  agree [NCFG];

  task automatic run_one();
    real xs [LEN];
    real ex [LEN];
    real e [LEN];
    real eb [LEN];
    real sum_ex, sum_e, sum_eb, p_ref, p_hw, p_exact, tol;
    int  start_cycle, best_exact, best_hw [NCFG];
    for (int i = 0; i < LEN; i++) begin
      real v = (($urandom % 1000001) / 500000.0 - 1.0) * IN_RANGE;
      longint c = longint'(v / LSB);
      if (c > (longint'(1) << (DATA_W - 1)) - 1) c = (longint'(1) << (DATA_W - 1)) - 1;
      if (c < -(longint'(1) << (DATA_W - 1))) c = -(longint'(1) << (DATA_W - 1));
      vec[i] = DATA_W'(c);
      xs[i]  = real'(vec[i] >>> IN_SHIFT) * LSB;   // argument the hardware sees
    end
    for (int k = 0; k < NCFG; k++) n_got[k] = 0;
    @(negedge clk);
    start = 1;
    @(posedge clk);
    start_cycle = cycle;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < LEN; i++) begin
      in_valid = 1; in_data = vec[i];
      @(negedge clk);
    end
    in_valid = 0;
    while (busy != '0) @(negedge clk);
    @(negedge clk);

    sum_ex = 0.0; best_exact = 0;
    for (int i = 0; i < LEN; i++) begin
      ex[i] = $exp(xs[i]);
      sum_ex += ex[i];
      if (ex[i] > ex[best_exact]) best_exact = i;
    end
    for (int k = 0; k < NCFG; k++) begin
      checks++;
      if (n_got[k] != LEN) begin
        failures++;
        $display("FAIL %s cfg %0d: %0d outputs for %0d inputs", NAME, k, n_got[k], LEN);
      end
      checks++;
      if (done_cycle[k] - start_cycle != 2 * LEN + NUM_W + 5) begin
        failures++;
        $display("FAIL %s cfg %0d: %0d cycles from start to done, expected %0d",
                 NAME, k, done_cycle[k] - start_cycle, 2 * LEN + NUM_W + 5);
      end
      sum_e = 0.0; sum_eb = 0.0;
      for (int i = 0; i < LEN; i++) begin
        e[i]  = ref_exp(xs[i], METHOD[k], ORDER[k], SAMPLES[k], MAXV);
        eb[i] = err_bound(xs[i], METHOD[k]) * LSB;
        sum_e  += e[i];
        sum_eb += eb[i];
      end
      best_hw[k] = 0;
      for (int i = 0; i < LEN; i++) begin
        p_hw    = real'(got[k][i]) * LSB;
        p_exact = ex[i] / sum_ex;
        if (sum_e > 0.0) begin
          p_ref = e[i] / sum_e;
          tol   = 2.0 * LSB + (eb[i] + p_ref * sum_eb) / sum_e;
          checks++;
          if (p_hw - p_ref > tol || p_ref - p_hw > tol) begin
            failures++;
            $display("FAIL %s cfg %0d elem %0d: got %f expected %f (tol %f)",
                     NAME, k, i, p_hw, p_ref, tol);
          end
        end
        sq_err[k] += (p_hw - p_exact) * (p_hw - p_exact);
        if (got[k][i] > got[k][best_hw[k]]) best_hw[k] = i;
      end
      if (best_hw[k] == best_exact) agree[k]++;
    end
  endtask

  initial begin
    real rmse [NCFG];
    for (int k = 0; k < NCFG; k++) begin
      n_got[k] = 0; n_sat[k] = 0; sq_err[k] = 0.0; agree[k] = 0; done_cycle[k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int v = 0; v < NVEC; v++) run_one();
    $display("%s: %0d vectors of %0d elements, %0d-bit data (%0d fractional), shift %0d",
             NAME, NVEC, LEN, DATA_W, FRAC_W, IN_SHIFT);
    for (int k = 0; k < NCFG; k++) begin
      rmse[k] = $sqrt(sq_err[k] / (NVEC * LEN));
      $display("  cfg %0d %s order/samples %0d: RMSE vs exact %e, arg-max agrees %0d/%0d, saturated exps %0d",
               k, METHOD[k] == 0 ? "Taylor       " : METHOD[k] == 1 ? "linear LUT   " : "quadratic LUT",
               METHOD[k] == 0 ? ORDER[k] : SAMPLES[k], rmse[k], agree[k], NVEC, n_sat[k]);
    end
    if (STANDALONE_CHECKS) begin
      // configurations 0..4: Taylor 1, 2, 3, linear 64, quadratic 64
      checks++;
      if (!(rmse[2] < rmse[0] && rmse[2] < rmse[1])) begin
        failures++; $display("FAIL third-order Taylor is not the most accurate Taylor order");
      end
      for (int k = 2; k <= 4; k++) begin
        checks++;
        if (rmse[k] > LSB) begin
          failures++; $display("FAIL cfg %0d RMSE above one LSB", k);
        end
      end
    end
    finished = 1'b1;
  end

endmodule
