// tb_softmax_top: end-to-end test of the softmax accelerator at its default
// configuration (16-bit data with 12 fractional bits, 1024-element vectors,
// third-order Taylor exponential, no input shift).
//
// Five vectors are run back to back:
//   1. a full 1024-element vector of random values in (-1, 1), no stalls;
//   2. 1000 elements in (-1, 1) with random gaps on the input and random
//      back-pressure on the output;
//   3. 10 elements spread over the whole input range, so that some
//      exponentials saturate and some are clamped to zero;
//   4. a vector started with len = 0, which the accelerator takes as 1024;
//   5. a single element, whose probability must be 1.
// Each output is compared with softmax computed in real numbers from the
// real-valued third-order polynomial (clipped like the hardware), within
// 3 LSBs. The testbench also checks out_last, done, the one-element-per-
// cycle rates and the documented latency from the last input to the first
// output, and counts how often each mechanism happened: input gaps, output
// stalls, exponential saturation, clamping to zero, the len = 0 default and
// short vectors. A mechanism that never happened is a failure.
module tb_softmax_top;

  import softmax_pkg::*;

  localparam int DATA_W  = 16;
  localparam int FRAC_W  = 12;
  localparam int VEC_LEN = 1024;
  localparam int ORDER   = 3;
  localparam int ADDR_W  = $clog2(VEC_LEN);
  localparam int LEN_W   = $clog2(VEC_LEN + 1);
  localparam int NUM_W   = FRAC_W + DATA_W + ADDR_W + 1;
  localparam real LSB    = 1.0 / (1 << FRAC_W);
  localparam real MAXV   = ((1 << (DATA_W - 1)) - 1) * LSB;

  int checks = 0, failures = 0;
  int n_in_gap = 0, n_out_stall = 0, n_sat = 0, n_clamp = 0, n_len0 = 0, n_short = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic [LEN_W-1:0] len = '0;
  logic busy, done, in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, exp_sat;
  logic signed [DATA_W-1:0] in_data = '0, out_data;

  always #5 clk = ~clk;

  softmax_top dut (.*);

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && exp_sat) n_sat++;

  function automatic real poly(real v);
    real s = 1.0, t = 1.0;
    for (int n = 1; n <= ORDER; n++) begin
      t = t * v / n;
      s = s + t;
    end
    if (s < 0.0) s = 0.0;
    if (s > MAXV) s = MAXV;
    return s;
  endfunction

  logic signed [DATA_W-1:0] vec [VEC_LEN];
  real ref_p [VEC_LEN];

  task automatic run_vector(int n, int len_code, bit gaps, bit stalls);
    real e [VEC_LEN];
    real sum;
    int t_last_in, t_first_out, t_prev_out, got, in_idx;
    bit  first_seen;
    // reference
    sum = 0.0;
    for (int i = 0; i < n; i++) begin
      real v = real'(vec[i]) * LSB;
      e[i] = poly(v);
      if (ORDER % 2 == 1 && v < -1.0 && e[i] == 0.0) n_clamp++;
      sum += e[i];
    end
    for (int i = 0; i < n; i++) ref_p[i] = e[i] / sum;
    if (n < VEC_LEN) n_short++;
    if (len_code == 0) n_len0++;

    @(negedge clk);
    start = 1; len = LEN_W'(len_code);
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end

    fork
      begin : feed
        in_idx = 0;
        while (in_idx < n) begin
          in_valid = !(gaps && ($urandom % 4 == 0));
          in_data  = vec[in_idx];
          @(posedge clk);
          if (in_valid && in_ready) begin
            in_idx++;
            t_last_in = cycle;
          end else if (!in_valid && in_ready) n_in_gap++;
          #1;
        end
        in_valid = 0;
      end
      begin : drain
        got = 0; first_seen = 0;
        while (got < n) begin
          out_ready = !(stalls && ($urandom % 3 == 0));
          @(posedge clk);
          if (out_valid && !out_ready) n_out_stall++;
          if (out_valid && out_ready) begin
            real gv = real'(out_data) * LSB;
            checks++;
            if (gv - ref_p[got] > 3.0 * LSB || ref_p[got] - gv > 3.0 * LSB) begin
              failures++;
              $display("FAIL vec n=%0d elem %0d: got %f expected %f", n, got, gv, ref_p[got]);
            end
            checks++;
            if (out_last != (got == n - 1)) begin
              failures++;
              $display("FAIL out_last at %0d", got);
            end
            if (!first_seen) begin
              t_first_out = cycle; first_seen = 1;
            end else if (!stalls) begin
              checks++;
              if (cycle != t_prev_out + 1) begin
                failures++; $display("FAIL output rate: gap at %0d", got);
              end
            end
            t_prev_out = cycle;
            got++;
          end
          #1;
        end
        out_ready = 0;
      end
    join
    // latency, no back-pressure: out_valid rises NUM_W + 4 edges after the
    // edge that takes the last input, and is taken at the following edge
    if (!stalls) begin
      checks++;
      if (t_first_out - t_last_in != NUM_W + 5) begin
        failures++;
        $display("FAIL latency %0d expected %0d", t_first_out - t_last_in, NUM_W + 5);
      end
    end
    // done follows the last accepted output
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy after the last output"); end
  endtask

  // done must pulse exactly once per vector
  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (busy || out_valid || in_ready) begin failures++; $display("FAIL not idle after reset"); end

    for (int i = 0; i < VEC_LEN; i++) vec[i] = DATA_W'(int'($urandom % 8191) - 4095);
    run_vector(VEC_LEN, VEC_LEN, 0, 0);

    for (int i = 0; i < 1000; i++) vec[i] = DATA_W'(int'($urandom % 8191) - 4095);
    run_vector(1000, 1000, 1, 1);

    vec[0] = 16'sh7fff; vec[1] = -16'sh8000; vec[2] = 0; vec[3] = 16'sd12000;
    vec[4] = -16'sd9000; vec[5] = 16'sd4096; vec[6] = -16'sd4096; vec[7] = 16'sd20000;
    vec[8] = -16'sd30000; vec[9] = 16'sd100;
    run_vector(10, 10, 1, 0);

    for (int i = 0; i < VEC_LEN; i++) vec[i] = DATA_W'(int'($urandom % 4001) - 2000);
    run_vector(VEC_LEN, 0, 0, 1);

    vec[0] = -16'sd1234;
    run_vector(1, 1, 0, 0);

    @(posedge clk);
    #1;
    checks++;
    if (n_done != 5) begin failures++; $display("FAIL done pulsed %0d times", n_done); end

    $display("mechanisms: input gaps %0d, output stalls %0d, saturated exps %0d, clamped exps %0d, len=0 vectors %0d, short vectors %0d",
             n_in_gap, n_out_stall, n_sat, n_clamp, n_len0, n_short);
    checks++;
    if (n_in_gap == 0 || n_out_stall == 0 || n_sat == 0 || n_clamp == 0 || n_len0 == 0 || n_short == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
