// tb_recip_divider: self-checking test of recip_divider at its default
// widths (40-bit dividend, 26-bit divisor).
//
// Random and corner-case operand pairs are divided; the quotient is checked
// against the testbench's own integer division, a zero divisor must give an
// all-ones quotient, and done must rise exactly NUM_W + 1 cycles after start.
module tb_recip_divider;

  localparam int NUM_W = 40;
  localparam int DEN_W = 26;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NUM_W-1:0] dividend, quotient;
  logic [DEN_W-1:0] divisor;
  logic busy, done;

  always #5 clk = ~clk;

  recip_divider #(.NUM_W(NUM_W), .DEN_W(DEN_W)) dut (.*);

  task automatic divide(longint unsigned a, longint unsigned b);
    longint unsigned expect_q;
    int cyc;
    @(negedge clk);
    dividend = NUM_W'(a);
    divisor  = DEN_W'(b);
    start    = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    expect_q = (divisor == 0) ? {NUM_W{1'b1}} : dividend / divisor;
    checks++;
    if (quotient != NUM_W'(expect_q)) begin
      failures++;
      $display("FAIL %0d / %0d: got %0d expected %0d", dividend, divisor, quotient, expect_q);
    end
    checks++;
    if (cyc != NUM_W + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc, NUM_W + 1);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dividend = '0; divisor = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    divide(longint'(1) << 38, 1);
    divide(longint'(1) << 38, 4096);
    divide(longint'(1) << 38, (1 << DEN_W) - 1);
    divide(longint'(1) << 38, 0);
    divide(12345, 12346);
    divide((longint'(1) << NUM_W) - 1, 3);
    for (int i = 0; i < 500; i++)
      divide({$urandom, $urandom} & ((longint'(1) << NUM_W) - 1),
             ($urandom & ((1 << DEN_W) - 1)) >> ($urandom % DEN_W));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
