// tb_exp_buffer: self-checking test of exp_buffer at its default size
// (1024 x 16 bits).
//
// Fills the memory with random words, kept in a testbench array, then reads
// it back in a random order, checking each word one cycle after the read.
// Between reads it holds rd_en low for a cycle and checks that rd_data keeps
// the last word. Finally a write and a read of the same address in one cycle
// must return the old word.
module tb_exp_buffer;

  localparam int DEPTH  = 1024;
  localparam int DATA_W = 16;
  localparam int AW     = $clog2(DEPTH);

  int checks = 0, failures = 0;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [DATA_W-1:0] wr_data = '0, rd_data;
  logic [DATA_W-1:0] shadow [DEPTH];

  always #5 clk = ~clk;

  exp_buffer #(.DEPTH(DEPTH), .DATA_W(DATA_W)) dut (.*);

  task automatic expect_data(logic [DATA_W-1:0] v, string what);
    checks++;
    if (rd_data !== v) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rd_data, v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      shadow[a] = DATA_W'($urandom);
      wr_en = 1; wr_addr = AW'(a); wr_data = shadow[a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 2 * DEPTH; i++) begin
      int a = $urandom % DEPTH;
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      expect_data(shadow[a], "read");
      rd_en = 0; rd_addr = AW'(a + 1);
      @(negedge clk);
      expect_data(shadow[a], "hold");
    end
    // read-before-write on the same address
    rd_en = 1; rd_addr = 5; wr_en = 1; wr_addr = 5; wr_data = ~shadow[5];
    @(negedge clk);
    expect_data(shadow[5], "read during write");
    wr_en = 0;
    @(negedge clk);
    expect_data(~shadow[5], "read after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
