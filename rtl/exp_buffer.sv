// exp_buffer: simple dual-port memory holding one vector of exponentials
// between the pass that computes them and the pass that normalises them.
//
// How it works: one write port and one read port, both synchronous to clk.
// A read with rd_en high returns mem[rd_addr] on rd_data in the next cycle;
// with rd_en low rd_data keeps its value, so the reader can stall the read
// pipeline. Written as a plain array so that synthesis can map it to block
// RAM; its contents are not reset.
//
// The paper's accelerator holds a whole vector (1024 elements in its
// standalone study) and reports block RAM use; the port arrangement and the
// hold-on-disable read are this design's choices.
module exp_buffer #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned DATA_W = 16
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [DATA_W-1:0]        wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [DATA_W-1:0]        rd_data
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
