// recip_divider: sequential unsigned restoring divider, used by the softmax
// to form the reciprocal of the exponential sum once per vector.
//
// How it works: the quotient register starts out holding the dividend. Each
// cycle the partial remainder is shifted left by one bit, taking in the next
// dividend bit; if it is not below the divisor the divisor is subtracted and
// a 1 enters the quotient, otherwise a 0. After NUM_W such steps the register
// holds the quotient. A zero divisor yields an all-ones quotient.
//
// Interface: start (one cycle, while !busy) latches dividend and divisor;
// done pulses for one cycle when quotient is valid; quotient holds until the
// next start.
//
// Timing: done rises NUM_W + 1 cycles after start; one result per division.
//
// The paper only says that the softmax needs a division; it does not give
// the divider. Computing one reciprocal per vector and multiplying, rather
// than dividing each element, and the restoring algorithm are this
// design's choices.
module recip_divider #(
  parameter int unsigned NUM_W = 40,
  parameter int unsigned DEN_W = 26
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] dividend,
  input  logic [DEN_W-1:0] divisor,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quotient
);

  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [DEN_W-1:0]   rem;      // always below the divisor
  logic [DEN_W-1:0]   den;
  logic [CNT_W-1:0]   cnt;
  logic [DEN_W:0]     rem_sh;
  logic               ge;

  assign rem_sh = {rem, quotient[NUM_W-1]};
  assign ge     = rem_sh >= {1'b0, den};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem      <= '0;
      den      <= '0;
      cnt      <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem      <= '0;
        den      <= divisor;
        quotient <= dividend;
        cnt      <= CNT_W'(NUM_W);
        busy     <= 1'b1;
      end else if (busy) begin
        rem      <= DEN_W'(ge ? rem_sh - {1'b0, den} : rem_sh);
        quotient <= {quotient[NUM_W-2:0], ge};
        cnt      <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
