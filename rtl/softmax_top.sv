// softmax_top: streaming softmax accelerator with an approximate exponential,
//   out_i = e^(x_i >> IN_SHIFT) / sum_j e^(x_j >> IN_SHIFT).
//
// How it works. A vector of len elements (1..VEC_LEN) is processed in three
// phases, sequenced by a small state machine:
//   LOAD  every accepted input is shifted right arithmetically by IN_SHIFT
//         (the power-of-two input scaling that keeps the preceding
//         fully-connected layer's outputs in range), passed through the
//         exponential unit, written to exp_buffer and added to the running
//         sum. One element per cycle.
//   DIV   recip_divider computes r = floor(2^(FRAC_W+ACC_W) / sum) once.
//   OUT   exp_buffer is read back in order; each exponential is multiplied
//         by r and shifted right by ACC_W, which yields e_i / sum with FRAC_W
//         fractional bits. One element per cycle unless out_ready stalls.
// Exponentials are clipped to [0, max] by the unit; an all-zero sum gives an
// all-ones reciprocal and saturated outputs.
//
// Interface. start (while !busy) latches len; a len of 0 or above VEC_LEN is
// taken as VEC_LEN. Input and output are valid/ready streams of signed
// fixed-point numbers (DATA_W bits, FRAC_W fractional); out_last marks the
// final probability, done pulses once it has been accepted. exp_sat pulses
// for every input whose exponential saturated.
//
// Timing. in_ready rises at the clock edge that takes start. Inputs are
// taken one per cycle. out_valid first rises NUM_W + 4 clock edges after the
// edge that takes the last input (one edge to launch the divider, NUM_W + 1
// for the division, one to enter OUT, one for the buffer read), where
// NUM_W = FRAC_W + DATA_W + log2(VEC_LEN) + 1 = 39 by default. Outputs then
// follow one per cycle while out_ready is high. The exponential unit is
// combinational between in_data and the sum and buffer registers, so it sets
// the clock period; a register stage could be added there at the cost of one
// cycle of latency.
//
// From the paper: the softmax definition, the exponential approximations and
// their parameters (order, samples), the power-of-two input shift, 16-bit
// data and 1024-element vectors as the main size. This design's own choices:
// the stream handshake, the three-phase schedule, the 12 fractional bits of
// the default format, the reciprocal-and-multiply normalisation, and the
// accumulator and reciprocal widths.
module softmax_top
  import softmax_pkg::*;
#(
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned FRAC_W       = 12,
  parameter int unsigned VEC_LEN      = 1024,
  parameter int unsigned IN_SHIFT     = 0,
  parameter exp_method_e EXP_METHOD   = EXP_TAYLOR,
  parameter int unsigned TAYLOR_ORDER = 3,
  parameter int unsigned LUT_SAMPLES  = 64,
  localparam int unsigned ADDR_W      = $clog2(VEC_LEN),
  localparam int unsigned LEN_W       = $clog2(VEC_LEN + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // control
  input  logic                     start,
  input  logic [LEN_W-1:0]         len,
  output logic                     busy,
  output logic                     done,
  // input vector stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  // output probability stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [DATA_W-1:0] out_data,
  output logic                     out_last,
  // status
  output logic                     exp_sat
);

  localparam int unsigned ACC_W = DATA_W + ADDR_W;      // sum of VEC_LEN exps
  localparam int unsigned NUM_W = FRAC_W + ACC_W + 1;   // reciprocal width
  localparam int unsigned PRD_W = DATA_W + NUM_W;
  localparam logic [PRD_W-1:0] MAXPOS = PRD_W'({(DATA_W-1){1'b1}});

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DIV, S_OUT} state_e;
  state_e state;

  logic [LEN_W-1:0]  len_q;
  logic [ADDR_W-1:0] idx;        // write index (LOAD) / read index (OUT)
  logic [LEN_W-1:0]  rd_cnt;     // reads issued in OUT
  logic [ACC_W-1:0]  sum;

  // ---- exponential of the scaled input ----------------------------------
  logic signed [DATA_W-1:0] x_sc, e_val;
  logic                     e_sat;

  assign x_sc = in_data >>> IN_SHIFT;

  exp_approx #(
    .DATA_W(DATA_W), .FRAC_W(FRAC_W), .EXP_METHOD(EXP_METHOD),
    .TAYLOR_ORDER(TAYLOR_ORDER), .LUT_SAMPLES(LUT_SAMPLES)
  ) u_exp (
    .x(x_sc), .y(e_val), .sat(e_sat)
  );

  assign in_ready = (state == S_LOAD);
  wire   in_fire  = in_valid && in_ready;
  assign exp_sat  = in_fire && e_sat;

  // ---- reciprocal of the sum --------------------------------------------
  logic             div_start, div_busy, div_done;
  logic [NUM_W-1:0] recip;

  recip_divider #(.NUM_W(NUM_W), .DEN_W(ACC_W)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start),
    .dividend(NUM_W'(1) << (FRAC_W + ACC_W)), .divisor(sum),
    .busy(div_busy), .done(div_done), .quotient(recip)
  );

  // ---- exponential buffer and read pipeline -----------------------------
  logic              rd_en, q_valid, q_last, advance;
  logic [DATA_W-1:0] q_data;

  assign advance = !out_valid || out_ready;
  assign rd_en   = (state == S_OUT) && advance && (rd_cnt < len_q);

  exp_buffer #(.DEPTH(VEC_LEN), .DATA_W(DATA_W)) u_buf (
    .clk(clk),
    .wr_en(in_fire), .wr_addr(idx), .wr_data(e_val),
    .rd_en(rd_en), .rd_addr(idx), .rd_data(q_data)
  );

  // normalisation: e_i * r >> ACC_W, clipped to the output format
  logic [PRD_W-1:0] prod, prob;
  assign prod = PRD_W'(q_data) * PRD_W'(recip);
  assign prob = (prod >> ACC_W) > MAXPOS ? MAXPOS : (prod >> ACC_W);

  // ---- sequencing --------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      len_q     <= '0;
      idx       <= '0;
      rd_cnt    <= '0;
      sum       <= '0;
      div_start <= 1'b0;
      q_valid   <= 1'b0;
      q_last    <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      done      <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          len_q <= (len == '0 || len > LEN_W'(VEC_LEN)) ? LEN_W'(VEC_LEN) : len;
          idx   <= '0;
          sum   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_fire) begin
          sum <= sum + ACC_W'(unsigned'(e_val));
          idx <= idx + 1'b1;
          if (LEN_W'(idx) == len_q - 1'b1) begin
            div_start <= 1'b1;
            state     <= S_DIV;
          end
        end
        S_DIV: if (div_done) begin
          idx     <= '0;
          rd_cnt  <= '0;
          q_valid <= 1'b0;
          state   <= S_OUT;
        end
        S_OUT: begin
          if (advance) begin
            out_valid <= q_valid;
            out_data  <= prob[DATA_W-1:0];
            out_last  <= q_last;
            q_valid   <= rd_en;
            q_last    <= rd_en && (rd_cnt == len_q - 1'b1);
            if (rd_en) begin
              idx    <= idx + 1'b1;
              rd_cnt <= rd_cnt + 1'b1;
            end
          end
          if (out_valid && out_ready && out_last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---- handshake rules ---------------------------------------------------
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_last));
  a_in_only_in_load: assert property (@(posedge clk) disable iff (!rst_n)
    in_ready |-> state == S_LOAD);
  a_div_idle_at_start: assert property (@(posedge clk) disable iff (!rst_n)
    div_start |-> !div_busy);

endmodule
