// percent_unit: greening percentage, 100 * green_count / total_count.
//
// The ratio of green pixels to region-of-interest pixels, times 100, is the
// figure of merit of the grading method: the higher it is, the worse the
// potato. Here it is computed in fixed point as
//     percent_milli = floor(green_count * 100 * PCT_SCALE / total_count)
// i.e. in 1/PCT_SCALE of a percent (8.887 % reads 8887 with PCT_SCALE=1000).
// Multiplying before dividing keeps all the precision of the integer counts.
//
// How it works: a start pulse latches both counts and forms the numerator
// green_count * (100*PCT_SCALE), NUM_W bits wide. A restoring divider then
// produces one quotient bit per clock, most significant first: the partial
// remainder is shifted left by one numerator bit and the divisor subtracted
// whenever it fits. A zero total (no potato in the frame) skips the division
// and reports 0 with div_zero set.
//
// Timing: done rises on the NUM_W-th clock edge after the edge that samples
// start (36 edges with 19-bit counts), or on that same edge when total_count
// is zero. percent_milli and div_zero hold
// until the next result. start is ignored while busy. green_count is never
// above total_count in this pipeline (green pixels are a subset of the
// region); should it be, the result saturates at the largest PCT_W value.
//
// Division, multiplication by 100 and the ratio's operands follow the method;
// the fixed-point format and the serial divider are this design's own.
module percent_unit
  import potato_pkg::*;
#(
  parameter  int unsigned CNT_W     = potato_pkg::FRAME_CNT_W,
  parameter  int unsigned PCT_SCALE = potato_pkg::DEF_PCT_SCALE,
  localparam int unsigned MUL       = 100 * PCT_SCALE,
  localparam int unsigned PCT_W     = $clog2(MUL + 1),
  localparam int unsigned NUM_W     = CNT_W + $clog2(MUL)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CNT_W-1:0] green_count,
  input  logic [CNT_W-1:0] total_count,
  output logic             busy,
  output logic             done,
  output logic [PCT_W-1:0] percent_milli,
  output logic             div_zero
);

  typedef enum logic {IDLE, DIVIDE} state_t;

  state_t                   state;
  logic [NUM_W-1:0]         num;      // numerator bits still to bring down
  logic [NUM_W-1:0]         quo;      // quotient bits produced so far
  logic [CNT_W-1:0]         den;
  logic [CNT_W-1:0]         rem;      // partial remainder, always < den
  logic [$clog2(NUM_W+1)-1:0] steps;

  // One restoring step.
  logic [CNT_W:0]   rem_sh;
  logic             fits;
  logic [NUM_W-1:0] quo_next;
  logic [CNT_W-1:0] rem_next;

  always_comb begin
    rem_sh   = {rem, num[NUM_W-1]};
    fits     = rem_sh >= {1'b0, den};
    rem_next = fits ? CNT_W'(rem_sh - {1'b0, den}) : rem_sh[CNT_W-1:0];
    quo_next = {quo[NUM_W-2:0], fits};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= IDLE;
      num           <= '0;
      quo           <= '0;
      den           <= '0;
      rem           <= '0;
      steps         <= '0;
      done          <= 1'b0;
      percent_milli <= '0;
      div_zero      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          if (total_count == '0) begin
            percent_milli <= '0;
            div_zero      <= 1'b1;
            done          <= 1'b1;
          end else begin
            num   <= NUM_W'(green_count) * NUM_W'(MUL);
            den   <= total_count;
            rem   <= '0;
            quo   <= '0;
            steps <= ($clog2(NUM_W+1))'(NUM_W);
            state <= DIVIDE;
          end
        end
        DIVIDE: begin
          num   <= num << 1;
          rem   <= rem_next;
          quo   <= quo_next;
          steps <= steps - 1'b1;
          if (steps == 1) begin
            state         <= IDLE;
            done          <= 1'b1;
            div_zero      <= 1'b0;
            percent_milli <= (quo_next > NUM_W'(MUL)) ? '1 : PCT_W'(quo_next);
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state == DIVIDE);

  a_subset: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == IDLE |-> green_count <= total_count);

endmodule
