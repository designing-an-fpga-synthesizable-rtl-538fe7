// grade_compare: pass/fail grade from the greening percentage.
//
// Following the USDA rule for potatoes, a tuber counts as damaged when green
// colour covers more than 25 percent of its surface. The block compares the
// percentage from percent_unit (in 1/PCT_SCALE percent) with LIMIT_PCT and
// outputs grade_ok = 1 for "not damaged" (percentage <= LIMIT_PCT) and 0 for
// "damaged". Only the side of the potato seen by the camera is measured.
//
// Timing: registered; grade_valid pulses one clock after in_valid and
// grade_ok holds until the next valid percentage.
//
// The 25 % limit and the 1 / 0 meaning follow the method; the stronger 50 %
// "seriously damaged" level of the same rule is not graded.
module grade_compare
  import potato_pkg::*;
#(
  parameter  int unsigned LIMIT_PCT = 25,
  parameter  int unsigned PCT_SCALE = potato_pkg::DEF_PCT_SCALE,
  localparam int unsigned PCT_W     = $clog2(100 * PCT_SCALE + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [PCT_W-1:0] percent_milli,
  output logic             grade_valid,
  output logic             grade_ok
);

  localparam logic [PCT_W-1:0] LIMIT = PCT_W'(LIMIT_PCT * PCT_SCALE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      grade_valid <= 1'b0;
      grade_ok    <= 1'b0;
    end else begin
      grade_valid <= in_valid;
      if (in_valid) grade_ok <= (percent_milli <= LIMIT);
    end
  end

endmodule
