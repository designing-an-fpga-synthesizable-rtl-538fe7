// tb_grade_compare: self-checking test of the 25 % damage grade.
//
// Percentages (in thousandths of a percent) around the limit are applied:
// 25.000 % and below must grade 1 (not damaged), 25.001 % and above 0
// (damaged). The grade must appear one clock after in_valid and hold while
// in_valid is low.
module tb_grade_compare;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0;
  logic [16:0] percent_milli = '0;
  logic        grade_valid, grade_ok;

  int checks = 0, failures = 0;

  grade_compare #(.LIMIT_PCT(25), .PCT_SCALE(1000)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic grade(input int unsigned pct, input bit exp_ok);
    @(negedge clk);
    in_valid = 1'b1; percent_milli = 17'(pct);
    @(negedge clk);
    in_valid = 1'b0; percent_milli = 17'(100000 - pct);
    check(grade_valid, $sformatf("grade_valid one clock after %0d", pct));
    check(grade_ok == exp_ok, $sformatf("%0d graded %0b, expected %0b", pct, grade_ok, exp_ok));
    @(negedge clk);
    check(!grade_valid && grade_ok == exp_ok, "grade held");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    grade(8887, 1'b1);
    grade(25000, 1'b1);
    grade(25001, 1'b0);
    grade(0, 1'b1);
    grade(100000, 1'b0);
    grade(50000, 1'b0);
    grade(24999, 1'b1);
    for (int i = 0; i < 50; i++) begin
      int unsigned p;
      p = $urandom_range(0, 100000);
      grade(p, p <= 25000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
