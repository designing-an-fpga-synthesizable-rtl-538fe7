// tb_percent_unit: self-checking test of the greening percentage divider.
//
// Checks floor(green * 100000 / total) against 64-bit arithmetic done here,
// for the worked example 6735 green of 75783 potato pixels (8.887 %), the
// corner cases 0 %, 100 %, a single pixel of a full frame, a zero total
// (div_zero, result 0), and random pairs with green <= total. done must rise
// on the 36th clock edge after the edge that samples start (the 37th negedge
// counted from the one where start is driven), and on that same edge for a
// zero total.
module tb_percent_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  logic [18:0] green_count = '0, total_count = '0;
  logic        busy, done, div_zero;
  logic [16:0] percent_milli;

  int checks = 0, failures = 0;

  percent_unit #(.CNT_W(19), .PCT_SCALE(1000)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic divide(input int unsigned g, input int unsigned t);
    longint unsigned expv;
    int lat;
    @(negedge clk);
    green_count = 19'(g); total_count = 19'(t); start = 1'b1;
    @(negedge clk) start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    expv = (t == 0) ? 0 : (longint'(g) * 100000) / t;
    check(longint'(percent_milli) == expv, $sformatf("%0d/%0d gave %0d, expected %0d", g, t, percent_milli, expv));
    check(div_zero == (t == 0), $sformatf("div_zero for total %0d", t));
    check(lat == ((t == 0) ? 1 : 37), $sformatf("latency %0d for %0d/%0d", lat, g, t));
    @(negedge clk);
    check(!done && !busy, "done is a single pulse");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    divide(6735, 75783);
    check(percent_milli == 17'd8887, "worked example reads 8.887 %");
    divide(0, 1000);
    divide(1000, 1000);
    divide(1, 307200);
    divide(307200, 307200);
    divide(0, 0);
    divide(76800, 307200);
    divide(76801, 307200);
    for (int i = 0; i < 200; i++) begin
      int unsigned t, g;
      t = $urandom_range(1, 307200);
      g = $urandom_range(0, t);
      divide(g, t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
