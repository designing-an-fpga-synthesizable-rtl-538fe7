// tb_serializer: self-checking test of one colour-plane serializer.
//
// An 8 x 4 plane is loaded with random samples; two start pulses (one of them
// repeated while busy, which must be ignored) must each stream the 32 samples
// in raster order, one per clock with no gap, with sof on the first and eof on
// the last, the first sample two clocks after start.
module tb_serializer;
  localparam int W = 8, H = 4, N = W * H;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wr_en = 1'b0, start = 1'b0;
  logic [4:0]  wr_addr = '0;
  logic [7:0]  wr_data = '0;
  logic        busy, out_valid, out_sof, out_eof;
  logic [7:0]  out_data;
  logic [7:0]  plane [N];

  int checks = 0, failures = 0;

  serializer #(.IMG_W(W), .IMG_H(H), .DATA_W(8)) dut (.*);

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

  task automatic run_frame(input bit poke_start_again);
    int got, lat;
    got = 0; lat = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = poke_start_again;
    lat = 1;
    while (!out_valid) begin @(negedge clk); start = 1'b0; lat++; end
    check(lat == 2, $sformatf("first sample %0d clocks after start, expected 2", lat));
    while (out_valid) begin
      check(out_data == plane[got], $sformatf("sample %0d = %h, expected %h", got, out_data, plane[got]));
      check(out_sof == (got == 0), $sformatf("sof at sample %0d", got));
      check(out_eof == (got == N - 1), $sformatf("eof at sample %0d", got));
      got++;
      @(negedge clk);
    end
    check(got == N, $sformatf("frame had %0d samples, expected %0d", got, N));
    check(!busy, "busy after the frame");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      plane[i] = 8'($urandom);
      @(negedge clk);
      wr_en = 1'b1; wr_addr = 5'(i); wr_data = plane[i];
    end
    @(negedge clk) wr_en = 1'b0;
    check(!busy && !out_valid, "idle after load");
    run_frame(1'b1);
    repeat (3) @(negedge clk);
    check(!out_valid, "no output between frames");
    // rewrite two samples, stream again
    plane[0] = 8'h5a; plane[N-1] = 8'ha5;
    wr_en = 1'b1; wr_addr = 5'(0); wr_data = plane[0];
    @(negedge clk) wr_addr = 5'(N - 1); wr_data = plane[N-1];
    @(negedge clk) wr_en = 1'b0;
    run_frame(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
