// tb_deserializer: self-checking test of the serial-to-plane collector.
//
// Two 8 x 4 frames of random samples are streamed in, the second with random
// gaps in in_valid. After each, frame_ready must be high and every address
// read back (one clock read latency) must hold the sample streamed there;
// frame_ready must drop when the next frame starts.
module tb_deserializer;
  localparam int W = 8, H = 4, N = W * H;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       in_valid = 1'b0, in_sof = 1'b0, in_eof = 1'b0;
  logic [7:0] in_data = '0;
  logic [4:0] rd_addr = '0;
  logic [7:0] rd_data;
  logic       frame_ready;
  logic [7:0] plane [N];

  int checks = 0, failures = 0;

  deserializer #(.IMG_W(W), .IMG_H(H), .DATA_W(8)) dut (.*);

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

  task automatic send_frame(input bit gaps);
    for (int i = 0; i < N; i++) begin
      plane[i] = 8'($urandom);
      if (gaps) while ($urandom_range(0, 2) == 0) begin
        @(negedge clk) in_valid = 1'b0;
      end
      @(negedge clk);
      in_valid = 1'b1; in_sof = (i == 0); in_eof = (i == N - 1); in_data = plane[i];
      if (i == 1) check(!frame_ready, "frame_ready cleared by the new frame");
    end
    @(negedge clk) in_valid = 1'b0; in_sof = 1'b0; in_eof = 1'b0;
    check(frame_ready, "frame_ready after the last sample");
  endtask

  task automatic read_back();
    for (int i = 0; i < N; i++) begin
      rd_addr = 5'(i);
      @(negedge clk);
      check(rd_data == plane[i], $sformatf("addr %0d = %h, expected %h", i, rd_data, plane[i]));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!frame_ready, "frame_ready low after reset");
    send_frame(1'b0);
    read_back();
    send_frame(1'b1);
    read_back();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
