// tb_roi_counter: self-checking test of the region-of-interest counter.
//
// Frames are streamed through the block: a directed frame on both sides of
// the blue threshold, then random frames with gaps in in_valid. A reference
// computed here (ROI when B < 160) gives the expected ROI flag, display pixel
// (input colour inside the ROI, black outside) and running count, checked one
// clock after each input; done must pulse with the last pixel only.
module tb_roi_counter;
  import potato_pkg::*;

  localparam int B_MAX = 160;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_sof = 1'b0, in_eof = 1'b0;
  rgb_t        in_pix = '0;
  logic        out_valid, out_roi, done;
  rgb_t        out_pix;
  logic [18:0] roi_count;

  int checks = 0, failures = 0;
  int n_in = 0, n_out = 0;

  roi_counter #(.ROI_B_MAX(B_MAX), .CNT_W(19)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_frame(input rgb_t pix[$], input bit gaps);
    int exp_count;
    bit exp_r;
    exp_count = 0;
    foreach (pix[i]) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        @(negedge clk) in_valid = 1'b0; in_sof = 1'b0; in_eof = 1'b0;
      end
      @(negedge clk);
      in_valid = 1'b1; in_sof = (i == 0); in_eof = (i == pix.size() - 1); in_pix = pix[i];
      @(posedge clk);
      #1;
      exp_r = int'(pix[i].b) < B_MAX;
      exp_count += int'(exp_r);
      if (exp_r) n_in++; else n_out++;
      check(out_valid, $sformatf("out_valid one clock after pixel %0d", i));
      check(out_roi == exp_r, $sformatf("pixel %0d roi=%0b expected %0b", i, out_roi, exp_r));
      check(out_pix == (exp_r ? pix[i] : 24'h000000), $sformatf("pixel %0d display %h", i, out_pix));
      check(int'(roi_count) == exp_count, $sformatf("count %0d expected %0d", roi_count, exp_count));
      check(done == (i == pix.size() - 1), $sformatf("done at pixel %0d", i));
    end
    @(negedge clk) in_valid = 1'b0; in_sof = 1'b0; in_eof = 1'b0;
    @(negedge clk);
    check(int'(roi_count) == exp_count && !out_valid, "count held after the frame");
  endtask

  initial begin
    rgb_t frame[$];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    frame = '{
      '{r: 8'd200, g: 8'd170, b: 8'd159},
      '{r: 8'd200, g: 8'd170, b: 8'd160},
      '{r: 8'd250, g: 8'd250, b: 8'd250},
      '{r: 8'd10,  g: 8'd20,  b: 8'd0},
      '{r: 8'd255, g: 8'd255, b: 8'd255}};
    send_frame(frame, 1'b0);
    for (int f = 0; f < 4; f++) begin
      frame.delete();
      for (int i = 0; i < 200; i++) frame.push_back(24'($urandom));
      send_frame(frame, f[0]);
    end
    check(n_in > 50 && n_out > 50, $sformatf("both outcomes exercised (%0d in, %0d out)", n_in, n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
