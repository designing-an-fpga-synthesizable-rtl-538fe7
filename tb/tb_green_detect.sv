// tb_green_detect: self-checking test of the per-pixel green detector.
//
// Frames of pixels are streamed through the detector: first a directed frame
// that sits on both sides of each threshold (B just below / at the ROI limit,
// R-G just below / at the green limit, negative R-G), then random frames with
// gaps in in_valid. A reference computed here from the two rules gives the
// expected green flag, output pixel (input colour if green, else white) and
// running count; the output must follow its input by exactly one clock and
// done must pulse with the last pixel.
module tb_green_detect;
  import potato_pkg::*;

  localparam int B_MAX = 160, RG_MAX = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_sof = 1'b0, in_eof = 1'b0;
  rgb_t        in_pix = '0;
  logic        out_valid, out_sof, out_eof, out_green, done;
  rgb_t        out_pix;
  logic [18:0] greens;

  int checks = 0, failures = 0;
  int n_green = 0, n_white = 0;

  green_detect #(.ROI_B_MAX(B_MAX), .GREEN_RG_MAX(RG_MAX), .CNT_W(19)) dut (.*);

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

  // Reference rule, written out independently of the package functions.
  function automatic bit ref_green(rgb_t p);
    int r, g, b;
    r = p.r; g = p.g; b = p.b;
    return (b < B_MAX) && ((r - g) < RG_MAX);
  endfunction

  task automatic send_frame(input rgb_t pix[$], input bit gaps);
    int exp_count;
    bit exp_g;
    exp_count = 0;
    foreach (pix[i]) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        @(negedge clk) in_valid = 1'b0; in_sof = 1'b0; in_eof = 1'b0;
        @(posedge clk);
        #1;
        check(!out_valid && !done, "no output during a gap");
      end
      @(negedge clk);
      in_valid = 1'b1; in_sof = (i == 0); in_eof = (i == pix.size() - 1); in_pix = pix[i];
      @(posedge clk);
      #1;
      exp_g = ref_green(pix[i]);
      exp_count += int'(exp_g);
      if (exp_g) n_green++; else n_white++;
      check(out_valid, $sformatf("out_valid one clock after pixel %0d", i));
      check(out_green == exp_g, $sformatf("pixel %0d %h green=%0b expected %0b", i, pix[i], out_green, exp_g));
      check(out_pix == (exp_g ? pix[i] : 24'hffffff), $sformatf("pixel %0d output %h", i, out_pix));
      check(int'(greens) == exp_count, $sformatf("count %0d expected %0d at pixel %0d", greens, exp_count, i));
      check(out_sof == (i == 0) && out_eof == (i == pix.size() - 1), $sformatf("frame marks at pixel %0d", i));
      check(done == (i == pix.size() - 1), $sformatf("done at pixel %0d", i));
    end
    @(negedge clk) in_valid = 1'b0; in_sof = 1'b0; in_eof = 1'b0;
    repeat (2) @(negedge clk);
    check(int'(greens) == exp_count && !done, "count held after the frame");
  endtask

  initial begin
    rgb_t frame[$];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Directed threshold corners.
    frame = '{
      '{r: 8'd100, g: 8'd81,  b: 8'd159},   // R-G 19, B 159 -> green
      '{r: 8'd100, g: 8'd80,  b: 8'd159},   // R-G 20        -> not green
      '{r: 8'd100, g: 8'd81,  b: 8'd160},   // B 160, outside ROI
      '{r: 8'd50,  g: 8'd200, b: 8'd10},    // R-G negative  -> green
      '{r: 8'd255, g: 8'd0,   b: 8'd0},     // R-G 255       -> not green
      '{r: 8'd0,   g: 8'd255, b: 8'd255},   // white-ish background
      '{r: 8'd0,   g: 8'd0,   b: 8'd0},     // black, in ROI, green
      '{r: 8'd200, g: 8'd170, b: 8'd100}};  // healthy skin
    send_frame(frame, 1'b0);
    for (int f = 0; f < 4; f++) begin
      frame.delete();
      for (int i = 0; i < 200; i++) begin
        rgb_t p;
        p.r = 8'($urandom); p.b = 8'($urandom);
        p.g = 8'(int'(p.r) + $urandom_range(0, 60) - 40);
        frame.push_back(p);
      end
      send_frame(frame, f[0]);
    end
    check(n_green > 50 && n_white > 50, $sformatf("both outcomes exercised (%0d green, %0d not)", n_green, n_white));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
