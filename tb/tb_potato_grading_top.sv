// tb_potato_grading_top: end-to-end test of the grading pipeline at full size.
//
// The top runs with its default 640 x 480 frame. Four synthetic photographs
// are generated from a hash of the pixel address, so nothing is stored:
//   1 an elliptical potato on a noisy white background with a small green
//     patch (about 7 % green, graded not damaged);
//   2 the same potato with a large green patch (about 40 %, damaged);
//   3 a scattered frame with exactly 75783 potato pixels of which 6735 are
//     green, the counts of the worked example, which must read 8.887 %;
//   4 background only: no potato, so the division is skipped (div_zero).
// Each is loaded through the load port and graded. Expected counts,
// percentage, grade, the ROI display stream and the green-part image (read
// back in full) are computed here from the two colour rules (B < 160 for the
// potato, R - G < 20 for green). result_valid must rise IMG_W*IMG_H + 39
// clock edges after the edge that samples start (IMG_W*IMG_H + 3 when the
// frame holds no potato and the division is skipped). A second start pulse during a
// frame must be ignored. Every mechanism (green pixel, non-green potato pixel,
// background pixel, both grades, zero-total division, ignored start, finished
// display frame) must be seen at least once.
module tb_potato_grading_top;
  import potato_pkg::*;

  localparam int W = 640, H = 480, N = W * H;
  localparam int B_MAX = 160, RG_MAX = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        load_en = 1'b0, start = 1'b0;
  logic [18:0] load_addr = '0, disp_addr = '0;
  rgb_t        load_pix = '0;
  logic        busy, roi_valid, disp_ready, div_zero, result_valid, grade_ok;
  rgb_t        roi_pix, disp_pix;
  logic [18:0] green_count, roi_count;
  logic [16:0] percent_milli;

  potato_grading_top dut (.*);

  int checks = 0, failures = 0;
  int n_green = 0, n_skin = 0, n_bg = 0, n_ok = 0, n_bad = 0, n_zero = 0;
  int n_ignored = 0, n_ready = 0;
  int frame_id = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- synthetic photographs ----------------
  function automatic int unsigned hash(int unsigned a, int unsigned salt);
    int unsigned h;
    h = a * 32'h9E3779B1 + salt * 32'h85EBCA77;
    h = h ^ (h >> 15);
    h = h * 32'hC2B2AE3D;
    return h ^ (h >> 13);
  endfunction

  function automatic rgb_t bg_pix(int unsigned h);
    rgb_t p;
    p.r = 8'(235 + h % 21); p.g = 8'(235 + (h >> 5) % 21); p.b = 8'(225 + (h >> 10) % 31);
    return p;
  endfunction

  function automatic rgb_t skin_pix(int unsigned h);
    rgb_t p;
    int r;
    r = 175 + h % 50;
    p.r = 8'(r); p.g = 8'(r - 22 - (h >> 6) % 30); p.b = 8'(60 + (h >> 12) % 90);
    return p;
  endfunction

  function automatic rgb_t green_pix(int unsigned h);
    rgb_t p;
    int r;
    r = 100 + h % 50;
    p.r = 8'(r); p.g = 8'(r - 12 + (h >> 6) % 30); p.b = 8'(40 + (h >> 12) % 60);
    return p;
  endfunction

  function automatic rgb_t pix_at(int f, int unsigned a);
    int unsigned h, x, y, k;
    longint dx, dy, px, py;
    h = hash(a, f);
    x = a % W; y = a / W;
    if (f == 3) begin
      // a permutation of the addresses: the first 75783 are potato
      k = int'((longint'(a) * 7919) % N);
      if (k < 6735)  return green_pix(h);
      if (k < 75783) return skin_pix(h);
      return bg_pix(h);
    end
    if (f == 4) return bg_pix(h);
    dx = longint'(x) - 320; dy = longint'(y) - 240;
    if (dx * dx * 160 * 160 + dy * dy * 220 * 220 > longint'(220 * 220) * 160 * 160)
      return bg_pix(h);
    px = longint'(x) - 400; py = longint'(y) - 220;
    if (px * px + py * py < ((f == 1) ? 50 * 50 : 120 * 120)) return green_pix(h);
    return skin_pix(h);
  endfunction

  // Reference rules, written out independently of the design.
  function automatic bit ref_roi(rgb_t p);
    return int'(p.b) < B_MAX;
  endfunction
  function automatic bit ref_green(rgb_t p);
    return ref_roi(p) && (int'(p.r) - int'(p.g) < RG_MAX);
  endfunction

  // ---------------- ROI display stream monitor ----------------
  int roi_idx = 0;
  always @(posedge clk) begin
    if (rst_n && roi_valid) begin
      rgb_t src;
      src = pix_at(frame_id, roi_idx);
      check(roi_pix == (ref_roi(src) ? src : RGB_BLACK),
            $sformatf("frame %0d ROI display pixel %0d = %h", frame_id, roi_idx, roi_pix));
      roi_idx = (roi_idx == N - 1) ? 0 : roi_idx + 1;
    end
  end

  // ---------------- one photograph ----------------
  task automatic grade_frame(input int f, input int exp_pct_fixed);
    int exp_g, exp_r, edges, poked;
    longint exp_pct;
    rgb_t p;
    bit exp_ok;

    frame_id = f;
    exp_g = 0; exp_r = 0;
    for (int a = 0; a < N; a++) begin
      p = pix_at(f, a);
      @(negedge clk);
      load_en = 1'b1; load_addr = 19'(a); load_pix = p;
      if (ref_green(p)) begin exp_g++; n_green++; end
      else if (ref_roi(p)) n_skin++;
      else n_bg++;
      if (ref_roi(p)) exp_r++;
    end
    @(negedge clk) load_en = 1'b0;
    check(!busy, "idle before start");

    start = 1'b1;
    @(negedge clk) start = 1'b0;
    edges = 1; poked = 0;
    while (!result_valid) begin
      @(negedge clk);
      edges++;
      if (edges == 1000) begin
        check(busy, "busy during the frame");
        start = 1'b1;             // must be ignored
        poked = 1;
      end else start = 1'b0;
      if (edges >= 4 && edges <= N + 2)
        check(!disp_ready, $sformatf("green-part image flagged ready at edge %0d, before the frame ended", edges));
      if (edges == N + 3) check(disp_ready, "green-part image ready right after the last pixel");
    end
    if (poked) n_ignored++;
    // result_valid is seen at the negedge after its edge.
    // (edges counts negedges: result_valid rising on edge k after the
    // start edge is seen as edges == k + 1)
    check(edges == ((exp_r == 0) ? N + 4 : N + 40),
          $sformatf("frame %0d result after %0d edges", f, edges));

    exp_pct = (exp_r == 0) ? 0 : (longint'(exp_g) * 100000) / exp_r;
    exp_ok  = exp_pct <= 25000;
    $display("frame %0d: green %0d of %0d potato pixels, %0d.%03d %%, grade %0d",
             f, green_count, roi_count, percent_milli / 1000, percent_milli % 1000, grade_ok);
    check(int'(green_count) == exp_g, $sformatf("green count %0d expected %0d", green_count, exp_g));
    check(int'(roi_count) == exp_r, $sformatf("ROI count %0d expected %0d", roi_count, exp_r));
    check(longint'(percent_milli) == exp_pct, $sformatf("percent %0d expected %0d", percent_milli, exp_pct));
    if (exp_pct_fixed >= 0)
      check(int'(percent_milli) == exp_pct_fixed, $sformatf("percent %0d expected %0d", percent_milli, exp_pct_fixed));
    check(div_zero == (exp_r == 0), "div_zero");
    check(grade_ok == exp_ok, $sformatf("grade %0b expected %0b", grade_ok, exp_ok));
    if (exp_r == 0) n_zero++;
    else if (grade_ok) n_ok++;
    else n_bad++;

    @(negedge clk);
    check(!busy && !result_valid, "idle after the result");
    check(roi_idx == 0, "ROI display stream had one pixel per frame pixel");
    check(disp_ready, "green-part image ready");
    if (disp_ready) n_ready++;
    // read back the whole green-part image
    // (rd_data follows rd_addr by one clock edge)
    for (int a = 0; a < N; a++) begin
      disp_addr = 19'(a);
      @(negedge clk);
      p = pix_at(f, a);
      check(disp_pix == (ref_green(p) ? p : RGB_WHITE),
            $sformatf("frame %0d green image pixel %0d = %h", f, a, disp_pix));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    grade_frame(1, -1);
    grade_frame(2, -1);
    grade_frame(3, 8887);
    grade_frame(4, 0);
    $display("seen: %0d green, %0d potato not green, %0d background pixels; grades ok %0d, damaged %0d; zero-total %0d; ignored start %0d; ready images %0d",
             n_green, n_skin, n_bg, n_ok, n_bad, n_zero, n_ignored, n_ready);
    check(n_green > 0, "green pixel seen");
    check(n_skin > 0, "non-green potato pixel seen");
    check(n_bg > 0, "background pixel seen");
    check(n_ok > 0, "not-damaged grade seen");
    check(n_bad > 0, "damaged grade seen");
    check(n_zero > 0, "zero-total division seen");
    check(n_ignored > 0, "start during a frame ignored");
    check(n_ready > 0, "green-part image completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
