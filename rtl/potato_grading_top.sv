// potato_grading_top: greening measurement of one potato photograph.
//
// The pipeline measures how much of a potato's visible surface is green. A
// host loads a 640 x 480 RGB photograph, taken on a white background, and
// pulses start. Three serializers, one per colour plane, then stream the
// frame one pixel per clock into two detectors that see the same pixels:
//   green_detect  marks pixels of the potato (blue below a threshold) whose
//                 red minus green is below a second threshold, counts them,
//                 and emits the green-part image (green pixels in colour,
//                 everything else white), which three deserializers write
//                 back into a readable frame;
//   roi_counter   counts the pixels of the potato (the region of interest)
//                 and emits the ROI display stream (potato in colour on black).
// When the last pixel has passed, percent_unit divides the two counts and
// scales by 100, and grade_compare grades the potato: grade_ok = 1 when at
// most 25 % of the visible surface is green, 0 otherwise.
//
// Interface: load_* writes the input frame (raster address, rgb_t pixel);
// start begins a measurement and is ignored while busy; result_valid pulses
// when green_count, roi_count, percent_milli, div_zero and grade_ok are all
// valid (they hold until the next result). disp_addr/disp_pix read the
// green-part image (one clock read latency) once disp_ready is high.
// roi_valid/roi_pix is the ROI display stream, one pixel per clock.
//
// Timing: one pixel per clock. Counting clock edges from the one that samples
// start: the last pixel leaves the serializers on edge IMG_W*IMG_H, both
// counts are final on the next, the division takes NUM_W = 36 edges and the
// grade one more, so result_valid rises on edge IMG_W*IMG_H + 39 (307239 at
// 640 x 480, 3.12 ms at the 98.3 MHz the method's FPGA build reached). With
// no potato pixel at all the division is skipped: edge IMG_W*IMG_H + 3.
//
// The block structure, the thresholding rules, the counts, the ratio times
// 100 and the 25 % grade follow the method; the host load port, the frame
// memories, the fixed-point percentage and all latencies are this design's
// own.
module potato_grading_top
  import potato_pkg::*;
#(
  parameter  int unsigned IMG_W  = potato_pkg::FRAME_W,
  parameter  int unsigned IMG_H  = potato_pkg::FRAME_H,
  localparam int unsigned NPIX   = IMG_W * IMG_H,
  localparam int unsigned ADDR_W = $clog2(NPIX),
  localparam int unsigned CW     = $clog2(NPIX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // input frame load
  input  logic              load_en,
  input  logic [ADDR_W-1:0] load_addr,
  input  rgb_t              load_pix,
  // control
  input  logic              start,
  output logic              busy,
  // ROI display stream
  output logic              roi_valid,
  output rgb_t              roi_pix,
  // green-part image read port
  input  logic [ADDR_W-1:0] disp_addr,
  output rgb_t              disp_pix,
  output logic              disp_ready,
  // results
  output logic [CW-1:0]     green_count,
  output logic [CW-1:0]     roi_count,
  output logic [DEF_PCT_W-1:0] percent_milli,
  output logic              div_zero,
  output logic              result_valid,
  output logic              grade_ok
);

  // ---------------- serializers (R, G, B planes) ----------------
  logic [2:0] s_busy, s_valid, s_sof, s_eof;
  rgb_t       s_pix;
  logic       go;

  assign go = start && !busy;

  serializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_ser_r (
    .clk, .rst_n, .wr_en(load_en), .wr_addr(load_addr), .wr_data(load_pix.r),
    .start(go), .busy(s_busy[0]), .out_valid(s_valid[0]), .out_sof(s_sof[0]),
    .out_eof(s_eof[0]), .out_data(s_pix.r));
  serializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_ser_g (
    .clk, .rst_n, .wr_en(load_en), .wr_addr(load_addr), .wr_data(load_pix.g),
    .start(go), .busy(s_busy[1]), .out_valid(s_valid[1]), .out_sof(s_sof[1]),
    .out_eof(s_eof[1]), .out_data(s_pix.g));
  serializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_ser_b (
    .clk, .rst_n, .wr_en(load_en), .wr_addr(load_addr), .wr_data(load_pix.b),
    .start(go), .busy(s_busy[2]), .out_valid(s_valid[2]), .out_sof(s_sof[2]),
    .out_eof(s_eof[2]), .out_data(s_pix.b));

  // The three planes are started together and must stay in step.
  a_planes_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (s_valid == 3'b000 || s_valid == 3'b111) && (s_sof == 3'b000 || s_sof == 3'b111)
    && (s_eof == 3'b000 || s_eof == 3'b111));

  // ---------------- green detector ----------------
  logic          g_valid, g_sof, g_eof, g_green, g_done;
  rgb_t          g_pix;
  logic [CW-1:0] g_count;

  green_detect #(.CNT_W(CW)) u_green (
    .clk, .rst_n, .in_valid(s_valid[0]), .in_sof(s_sof[0]), .in_eof(s_eof[0]),
    .in_pix(s_pix), .out_valid(g_valid), .out_sof(g_sof), .out_eof(g_eof),
    .out_pix(g_pix), .out_green(g_green), .greens(g_count), .done(g_done));

  // ---------------- ROI counter / display ----------------
  logic          r_roi, r_done;
  logic [CW-1:0] r_count;

  roi_counter #(.CNT_W(CW)) u_roi (
    .clk, .rst_n, .in_valid(s_valid[0]), .in_sof(s_sof[0]), .in_eof(s_eof[0]),
    .in_pix(s_pix), .out_valid(roi_valid), .out_pix(roi_pix), .out_roi(r_roi),
    .roi_count(r_count), .done(r_done));

  a_counts_together: assert property (@(posedge clk) disable iff (!rst_n)
    g_done == r_done);
  a_green_in_roi: assert property (@(posedge clk) disable iff (!rst_n)
    g_valid && g_green |-> r_roi);

  // ---------------- deserializers (green-part image) ----------------
  logic [2:0] d_ready;

  deserializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_des_r (
    .clk, .rst_n, .in_valid(g_valid), .in_sof(g_sof), .in_eof(g_eof),
    .in_data(g_pix.r), .rd_addr(disp_addr), .rd_data(disp_pix.r),
    .frame_ready(d_ready[0]));
  deserializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_des_g (
    .clk, .rst_n, .in_valid(g_valid), .in_sof(g_sof), .in_eof(g_eof),
    .in_data(g_pix.g), .rd_addr(disp_addr), .rd_data(disp_pix.g),
    .frame_ready(d_ready[1]));
  deserializer #(.IMG_W(IMG_W), .IMG_H(IMG_H), .DATA_W(PIX_W)) u_des_b (
    .clk, .rst_n, .in_valid(g_valid), .in_sof(g_sof), .in_eof(g_eof),
    .in_data(g_pix.b), .rd_addr(disp_addr), .rd_data(disp_pix.b),
    .frame_ready(d_ready[2]));

  assign disp_ready = &d_ready;

  // ---------------- percentage and grade ----------------
  logic             p_busy, p_done;
  logic [DEF_PCT_W-1:0] p_pct;

  percent_unit #(.CNT_W(CW)) u_pct (
    .clk, .rst_n, .start(g_done), .green_count(g_count), .total_count(r_count),
    .busy(p_busy), .done(p_done), .percent_milli(p_pct), .div_zero(div_zero));

  grade_compare u_grade (
    .clk, .rst_n, .in_valid(p_done), .percent_milli(p_pct),
    .grade_valid(result_valid), .grade_ok(grade_ok));

  assign percent_milli = p_pct;
  assign green_count   = g_count;
  assign roi_count     = r_count;

  // ---------------- busy: from start until the grade is out ----------------
  logic pending;

  always_ff @(posedge clk) begin
    if (!rst_n)            pending <= 1'b0;
    else if (go)           pending <= 1'b1;
    else if (result_valid) pending <= 1'b0;
  end

  assign busy = pending;

  a_busy_covers: assert property (@(posedge clk) disable iff (!rst_n)
    (|s_busy || p_busy) |-> pending);

endmodule
