// green_detect: per-pixel green-surface detector and green pixel counter.
//
// For each pixel of the serial RGB stream it decides two things:
//   in ROI  : B < ROI_B_MAX        (the potato against a white background)
//   green   : in ROI and (R - G) < GREEN_RG_MAX, the difference taken signed
//             (on a greened patch red and green are close; on healthy skin
//             red is clearly above green).
// It outputs the "green part" image, in which green pixels keep their colour
// and every other pixel is white, and counts the green pixels of the frame.
//
// Interface: an in_valid/in_sof/in_eof pixel stream, one pixel per clock at
// most, no back-pressure. The count restarts at the pixel flagged in_sof.
// Timing: one register stage. Each output pixel appears one clock after its
// input; greens then includes that pixel, and done pulses together with the
// output of the in_eof pixel, when greens is the frame's final count. greens
// holds until the next frame starts.
//
// The two thresholding rules (B for the region, R-G for greening) and the
// green-part image follow the method; the threshold values, the single
// pipeline stage and the frame marks are this design's own choices.
module green_detect
  import potato_pkg::*;
#(
  parameter int unsigned ROI_B_MAX    = potato_pkg::DEF_ROI_B_MAX,
  parameter int          GREEN_RG_MAX = potato_pkg::DEF_GREEN_RG_MAX,
  parameter int unsigned CNT_W        = potato_pkg::FRAME_CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_sof,
  input  logic             in_eof,
  input  rgb_t             in_pix,
  output logic             out_valid,
  output logic             out_sof,
  output logic             out_eof,
  output rgb_t             out_pix,
  output logic             out_green,
  output logic [CNT_W-1:0] greens,
  output logic             done
);

  logic green;

  always_comb begin
    green = in_roi(in_pix, ROI_B_MAX) && rg_green(in_pix, GREEN_RG_MAX);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
      out_pix   <= RGB_WHITE;
      out_green <= 1'b0;
      greens    <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid && in_sof;
      out_eof   <= in_valid && in_eof;
      done      <= in_valid && in_eof;
      if (in_valid) begin
        out_pix   <= green ? in_pix : RGB_WHITE;
        out_green <= green;
        greens    <= (in_sof ? '0 : greens) + CNT_W'(green);
      end
    end
  end

endmodule
