// roi_counter: region-of-interest detector, pixel counter and ROI display.
//
// A pixel belongs to the region of interest, the potato itself, when its blue
// sample is below ROI_B_MAX: the photographs are taken on a white background,
// which is bright in blue, while potato skin is not. The block counts the ROI
// pixels of the frame (the denominator of the greening ratio) and outputs a
// display image in which ROI pixels keep their colour and the background is
// black.
//
// Interface and timing are those of green_detect: an in_valid/in_sof/in_eof
// stream, one register stage, roi_count including the pixel just output, and
// done pulsing with the last pixel's output when roi_count is final.
//
// The B thresholding and the ROI display follow the method; the threshold
// value and the streaming interface are this design's own choices.
module roi_counter
  import potato_pkg::*;
#(
  parameter int unsigned ROI_B_MAX = potato_pkg::DEF_ROI_B_MAX,
  parameter int unsigned CNT_W     = potato_pkg::FRAME_CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_sof,
  input  logic             in_eof,
  input  rgb_t             in_pix,
  output logic             out_valid,
  output rgb_t             out_pix,
  output logic             out_roi,
  output logic [CNT_W-1:0] roi_count,
  output logic             done
);

  logic roi;

  always_comb begin
    roi = in_roi(in_pix, ROI_B_MAX);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= RGB_BLACK;
      out_roi   <= 1'b0;
      roi_count <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      done      <= in_valid && in_eof;
      if (in_valid) begin
        out_pix   <= roi ? in_pix : RGB_BLACK;
        out_roi   <= roi;
        roi_count <= (in_sof ? '0 : roi_count) + CNT_W'(roi);
      end
    end
  end

endmodule
