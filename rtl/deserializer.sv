// deserializer: collects a serial colour stream back into a frame plane.
//
// Each valid input sample is written to an on-chip plane memory at the next
// raster address; the sample flagged in_sof goes to address 0. When the sample
// flagged in_eof has been written, frame_ready rises and stays high until the
// next frame starts, so a display (or host) can read the finished plane
// through rd_addr/rd_data. The grading pipeline uses three of these, one per
// colour, to rebuild the green-part image.
//
// Timing: a sample is written on the clock it is valid; rd_data is the
// memory word at rd_addr one clock earlier (registered read). The read port
// is independent of the write port.
//
// Turning the output stream back into an image follows the method; the
// memory, its read port and frame_ready are this design's own.
module deserializer #(
  parameter  int unsigned IMG_W  = potato_pkg::FRAME_W,
  parameter  int unsigned IMG_H  = potato_pkg::FRAME_H,
  parameter  int unsigned DATA_W = potato_pkg::PIX_W,
  localparam int unsigned NPIX   = IMG_W * IMG_H,
  localparam int unsigned ADDR_W = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic              in_eof,
  input  logic [DATA_W-1:0] in_data,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [DATA_W-1:0] rd_data,
  output logic              frame_ready
);

  logic [DATA_W-1:0] mem [NPIX];
  logic [ADDR_W-1:0] wr_ptr;
  logic [ADDR_W-1:0] wr_addr;

  assign wr_addr = in_sof ? '0 : wr_ptr;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_addr] <= in_data;
  end

  always_ff @(posedge clk) begin
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr      <= '0;
      frame_ready <= 1'b0;
    end else if (in_valid) begin
      wr_ptr <= wr_addr + 1'b1;
      if (in_eof)      frame_ready <= 1'b1;
      else if (in_sof) frame_ready <= 1'b0;
    end
  end

  // A frame never holds more samples than the plane has addresses.
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_sof |-> {1'b0, wr_ptr} < (ADDR_W+1)'(NPIX));

endmodule
