// serializer: one colour plane of a frame, stored and streamed out serially.
//
// The plane (IMG_W x IMG_H samples) is held in an on-chip memory that a host
// fills through the write port, sample by sample, at raster addresses
// (line * IMG_W + column). A one-cycle pulse on start then reads the plane out
// in raster order, one sample per clock with no gaps, marking the first sample
// with out_sof and the last with out_eof. The grading pipeline instantiates
// three of these, one each for R, G and B, and starts them together so the
// three streams stay aligned.
//
// Timing: the first sample is valid two clocks after the start pulse (one for
// the address register, one for the registered memory read); a frame takes
// IMG_W*IMG_H clocks. busy is high from the clock after start until the last
// sample has left. start is ignored while busy.
//
// Serial streaming of each colour plane is what the method prescribes; the
// host-loaded frame memory, raster order and start/busy handshake are this
// design's own.
module serializer #(
  parameter  int unsigned IMG_W  = potato_pkg::FRAME_W,
  parameter  int unsigned IMG_H  = potato_pkg::FRAME_H,
  parameter  int unsigned DATA_W = potato_pkg::PIX_W,
  localparam int unsigned NPIX   = IMG_W * IMG_H,
  localparam int unsigned ADDR_W = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host load port
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  // control
  input  logic              start,
  output logic              busy,
  // serial stream
  output logic              out_valid,
  output logic              out_sof,
  output logic              out_eof,
  output logic [DATA_W-1:0] out_data
);

  localparam logic [ADDR_W-1:0] LAST = ADDR_W'(NPIX - 1);

  logic [DATA_W-1:0] mem [NPIX];
  logic [ADDR_W-1:0] rd_addr;
  logic              running;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    out_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running   <= 1'b0;
      rd_addr   <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
    end else begin
      out_valid <= running;
      out_sof   <= running && (rd_addr == '0);
      out_eof   <= running && (rd_addr == LAST);
      if (running) begin
        if (rd_addr == LAST) running <= 1'b0;
        else                 rd_addr <= rd_addr + 1'b1;
      end else if (start && !out_valid) begin
        running <= 1'b1;
        rd_addr <= '0;
      end
    end
  end

  assign busy = running || out_valid;

  // The host must not rewrite the plane while it is being streamed.
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> !wr_en);

endmodule
