// image_buffer: stores the static input image that is re-encoded every
// timestep.
//
// A static image carries no time information, so the same N_PIXELS
// intensities (28 x 28 8-bit pixels by default) are turned into a fresh
// Poisson spike train in every timestep of an inference. This buffer keeps
// the image on chip for the whole inference: the host writes one pixel per
// cycle through the write port, the layer controller reads pixels in raster
// order. The read is synchronous: rd_data holds pixel rd_addr one cycle after
// rd_en, which lines it up with the random value of the Poisson encoder.
// The buffer and its ports are this design's choices.
module image_buffer #(
  parameter int unsigned N_PIXELS = snn_pkg::N_INPUTS,
  parameter int unsigned PIXEL_W  = snn_pkg::PIXEL_W,
  localparam int unsigned AW = (N_PIXELS > 1) ? $clog2(N_PIXELS) : 1
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [PIXEL_W-1:0] wr_data,
  input  logic               rd_en,
  input  logic [AW-1:0]      rd_addr,
  output logic [PIXEL_W-1:0] rd_data
);

  logic [PIXEL_W-1:0] mem [N_PIXELS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
