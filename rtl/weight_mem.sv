// weight_mem: on-chip synaptic weight memory of the fully connected layer.
//
// Holds one signed WEIGHT_W-bit weight for every (input, neuron) pair,
// N_INPUTS x N_NEURONS words: 784 x 10 x 9 bits = 70,560 bits (about 8.6 KB)
// at the default sizes, small enough for on-chip block RAM. The memory is
// organised as one row per input pixel so that a single read returns the
// weights of that pixel for all neurons at once, which the parallel neurons
// consume together.
//
// Write port: one weight per cycle at (wr_addr = input, wr_neuron = neuron).
// Read port: synchronous, rd_data holds row rd_addr one cycle after rd_en.
// The row organisation, the single-weight write port and the one-cycle read
// latency are this design's choices.
module weight_mem #(
  parameter int unsigned N_INPUTS  = snn_pkg::N_INPUTS,
  parameter int unsigned N_NEURONS = snn_pkg::N_NEURONS,
  parameter int unsigned WEIGHT_W  = snn_pkg::WEIGHT_W,
  localparam int unsigned AW = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1,
  localparam int unsigned NW = (N_NEURONS > 1) ? $clog2(N_NEURONS) : 1
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [AW-1:0]              wr_addr,
  input  logic [NW-1:0]              wr_neuron,
  input  logic signed [WEIGHT_W-1:0] wr_data,
  input  logic                       rd_en,
  input  logic [AW-1:0]              rd_addr,
  output logic signed [WEIGHT_W-1:0] rd_data [N_NEURONS]
);

  logic signed [WEIGHT_W-1:0] mem [N_INPUTS][N_NEURONS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_neuron] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
