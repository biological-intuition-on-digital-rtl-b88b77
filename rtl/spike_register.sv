// spike_register: collects the output spikes of the LIF neuron array.
//
// On `capture` the register stores the fire results of all neurons for the
// current timestep (spike_out, the layer's output spike vector) and ORs them
// into the sticky `fired` vector, which records every neuron that has fired
// since the last `clear`. `fired` is the feedback path to the layer
// controller, which uses it to gate off neurons that have already fired
// (active pruning). Both outputs change one cycle after capture/clear; clear
// wins over capture. The sticky vector and the clear/capture strobes are this
// design's choices.
module spike_register #(
  parameter int unsigned N_NEURONS = snn_pkg::N_NEURONS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 capture,
  input  logic [N_NEURONS-1:0] spikes_in,
  output logic [N_NEURONS-1:0] spike_out,
  output logic [N_NEURONS-1:0] fired
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike_out <= '0;
      fired     <= '0;
    end else if (clear) begin
      spike_out <= '0;
      fired     <= '0;
    end else if (capture) begin
      spike_out <= spikes_in;
      fired     <= fired | spikes_in;
    end
  end

endmodule
