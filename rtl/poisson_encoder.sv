// poisson_encoder: converts a pixel intensity into a stochastic spike.
//
// Built as drawn for the encoder: an XOR-shift PRNG instance (rng_inst), a
// comparator and an output register stage. A cycle with `enable` high asks for
// one random value R; one cycle later R is on rnd_val with rnd_valid, and the
// pixel intensity `a` must be presented in that same cycle. The comparator
// tests R < a (a spike when the intensity exceeds the random value, so an
// intensity I spikes with probability I/256) and the output registers capture
// the result one cycle later:
//     cycle k   : enable = 1
//     cycle k+1 : a valid            (rnd_val, rnd_valid from the PRNG)
//     cycle k+2 : spike_out, spike_valid
// spike_valid is high exactly for the cycles whose spike_out is meaningful;
// spike_out is 0 whenever spike_valid is 0. The alignment of `a` with
// rnd_valid and the seed reload port are this design's choices.
module poisson_encoder #(
  parameter int unsigned DATA_WIDTH = snn_pkg::PIXEL_W,
  parameter logic [31:0] SEED       = snn_pkg::PRNG_SEED
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enable,
  input  logic                  seed_load,
  input  logic [31:0]           seed,
  input  logic [DATA_WIDTH-1:0] a,
  output logic                  spike_out,
  output logic                  spike_valid
);

  logic [DATA_WIDTH-1:0] rnd_val;
  logic                  rnd_valid;
  logic                  cmp_lt;

  xorshift_prng #(.DATA_WIDTH(DATA_WIDTH), .SEED(SEED)) rng_inst (
    .clk, .rst_n, .enable, .seed_load, .seed,
    .rnd_val, .rnd_valid
  );

  assign cmp_lt = (rnd_val < a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike_out   <= 1'b0;
      spike_valid <= 1'b0;
    end else begin
      spike_out   <= rnd_valid & cmp_lt;
      spike_valid <= rnd_valid;
    end
  end

  a_spike_needs_valid: assert property (@(posedge clk) disable iff (!rst_n)
    spike_out |-> spike_valid);

endmodule
