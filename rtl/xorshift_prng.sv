// xorshift_prng: 32-bit XOR-shift pseudo-random number generator.
//
// Each cycle with `enable` high the 32-bit state advances by one step of
// Marsaglia's xorshift32 recurrence
//     x ^= x << 13;  x ^= x >> 17;  x ^= x << 5;
// and the low DATA_WIDTH bits of the new state appear on `rnd_val` with
// `rnd_valid` high in the cycle after `enable` (one cycle latency). The state
// is never zero as long as the seed is not zero; a zero seed is replaced by
// the default.
//
// The 32-bit XOR-shift generator is the design's stochastic source; the shift
// triple (13, 17, 5), the use of the low bits, the seed and the reload port
// (`seed_load`/`seed`) are this design's choices.
module xorshift_prng #(
  parameter int unsigned DATA_WIDTH = snn_pkg::PIXEL_W,
  parameter logic [31:0] SEED       = snn_pkg::PRNG_SEED
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enable,
  input  logic                  seed_load,
  input  logic [31:0]           seed,
  output logic [DATA_WIDTH-1:0] rnd_val,
  output logic                  rnd_valid
);

  logic [31:0] state_q, x1, x2, x3;

  always_comb begin
    x1 = state_q ^ (state_q << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= SEED;
      rnd_valid <= 1'b0;
    end else if (seed_load) begin
      state_q   <= (seed == '0) ? SEED : seed;
      rnd_valid <= 1'b0;
    end else begin
      if (enable) state_q <= x3;
      rnd_valid <= enable;
    end
  end

  assign rnd_val = state_q[DATA_WIDTH-1:0];

endmodule
