// lif_neuron: one leaky integrate-and-fire neuron core.
//
// The membrane potential V lives in the accumulator register and follows the
// Euler-discretised LIF equation with V_rest = 0 and beta = 2^-n:
//     V[t] = V[t-1] - (V[t-1] >>> n) + sum_i W_i * S_i[t]
// The controller splits one timestep into commands (snn_pkg::neuron_op_e):
//   OP_LEAK  : the accumulator takes V - (V >>> n) (shift by the decay register)
//   OP_INT   : the adder adds the weight when the input spike is 1 (spike AND
//              weight register), so no multiplier is needed
//   OP_FIRE  : the comparator result (V >= threshold register) is captured in
//              comp-reg, which is the `result` output spike; comp-reg is ORed
//              with the clear command and resets the accumulator to V_rest in
//              the following cycle
//   OP_CLEAR : V <= V_rest at the start of an inference
// All adds saturate at the limits of the V_W-bit signed accumulator.
//
// Timing: en, op, spike and weight are captured in input registers (the
// weight register) on each clock edge, and the accumulator updates on the next
// edge, so a command given in cycle k changes V after the edge ending cycle
// k+1; for OP_FIRE, `result` is high during cycle k+2 and V is back at V_rest
// from cycle k+3. With en low the neuron ignores LEAK, INT and FIRE (active
// pruning gates it off); OP_CLEAR and the fire reset act regardless of en.
//
// Following the block diagram, the leak path (decay factor applied to the
// stored potential) and the stored potential itself feed a multiplexer whose
// output is one adder operand and spike AND weight is the other. The diagram's
// store-reg and multi-reg are folded into the accumulator so that a spike can
// be integrated every cycle; the saturation, the widths and the loadable
// threshold/decay registers (cfg_we) are this design's choices.
module lif_neuron #(
  parameter int unsigned WEIGHT_W    = snn_pkg::WEIGHT_W,
  parameter int unsigned V_W         = snn_pkg::V_W,
  parameter int unsigned SHIFT_W     = snn_pkg::SHIFT_W,
  parameter int signed   V_TH        = snn_pkg::V_TH,
  parameter int unsigned DECAY_SHIFT = snn_pkg::DECAY_SHIFT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  snn_pkg::neuron_op_e                 op,
  input  logic                       spike,
  input  logic signed [WEIGHT_W-1:0] weight,
  input  logic                       cfg_we,
  input  logic signed [V_W-1:0]      cfg_threshold,
  input  logic [SHIFT_W-1:0]         cfg_decay,
  output logic                       result,
  output logic signed [V_W-1:0]      v_mem
);

  localparam logic signed [V_W:0] V_MAX = (V_W+1)'((2 ** (V_W - 1)) - 1);
  localparam logic signed [V_W:0] V_MIN = -(V_W+1)'(2 ** (V_W - 1));

  // input (weight) registers
  logic                       en_q, spike_q;
  snn_pkg::neuron_op_e        op_q;
  logic signed [WEIGHT_W-1:0] weight_q;
  // configuration registers
  logic signed [V_W-1:0]      threshold_q;
  logic [SHIFT_W-1:0]         decay_q;
  // datapath
  logic signed [V_W-1:0]      acc_q, store, decayed, multi;
  logic signed [V_W:0]        sum;
  logic signed [V_W-1:0]      addend;
  logic                       comp_q, fire_now, acc_rst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q     <= 1'b0;
      op_q     <= snn_pkg::OP_NOP;
      spike_q  <= 1'b0;
      weight_q <= '0;
    end else begin
      en_q     <= en;
      op_q     <= op;
      spike_q  <= spike;
      weight_q <= weight;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threshold_q <= V_W'(V_TH);
      decay_q     <= SHIFT_W'(DECAY_SHIFT);
    end else if (cfg_we) begin
      threshold_q <= cfg_threshold;
      decay_q     <= cfg_decay;
    end
  end

  always_comb begin
    store   = acc_q;
    decayed = acc_q - (acc_q >>> decay_q);
    multi   = (en_q && op_q == snn_pkg::OP_LEAK) ? decayed : store;
    addend  = (en_q && op_q == snn_pkg::OP_INT && spike_q) ? V_W'(weight_q) : '0;
    sum     = (V_W+1)'(multi) + (V_W+1)'(addend);
  end

  assign fire_now = en_q && (op_q == snn_pkg::OP_FIRE) && (acc_q >= threshold_q);
  assign acc_rst  = comp_q || (op_q == snn_pkg::OP_CLEAR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= V_W'(snn_pkg::V_REST);
      comp_q <= 1'b0;
    end else begin
      comp_q <= fire_now;
      if (acc_rst)            acc_q <= V_W'(snn_pkg::V_REST);
      else if (sum > V_MAX)   acc_q <= V_MAX[V_W-1:0];
      else if (sum < V_MIN)   acc_q <= V_MIN[V_W-1:0];
      else                    acc_q <= sum[V_W-1:0];
    end
  end

  assign result = comp_q;
  assign v_mem  = acc_q;

endmodule
