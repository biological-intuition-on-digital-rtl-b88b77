// snn_core: Poisson-encoded spiking neural network layer for static image
// classification (top level).
//
// A fully connected layer of N_NEURONS leaky integrate-and-fire neurons (10,
// one per digit class) reads a static N_INPUTS-pixel image (28 x 28, 8-bit).
// In every timestep each pixel is turned into a spike by the Poisson encoder
// (spike when intensity > 8-bit xorshift random value), and that spike is
// broadcast to all neurons, each of which adds its own 9-bit signed weight for
// the pixel when the spike is 1. At the end of the timestep every neuron
// compares its membrane with the threshold and fires; the spike register
// collects the spikes, and its sticky `fired` vector is fed back to the layer
// controller, which gates fired neurons off (active pruning). The first neuron
// to fire is the predicted class.
//
// Usage: write the image (img_we/img_addr/img_data) and the weights
// (w_we/w_addr/w_neuron/w_data), optionally set threshold and decay shift of
// all neurons (cfg_we) and reseed the PRNG (seed_load), then pulse `start`.
// `busy` is high during the inference, `done` pulses at its end, class_valid
// and class_id give the decision and decided_step the timestep it was made in.
// spike_out is the spike vector of the latest timestep; v_mem exposes every
// membrane potential. A timestep takes N_INPUTS + 8 cycles (792 by default)
// when it is one integration window; LEAK_WINDOW < N_INPUTS (for example 28,
// one image row) adds a leak, and 4 cycles, after every window. See
// layer_controller for the phases.
//
// Pipeline for pixel p issued in cycle k: image read and PRNG step in k, pixel
// and random value meet in the comparator in k+1, the spike and the weight row
// (read with the address delayed by one cycle) reach the neurons in k+2, and
// the neuron's input register takes them at the end of k+2. The neuron command
// is OP_INT whenever the encoder's spike_valid is high, otherwise the
// controller's command.
module snn_core #(
  parameter int unsigned N_INPUTS    = snn_pkg::N_INPUTS,
  parameter int unsigned N_NEURONS   = snn_pkg::N_NEURONS,
  parameter int unsigned PIXEL_W     = snn_pkg::PIXEL_W,
  parameter int unsigned WEIGHT_W    = snn_pkg::WEIGHT_W,
  parameter int unsigned V_W         = snn_pkg::V_W,
  parameter int unsigned SHIFT_W     = snn_pkg::SHIFT_W,
  parameter int signed   V_TH        = snn_pkg::V_TH,
  parameter int unsigned DECAY_SHIFT = snn_pkg::DECAY_SHIFT,
  parameter int unsigned STEP_W      = snn_pkg::STEP_W,
  parameter logic [31:0] SEED        = snn_pkg::PRNG_SEED,
  parameter int unsigned LEAK_WINDOW = snn_pkg::N_INPUTS,
  localparam int unsigned AW = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1,
  localparam int unsigned NW = (N_NEURONS > 1) ? $clog2(N_NEURONS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // image load
  input  logic                       img_we,
  input  logic [AW-1:0]              img_addr,
  input  logic [PIXEL_W-1:0]         img_data,
  // weight load
  input  logic                       w_we,
  input  logic [AW-1:0]              w_addr,
  input  logic [NW-1:0]              w_neuron,
  input  logic signed [WEIGHT_W-1:0] w_data,
  // neuron configuration (broadcast)
  input  logic                       cfg_we,
  input  logic signed [V_W-1:0]      cfg_threshold,
  input  logic [SHIFT_W-1:0]         cfg_decay,
  // PRNG reseed
  input  logic                       seed_load,
  input  logic [31:0]                seed,
  // inference control
  input  logic                       start,
  input  logic                       early_stop,
  input  logic [STEP_W-1:0]          num_steps,
  output logic                       busy,
  output logic                       done,
  output logic                       class_valid,
  output logic [NW-1:0]              class_id,
  output logic [STEP_W-1:0]          timestep,
  output logic [STEP_W-1:0]          decided_step,
  output logic [N_NEURONS-1:0]       spike_out,
  output logic [N_NEURONS-1:0]       fired,
  output logic signed [V_W-1:0]      v_mem [N_NEURONS]
);

  logic [N_NEURONS-1:0]       neuron_en, fire_vec;
  snn_pkg::neuron_op_e        ctrl_op, neuron_op;
  logic                       enc_enable, enc_enable_q;
  logic [AW-1:0]              pix_addr, pix_addr_q;
  logic                       sr_clear, sr_capture;
  logic [PIXEL_W-1:0]         pixel;
  logic                       spike, spike_valid;
  logic signed [WEIGHT_W-1:0] w_row [N_NEURONS];

  layer_controller #(
    .N_INPUTS(N_INPUTS), .N_NEURONS(N_NEURONS), .STEP_W(STEP_W),
    .LEAK_WINDOW(LEAK_WINDOW)
  ) u_ctrl (
    .clk, .rst_n, .start, .early_stop, .num_steps,
    .spike_now(spike_out), .fired,
    .neuron_en, .neuron_op(ctrl_op),
    .enc_enable, .pix_addr,
    .sr_clear, .sr_capture,
    .busy, .done, .class_valid, .class_id, .timestep, .decided_step
  );

  image_buffer #(.N_PIXELS(N_INPUTS), .PIXEL_W(PIXEL_W)) u_img (
    .clk,
    .wr_en(img_we), .wr_addr(img_addr), .wr_data(img_data),
    .rd_en(enc_enable), .rd_addr(pix_addr), .rd_data(pixel)
  );

  poisson_encoder #(.DATA_WIDTH(PIXEL_W), .SEED(SEED)) u_enc (
    .clk, .rst_n, .enable(enc_enable), .seed_load, .seed,
    .a(pixel), .spike_out(spike), .spike_valid
  );

  // the weight row is read one cycle after the pixel so that it meets the spike
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_enable_q <= 1'b0;
      pix_addr_q   <= '0;
    end else begin
      enc_enable_q <= enc_enable;
      pix_addr_q   <= pix_addr;
    end
  end

  weight_mem #(.N_INPUTS(N_INPUTS), .N_NEURONS(N_NEURONS), .WEIGHT_W(WEIGHT_W)) u_wmem (
    .clk,
    .wr_en(w_we), .wr_addr(w_addr), .wr_neuron(w_neuron), .wr_data(w_data),
    .rd_en(enc_enable_q), .rd_addr(pix_addr_q), .rd_data(w_row)
  );

  assign neuron_op = spike_valid ? snn_pkg::OP_INT : ctrl_op;

  for (genvar j = 0; j < N_NEURONS; j++) begin : g_neuron
    lif_neuron #(
      .WEIGHT_W(WEIGHT_W), .V_W(V_W), .SHIFT_W(SHIFT_W),
      .V_TH(V_TH), .DECAY_SHIFT(DECAY_SHIFT)
    ) u_lif (
      .clk, .rst_n,
      .en(neuron_en[j]), .op(neuron_op), .spike, .weight(w_row[j]),
      .cfg_we, .cfg_threshold, .cfg_decay,
      .result(fire_vec[j]), .v_mem(v_mem[j])
    );
  end

  spike_register #(.N_NEURONS(N_NEURONS)) u_spk (
    .clk, .rst_n, .clear(sr_clear), .capture(sr_capture),
    .spikes_in(fire_vec), .spike_out, .fired
  );

  // controller commands never collide with an integrate strobe
  a_no_op_collision: assert property (@(posedge clk) disable iff (!rst_n)
    spike_valid |-> ctrl_op == snn_pkg::OP_NOP);

endmodule
