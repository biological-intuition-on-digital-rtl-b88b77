// layer_controller: global controller of the LIF neuron array.
//
// One inference runs up to `num_steps` timesteps. The pixels of a timestep are
// split into integration windows of LEAK_WINDOW pixels, and every window
// starts with a leak. Each timestep is a fixed sequence of phases, driven by
// an FSM:
//   LEAK    1 cycle         every enabled neuron applies V <= V - (V >>> n)
//   INT     LEAK_WINDOW cycles (fewer for a last, partial window): pixel p is
//                           read from the image buffer and Poisson-encoded; its
//                           spike reaches all neurons in parallel together
//                           with their weights
//   DRAIN   DRAIN_CYCLES    the encoder/weight pipeline empties; then LEAK for
//                           the next window, or FIRE after the last one
//   FIRE    1 cycle         every enabled neuron compares V with its threshold
//   WAIT    1 cycle         fire results travel to the neurons' comp-reg
//   CAPTURE 1 cycle         the spike register stores this timestep's spikes
//   SAMPLE  1 cycle         the controller reads the spike register back
// With W = ceil(N_INPUTS / LEAK_WINDOW) windows a timestep takes
// N_INPUTS + W * (DRAIN_CYCLES + 1) + 4 cycles. The default LEAK_WINDOW =
// N_INPUTS gives one leak per timestep, as in the LIF equation, and 792 cycles
// per timestep; LEAK_WINDOW = 28 leaks after every image row instead. An
// inference starts with one CLEAR cycle that resets every membrane and the
// spike register.
//
// Active pruning: neuron_en[j] is high only while an inference is running and
// neuron j has not fired yet in it; the sticky `fired` vector fed back from the
// spike register gates the neuron off for the rest of the inference.
// Classification: the class is the neuron that fires first; if several fire in
// the same timestep, the lowest index wins. With `early_stop` set the
// inference ends in the timestep that produced the class (the chip can go idle
// early); otherwise it runs all `num_steps` timesteps. `done` pulses for one
// cycle at the end; class_valid low at that point means no neuron fired.
//
// Following the description of the layer, the controller owns the enables and
// the pruning mask, regulates the neurons from the spike feedback, and
// triggers the leak at the end of an integration window. The phase order, the
// cycle counts, the first-to-fire decision rule, the tie rule and early_stop
// are this design's choices.
module layer_controller #(
  parameter int unsigned N_INPUTS     = snn_pkg::N_INPUTS,
  parameter int unsigned N_NEURONS    = snn_pkg::N_NEURONS,
  parameter int unsigned STEP_W       = snn_pkg::STEP_W,
  parameter int unsigned DRAIN_CYCLES = 3,
  parameter int unsigned LEAK_WINDOW  = N_INPUTS,
  localparam int unsigned AW = (N_INPUTS > 1) ? $clog2(N_INPUTS) : 1,
  localparam int unsigned CW = (N_NEURONS > 1) ? $clog2(N_NEURONS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 early_stop,
  input  logic [STEP_W-1:0]    num_steps,
  // feedback from the spike register
  input  logic [N_NEURONS-1:0] spike_now,
  input  logic [N_NEURONS-1:0] fired,
  // to the neuron array
  output logic [N_NEURONS-1:0] neuron_en,
  output snn_pkg::neuron_op_e  neuron_op,
  // to the encoder, image buffer and weight memory
  output logic                 enc_enable,
  output logic [AW-1:0]        pix_addr,
  // to the spike register
  output logic                 sr_clear,
  output logic                 sr_capture,
  // status
  output logic                 busy,
  output logic                 done,
  output logic                 class_valid,
  output logic [CW-1:0]        class_id,
  output logic [STEP_W-1:0]    timestep,
  output logic [STEP_W-1:0]    decided_step
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_LEAK, S_INT, S_DRAIN, S_FIRE, S_WAIT, S_CAPTURE, S_SAMPLE
  } state_e;

  localparam int unsigned DW = (DRAIN_CYCLES > 1) ? $clog2(DRAIN_CYCLES + 1) : 1;

  state_e            state_q;
  logic [AW-1:0]     pix_q;
  logic [AW-1:0]     win_q;
  logic              last_win_q;
  logic [DW-1:0]     drain_q;
  logic [STEP_W-1:0] step_q;
  logic              last_step, stop_now, decide;
  logic [CW-1:0]     first_idx;

  if (LEAK_WINDOW == 0 || LEAK_WINDOW > N_INPUTS || DRAIN_CYCLES == 0) begin : g_bad_params
    $error("layer_controller: need 0 < LEAK_WINDOW <= N_INPUTS and DRAIN_CYCLES > 0");
  end

  // lowest index among this timestep's spikes
  always_comb begin
    first_idx = '0;
    for (int j = N_NEURONS - 1; j >= 0; j--) begin
      if (spike_now[j]) first_idx = CW'(j);
    end
  end

  assign decide    = !class_valid && (spike_now != '0);
  assign last_step = (32'(step_q) + 1 >= 32'(num_steps));
  assign stop_now  = last_step || (early_stop && (class_valid || decide));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      pix_q        <= '0;
      win_q        <= '0;
      last_win_q   <= 1'b0;
      drain_q      <= '0;
      step_q       <= '0;
      done         <= 1'b0;
      class_valid  <= 1'b0;
      class_id     <= '0;
      decided_step <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q      <= S_CLEAR;
          step_q       <= '0;
          class_valid  <= 1'b0;
          class_id     <= '0;
          decided_step <= '0;
        end
        S_CLEAR: begin
          state_q <= S_LEAK;
          pix_q   <= '0;
        end
        S_LEAK: begin
          state_q <= S_INT;
          win_q   <= '0;
        end
        S_INT: begin
          if (32'(pix_q) == N_INPUTS - 1 || 32'(win_q) == LEAK_WINDOW - 1) begin
            state_q    <= S_DRAIN;
            drain_q    <= '0;
            last_win_q <= (32'(pix_q) == N_INPUTS - 1);
          end
          pix_q <= pix_q + 1'b1;
          win_q <= win_q + 1'b1;
        end
        S_DRAIN: begin
          if (32'(drain_q) == DRAIN_CYCLES - 1) state_q <= last_win_q ? S_FIRE : S_LEAK;
          drain_q <= drain_q + 1'b1;
        end
        S_FIRE:    state_q <= S_WAIT;
        S_WAIT:    state_q <= S_CAPTURE;
        S_CAPTURE: state_q <= S_SAMPLE;
        S_SAMPLE: begin
          if (decide) begin
            class_valid  <= 1'b1;
            class_id     <= first_idx;
            decided_step <= step_q;
          end
          if (stop_now) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_LEAK;
            pix_q   <= '0;
            step_q  <= step_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (state_q)
      S_CLEAR: neuron_op = snn_pkg::OP_CLEAR;
      S_LEAK:  neuron_op = snn_pkg::OP_LEAK;
      S_FIRE:  neuron_op = snn_pkg::OP_FIRE;
      default: neuron_op = snn_pkg::OP_NOP;
    endcase
  end

  assign busy       = (state_q != S_IDLE);
  assign neuron_en  = busy ? ~fired : '0;
  assign enc_enable = (state_q == S_INT);
  assign pix_addr   = pix_q;
  assign sr_clear   = (state_q == S_IDLE) && start;
  assign sr_capture = (state_q == S_CAPTURE);
  assign timestep   = step_q;

  // a neuron that has fired stays gated off (active pruning)
  a_pruned_stays_off: assert property (@(posedge clk) disable iff (!rst_n)
    (neuron_en & fired) == '0);

endmodule
