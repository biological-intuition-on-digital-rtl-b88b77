// tb_layer_controller: self-checking testbench for layer_controller with a
// small layer (16 inputs, 4 neurons). The spike feedback is modelled in the
// testbench: in each timestep a scripted set of neurons "fires" when the
// controller captures, but only if the controller still enables them. Checks:
// one CLEAR per inference, one LEAK and one FIRE per timestep, pixel
// addresses 0..N-1 in order, the timestep length of N+8 cycles, the total
// latency S*(N+8)+2 from start to done, that fired neurons are never
// enabled again (active pruning), the first-to-fire class with the
// lowest-index tie rule, early_stop, and an inference in which no neuron fires.
// A second instance with LEAK_WINDOW = 5 checks that a leak starts every
// integration window only after the previous window has left the pipeline,
// and the resulting timestep length.
module tb_layer_controller;
  import snn_pkg::*;
  localparam int NI = 16, NN = 4, TS = NI + 8;
  logic clk = 0, rst_n = 0, start = 0, early_stop = 0;
  logic [7:0] num_steps = 8'd5;
  logic [NN-1:0] spike_now, fired;
  logic [NN-1:0] neuron_en;
  neuron_op_e neuron_op;
  logic enc_enable, sr_clear, sr_capture, busy, done, class_valid;
  logic [3:0] pix_addr;
  logic [1:0] class_id;
  logic [7:0] timestep, decided_step;
  int checks = 0, failures = 0;
  logic [NN-1:0] script [8];
  int n_pruned = 0, n_early = 0;

  layer_controller #(.N_INPUTS(NI), .N_NEURONS(NN)) dut (.*);

  // second instance: leak after every LW pixels (windows 5, 5, 5, 1)
  localparam int LW = 5, NWIN = 4, TS2 = NI + NWIN * 4 + 4;
  logic start2 = 0;
  logic [NN-1:0] en2;
  neuron_op_e op2;
  logic enc2, clr2, cap2, busy2, done2, cv2;
  logic [3:0] pix2;
  logic [1:0] cls2;
  logic [7:0] ts2, ds2;
  layer_controller #(.N_INPUTS(NI), .N_NEURONS(NN), .LEAK_WINDOW(LW)) dut2 (
    .clk, .rst_n, .start(start2), .early_stop(1'b0), .num_steps(8'd3),
    .spike_now('0), .fired('0), .neuron_en(en2), .neuron_op(op2),
    .enc_enable(enc2), .pix_addr(pix2), .sr_clear(clr2), .sr_capture(cap2),
    .busy(busy2), .done(done2), .class_valid(cv2), .class_id(cls2),
    .timestep(ts2), .decided_step(ds2)
  );

  always #5 clk = ~clk;

  // feedback model of the spike register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike_now <= '0; fired <= '0;
    end else if (sr_clear) begin
      spike_now <= '0; fired <= '0;
    end else if (sr_capture) begin
      spike_now <= script[timestep] & neuron_en;
      fired     <= fired | (script[timestep] & neuron_en);
    end
  end

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // run one inference, watching the command stream
  task automatic run(int steps, bit es, int exp_steps, bit exp_valid, int exp_class, int exp_dec);
    int cyc, n_clear, n_leak, n_fire, n_pix, last_leak;
    bit order_ok, len_ok;
    num_steps = 8'(steps); early_stop = es;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; n_clear = 0; n_leak = 0; n_fire = 0; n_pix = 0; last_leak = -1;
    order_ok = 1; len_ok = 1;
    while (!done && cyc < 10000) begin
      if (neuron_op == OP_CLEAR) n_clear++;
      if (neuron_op == OP_LEAK) begin
        if (last_leak >= 0 && cyc - last_leak != TS) len_ok = 0;
        last_leak = cyc; n_leak++;
      end
      if (neuron_op == OP_FIRE) n_fire++;
      if (enc_enable) begin
        if (int'(pix_addr) != n_pix % NI) order_ok = 0;
        n_pix++;
      end
      if (busy && fired != 0 && (neuron_en & ~fired) != 0) n_pruned++;
      check("pruned neuron stays off", (neuron_en & fired) == 0);
      @(negedge clk);
      cyc++;
    end
    check("done reached", done == 1);
    check($sformatf("latency %0d", cyc), cyc == exp_steps * TS + 2);
    check("one clear", n_clear == 1);
    check("leaks per step", n_leak == exp_steps);
    check("fires per step", n_fire == exp_steps);
    check("pixels per step", n_pix == exp_steps * NI);
    check("pixel order", order_ok);
    check("timestep length", len_ok);
    check("class_valid", class_valid == exp_valid);
    if (exp_valid) begin
      check($sformatf("class %0d", class_id), int'(class_id) == exp_class);
      check("decided step", int'(decided_step) == exp_dec);
    end
    if (es && exp_steps < steps) n_early++;
    @(negedge clk);
    check("done is a pulse", done == 0 && busy == 0);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (script[i]) script[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // A: neurons 2 and 3 fire in step 1 (tie -> 2); neuron 0 in step 3;
    //    neuron 2 again in step 4 must be suppressed by pruning
    script[1] = 4'b1100; script[3] = 4'b0001; script[4] = 4'b0100;
    run(5, 0, 5, 1, 2, 1);
    check("fired vector after A", fired == 4'b1101);
    // B: early stop at the deciding step
    foreach (script[i]) script[i] = '0;
    script[2] = 4'b0010; script[4] = 4'b0001;
    run(6, 1, 3, 1, 1, 2);
    check("fired vector after B", fired == 4'b0010);
    // C: nothing fires
    foreach (script[i]) script[i] = '0;
    run(3, 1, 3, 0, 0, 0);
    // D: windowed leak on the second instance
    begin
      int cyc, n_leak, n_pix, since_pix, n_win_ok;
      @(negedge clk);
      start2 = 1;
      @(negedge clk);
      start2 = 0;
      cyc = 1; n_leak = 0; n_pix = 0; since_pix = 99; n_win_ok = 1;
      while (!done2 && cyc < 10000) begin
        if (op2 == OP_LEAK) begin
          n_leak++;
          // a leak comes at a window boundary, after the pipeline drained
          if ((n_pix % NI) % LW != 0 || since_pix < 3) n_win_ok = 0;
        end
        if (enc2) begin
          if (int'(pix2) != n_pix % NI) n_win_ok = 0;
          n_pix++; since_pix = 0;
        end else since_pix++;
        @(negedge clk);
        cyc++;
      end
      check("windowed: leaks", n_leak == 3 * NWIN);
      check("windowed: pixels", n_pix == 3 * NI);
      check("windowed: leak placement", n_win_ok);
      check($sformatf("windowed: latency %0d", cyc), cyc == 3 * TS2 + 2);
    end
    check("pruning happened", n_pruned > 0);
    check("early stop happened", n_early > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
