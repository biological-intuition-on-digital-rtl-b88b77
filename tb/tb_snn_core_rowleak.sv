// tb_snn_core_rowleak: end-to-end, self-checking testbench of snn_core with
// the leak applied after every image row (LEAK_WINDOW = 28) instead of once
// per timestep; all other parameters are at their defaults.
//
// It is the same synthetic ten-class workload and the same independent
// model as tb_snn_core, with the model leaking every membrane at the start of
// each 28-pixel window. Per timestep it compares the spike vector and all
// membrane potentials; at the end the class, the decision step and the
// latency of timesteps * 900 + 2 cycles (784 pixels + 28 windows x 4 cycles +
// 4). The decay shift is set to 6 through the configuration port, since
// the leak now acts 28 times per timestep. It runs four classes over 20 timesteps, one early-stop inference, one
// with a different threshold and decay, and a black image, and it counts
// every mechanism as tb_snn_core does.
module tb_snn_core_rowleak;
  localparam int NI = 784, NN = 10, LW = 28, TS = NI + (NI / LW) * 4 + 4;
  localparam int W_POS = 2, W_NEG = 1;
  localparam logic [31:0] TB_SEED = 32'h0BAD_5EED;

  logic clk = 0, rst_n = 0;
  logic img_we = 0, w_we = 0, cfg_we = 0, seed_load = 0, start = 0, early_stop = 0;
  logic [9:0] img_addr = '0, w_addr = '0;
  logic [7:0] img_data = '0;
  logic [3:0] w_neuron = '0;
  logic signed [8:0] w_data = '0;
  logic signed [15:0] cfg_threshold = 16'sd128;
  logic [3:0] cfg_decay = 4'd3;
  logic [31:0] seed = '0;
  logic [7:0] num_steps = 8'd20;
  logic busy, done, class_valid;
  logic [3:0] class_id;
  logic [7:0] timestep, decided_step;
  logic [NN-1:0] spike_out, fired;
  logic signed [15:0] v_mem [NN];

  int checks = 0, failures = 0;
  int n_leak = 0, n_int = 0, n_fire = 0, n_pruned = 0, n_early = 0, n_cfg = 0, n_nodec = 0;
  int n_correct = 0;

  // model state
  logic [31:0] m_x;
  int m_img [NI];
  int m_w [NI][NN];
  int m_v [NN];
  bit m_fired [NN];
  int m_th = 128, m_dec = 3;

  snn_core #(.LEAK_WINDOW(LW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int cls_of(int p);
    int r, c;
    r = p / 28; c = p % 28;
    return ((r / 4) * 7 + (c / 4)) % 10;
  endfunction

  function automatic logic [31:0] xs(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  task automatic load_weights();
    for (int p = 0; p < NI; p++)
      for (int j = 0; j < NN; j++) begin
        m_w[p][j] = (cls_of(p) == j) ? W_POS : -W_NEG;
        w_we = 1; w_addr = 10'(p); w_neuron = 4'(j); w_data = 9'(m_w[p][j]);
        @(negedge clk);
      end
    w_we = 0;
  endtask

  task automatic load_image(int c, bit black);
    for (int p = 0; p < NI; p++) begin
      if (black) m_img[p] = 0;
      else if (cls_of(p) == c) m_img[p] = 170 + $urandom_range(60);
      else m_img[p] = $urandom_range(40);
      img_we = 1; img_addr = 10'(p); img_data = 8'(m_img[p]);
      @(negedge clk);
    end
    img_we = 0;
  endtask

  // one inference on hardware and model together
  task automatic infer(int steps, bit es, int label);
    int cyc, t, m_class, m_dstep, m_steps;
    bit m_spk [NN];
    bit any, m_stop;
    num_steps = 8'(steps); early_stop = es;
    foreach (m_v[j]) begin m_v[j] = 0; m_fired[j] = 0; end
    m_class = -1; m_dstep = 0; m_steps = 0; m_stop = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    for (t = 0; t < steps && !m_stop; t++) begin
      // model one timestep
      for (int p = 0; p < NI; p++) begin
        if (p % LW == 0)
          for (int j = 0; j < NN; j++)
            if (!m_fired[j]) begin
              if (m_v[j] != 0) n_leak++;
              m_v[j] = m_v[j] - (m_v[j] >>> m_dec);
            end
        m_x = xs(m_x);
        if (int'(m_x[7:0]) < m_img[p]) begin
          n_int++;
          for (int j = 0; j < NN; j++)
            if (!m_fired[j]) begin
              m_v[j] += m_w[p][j];
              if (m_v[j] > 32767) m_v[j] = 32767;
              if (m_v[j] < -32768) m_v[j] = -32768;
            end
        end
      end
      any = 0;
      for (int j = 0; j < NN; j++) begin
        m_spk[j] = !m_fired[j] && m_v[j] >= m_th;
        if (m_spk[j]) begin m_v[j] = 0; any = 1; n_fire++; end
      end
      if (any && m_class < 0) begin
        for (int j = NN - 1; j >= 0; j--) if (m_spk[j]) m_class = j;
        m_dstep = t;
      end
      for (int j = 0; j < NN; j++) m_fired[j] |= m_spk[j];
      m_steps++;
      if (es && m_class >= 0) m_stop = 1;
      // wait for the hardware to finish the timestep
      while (!(done || (busy && int'(timestep) == t + 1)) && cyc < 40000) begin
        @(negedge clk);
        cyc++;
        if (busy && fired != 0 && fired != '1 && timestep == 8'(t)) n_pruned++;
      end
      for (int j = 0; j < NN; j++) begin
        check($sformatf("t=%0d spike %0d", t, j), spike_out[j] == m_spk[j]);
        check($sformatf("t=%0d v_mem %0d: %0d vs %0d", t, j, v_mem[j], m_v[j]),
              int'(v_mem[j]) == m_v[j]);
      end
    end
    check("done at model end", done == 1);
    check($sformatf("latency %0d cycles", cyc), cyc == m_steps * TS + 2);
    check("class_valid", class_valid == (m_class >= 0));
    if (m_class >= 0) begin
      check($sformatf("class %0d vs %0d", class_id, m_class), int'(class_id) == m_class);
      check("decided step", int'(decided_step) == m_dstep);
      if (int'(class_id) == label) n_correct++;
    end else n_nodec++;
    if (es && m_steps < steps) n_early++;
    $display("label %0d: class %0d valid %0d step %0d, %0d timesteps, %0d cycles",
             label, class_id, class_valid, decided_step, m_steps, cyc);
    @(negedge clk);
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    seed_load = 1; seed = TB_SEED;
    @(negedge clk);
    seed_load = 0; m_x = TB_SEED;
    load_weights();
    // a leak per row needs a smaller beta: 2^-6 per row is about 2^-2.2 per image
    cfg_we = 1; cfg_threshold = 16'sd128; cfg_decay = 4'd6;
    @(negedge clk);
    cfg_we = 0; m_th = 128; m_dec = 6;
    for (int c = 0; c < 4; c++) begin
      load_image(c, 0);
      infer(20, 0, c);
    end
    check("synthetic digits classified", n_correct == 4);
    // early stop
    load_image(7, 0);
    infer(20, 1, 7);
    // raised threshold and slower leak through the configuration port
    cfg_we = 1; cfg_threshold = 16'sd200; cfg_decay = 4'd5;
    @(negedge clk);
    cfg_we = 0; m_th = 200; m_dec = 5; n_cfg++;
    load_image(3, 0);
    infer(10, 1, 3);
    // black image: no input spikes, nothing fires
    load_image(0, 1);
    infer(4, 0, -1);
    $display("mechanisms: leak=%0d integrate=%0d fire=%0d pruned=%0d early=%0d cfg=%0d nodecision=%0d",
             n_leak, n_int, n_fire, n_pruned, n_early, n_cfg, n_nodec);
    check("leak happened", n_leak > 0);
    check("integration happened", n_int > 0);
    check("fire happened", n_fire > 0);
    check("pruning happened", n_pruned > 0);
    check("early stop happened", n_early > 0);
    check("config write happened", n_cfg > 0);
    check("no-decision inference happened", n_nodec > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
