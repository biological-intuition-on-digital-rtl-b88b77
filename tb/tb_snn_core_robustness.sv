// tb_snn_core_robustness: runs snn_core (default parameters) on perturbed
// versions of the synthetic ten-class images of tb_snn_core: unchanged,
// rotated by 15 degrees about the image centre (nearest-neighbour), shifted
// right by 6 pixels (about 20 % of the width), with additive noise (sum of
// four uniform values, standard deviation about 46, clamped to 0..255), and
// with a 10 x 10 square in the centre blacked out. These are the four kinds
// of disturbance of a robustness study on this kind of core, applied to a
// synthetic task because no trained weights or dataset are at hand.
//
// Every inference is checked against the same independent model as in
// tb_snn_core (spikes and membrane potentials after every timestep, class,
// decision step, latency). The accuracy of each perturbation is printed;
// only the undisturbed images are required to be classified correctly,
// since the others depend on the synthetic weights.
module tb_snn_core_robustness;
  localparam int NI = 784, NN = 10, TS = NI + 8;
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

  snn_core dut (.*);

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

  // clean image of class c
  function automatic int clean_px(int c, int r, int k);
    if (r < 0 || r > 27 || k < 0 || k > 27) return 0;
    if (cls_of(r * 28 + k) == c) return 170 + $urandom_range(60);
    return $urandom_range(40);
  endfunction

  // kind: 0 none, 1 rotation 15 deg, 2 shift 6 px, 3 noise, 4 occlusion
  task automatic load_image(int c, int kind);
    real ang, cs, sn, dr, dk;
    int v, sr, sk;
    ang = 15.0 * 3.14159265358979 / 180.0;
    cs = $cos(ang); sn = $sin(ang);
    for (int p = 0; p < NI; p++) begin
      int r, k;
      r = p / 28; k = p % 28;
      case (kind)
        1: begin
          dr = real'(r) - 13.5; dk = real'(k) - 13.5;
          sr = int'($floor(cs * dr + sn * dk + 13.5 + 0.5));
          sk = int'($floor(-sn * dr + cs * dk + 13.5 + 0.5));
          v = clean_px(c, sr, sk);
        end
        2: v = clean_px(c, r, k - 6);
        3: begin
          v = clean_px(c, r, k) + $urandom_range(80) + $urandom_range(80)
              + $urandom_range(80) + $urandom_range(80) - 160;
          if (v < 0) v = 0;
          if (v > 255) v = 255;
        end
        4: v = (r >= 9 && r < 19 && k >= 9 && k < 19) ? 0 : clean_px(c, r, k);
        default: v = clean_px(c, r, k);
      endcase
      m_img[p] = v;
      img_we = 1; img_addr = 10'(p); img_data = 8'(v);
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
      for (int j = 0; j < NN; j++)
        if (!m_fired[j]) begin
          if (m_v[j] != 0) n_leak++;
          m_v[j] = m_v[j] - (m_v[j] >>> m_dec);
        end
      for (int p = 0; p < NI; p++) begin
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
    repeat (2000000) @(posedge clk);
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
    for (int kind = 0; kind < 5; kind++) begin
      string names [5] = '{"none", "rotation 15 deg", "shift 6 px", "noise", "occlusion 10x10"};
      n_correct = 0;
      for (int c = 0; c < NN; c++) begin
        load_image(c, kind);
        infer(20, 1, c);
      end
      $display("perturbation %-16s accuracy %0d / %0d", names[kind], n_correct, NN);
      if (kind == 0) check("undisturbed images classified", n_correct == NN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
