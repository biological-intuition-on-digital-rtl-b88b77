// tb_lif_neuron: self-checking testbench for lif_neuron.
//
// A cycle-level reference model of the neuron (input register stage,
// saturating accumulator, leak V - (V >>> n), fire into comp-reg and reset of
// the accumulator in the following cycle) is stepped next to the DUT and
// v_mem and result are compared after every clock. Stimulus is a mix of
// directed sequences (a hand-worked leak/integrate/fire example, long runs of
// large weights to reach both saturation limits) and 20,000 random cycles of
// commands, spikes, weights, enables and configuration writes. It counts
// fires, leaks, gated (en low) commands and saturations and fails if any of
// them never happened.
module tb_lif_neuron;
  import snn_pkg::*;
  localparam int VW = 16;
  logic clk = 0, rst_n = 0;
  logic en = 0, spike = 0, cfg_we = 0;
  neuron_op_e op = OP_NOP;
  logic signed [8:0] weight = '0;
  logic signed [VW-1:0] cfg_threshold = 16'sd128;
  logic [3:0] cfg_decay = 4'd3;
  logic result;
  logic signed [VW-1:0] v_mem;
  int checks = 0, failures = 0;
  int n_fire = 0, n_leak = 0, n_gated = 0, n_sat = 0;

  // reference model state
  int m_acc, m_th, m_dec;
  bit m_comp, m_en_q, m_spk_q;
  neuron_op_e m_op_q;
  int m_w_q;

  lif_neuron dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // one clock: apply inputs, advance the model, compare
  task automatic cyc(bit e, neuron_op_e o, bit s, int w, bit cw = 0, int th = 0, int dc = 0);
    int sum, nacc;
    bit ncomp;
    en = e; op = o; spike = s; weight = 9'(w);
    cfg_we = cw; cfg_threshold = 16'(th); cfg_decay = 4'(dc);
    @(negedge clk);
    // model of the edge just taken
    ncomp = m_en_q && m_op_q == OP_FIRE && m_acc >= m_th;
    sum = m_acc;
    if (m_en_q && m_op_q == OP_LEAK) sum = m_acc - (m_acc >>> m_dec);
    if (m_en_q && m_op_q == OP_INT && m_spk_q) sum = sum + m_w_q;
    if (m_comp || m_op_q == OP_CLEAR) nacc = 0;
    else if (sum > 32767) begin nacc = 32767; n_sat++; end
    else if (sum < -32768) begin nacc = -32768; n_sat++; end
    else nacc = sum;
    if (ncomp) n_fire++;
    if (m_en_q && m_op_q == OP_LEAK && m_acc != 0) n_leak++;
    if (!m_en_q && m_op_q inside {OP_LEAK, OP_INT, OP_FIRE}) n_gated++;
    m_acc = nacc; m_comp = ncomp;
    m_en_q = e; m_op_q = o; m_spk_q = s; m_w_q = w;
    if (cw) begin m_th = th; m_dec = dc; end
    check("v_mem", int'(v_mem) == m_acc);
    check("result", result == m_comp);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_acc = 0; m_th = 128; m_dec = 3; m_comp = 0;
    m_en_q = 0; m_op_q = OP_NOP; m_spk_q = 0; m_w_q = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // hand-worked example: +100, +60 -> 160; leak 160 - 20 = 140; fire; reset
    cyc(1, OP_CLEAR, 0, 0);
    cyc(1, OP_INT, 1, 100);
    cyc(1, OP_INT, 0, 200);   // no spike: weight ignored
    cyc(1, OP_INT, 1, 60);
    cyc(1, OP_LEAK, 0, 0);
    check("after integrate = 160", int'(v_mem) == 160);
    cyc(1, OP_FIRE, 0, 0);
    check("after leak = 140", int'(v_mem) == 140);
    cyc(1, OP_NOP, 0, 0);
    check("result high two cycles after FIRE", result == 1);
    cyc(1, OP_NOP, 0, 0);
    check("reset to V_rest", int'(v_mem) == 0 && result == 0);
    // below threshold: no fire; negative leak rounds toward -inf
    cyc(1, OP_INT, 1, -100);
    cyc(1, OP_LEAK, 0, 0);
    cyc(1, OP_FIRE, 0, 0);
    check("negative leak -100 -> -87", int'(v_mem) == -87);
    cyc(1, OP_NOP, 0, 0);
    check("no fire below threshold", result == 0);
    cyc(1, OP_CLEAR, 0, 0);
    // saturation at both ends
    repeat (150) cyc(1, OP_INT, 1, 255);
    repeat (300) cyc(1, OP_INT, 1, -256);
    cyc(1, OP_CLEAR, 0, 0);
    cyc(1, OP_NOP, 0, 0);
    // random traffic
    for (int i = 0; i < 20000; i++) begin
      neuron_op_e o;
      int r;
      r = $urandom_range(99);
      o = (r < 60) ? OP_INT : (r < 72) ? OP_LEAK : (r < 85) ? OP_FIRE :
          (r < 87) ? OP_CLEAR : OP_NOP;
      if ($urandom_range(199) == 0)
        cyc($urandom_range(3) != 0, o, $urandom_range(1), $signed(9'($urandom)),
            1, $urandom_range(400) - 50, $urandom_range(6));
      else
        cyc($urandom_range(7) != 0, o, $urandom_range(1), $signed(9'($urandom)));
    end
    check("fires seen", n_fire > 0);
    check("leaks seen", n_leak > 0);
    check("gated commands seen", n_gated > 0);
    check("saturation seen", n_sat > 0);
    $display("fires=%0d leaks=%0d gated=%0d saturations=%0d", n_fire, n_leak, n_gated, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
