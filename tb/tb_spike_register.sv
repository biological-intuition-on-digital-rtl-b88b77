// tb_spike_register: self-checking testbench for spike_register.
// Random capture/clear traffic over 5000 cycles against a model of the
// per-timestep spike vector and the sticky fired vector; clear must win
// over capture.
module tb_spike_register;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, clear = 0, capture = 0;
  logic [N-1:0] spikes_in = '0, spike_out, fired;
  logic [N-1:0] m_out, m_fired;
  int checks = 0, failures = 0, n_both = 0;

  spike_register dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_out = '0; m_fired = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset", spike_out == 0 && fired == 0);
    for (int i = 0; i < 5000; i++) begin
      clear = ($urandom_range(15) == 0);
      capture = ($urandom_range(2) == 0);
      spikes_in = ($urandom_range(3) == 0) ? N'($urandom) : N'(1 << $urandom_range(N - 1));
      if (clear && capture) n_both++;
      @(negedge clk);
      if (clear) begin m_out = '0; m_fired = '0; end
      else if (capture) begin m_out = spikes_in; m_fired |= spikes_in; end
      check("spike_out", spike_out == m_out);
      check("fired", fired == m_fired);
    end
    check("clear with capture seen", n_both > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
