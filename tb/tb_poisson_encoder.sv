// tb_poisson_encoder: self-checking testbench for poisson_encoder.
//
// Drives the encoder with enable pulses and presents the pixel intensity one
// cycle later, as the encoder expects. An independent xorshift32 model gives
// the random value R, and each spike must equal (R < a) two cycles after
// enable, with spike_valid high exactly then. It also checks the rate: over
// 2000 draws per intensity, the spike count must be within a few percent of
// intensity/256 (0, 64, 128, 200 and 255 are tested).
module tb_poisson_encoder;
  localparam logic [31:0] SEED = 32'h1234_5679;
  logic clk = 0, rst_n = 0, enable = 0, seed_load = 0;
  logic [31:0] seed = '0;
  logic [7:0] a = '0;
  logic spike_out, spike_valid;
  int checks = 0, failures = 0;
  logic [31:0] model;

  poisson_encoder #(.DATA_WIDTH(8), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] step(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5;
    return x;
  endfunction

  task automatic check(string what, logic cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int levels [5] = '{0, 64, 128, 200, 255};
    model = SEED;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // exact check, one draw per enable, a random intensity each time
    for (int i = 0; i < 3000; i++) begin
      logic [7:0] pix;
      pix = 8'($urandom);
      enable = 1;
      @(negedge clk);
      enable = 0; a = pix;
      model = step(model);
      check("no early valid", spike_valid == 0);
      @(negedge clk);
      check("spike_valid", spike_valid == 1);
      check("spike value", spike_out == (model[7:0] < pix));
      @(negedge clk);
      check("valid is one cycle", spike_valid == 0 && spike_out == 0);
    end
    // streamed rate check: enable every cycle, a follows one cycle behind
    foreach (levels[l]) begin
      int cnt, exp_cnt, nval;
      cnt = 0; nval = 0;
      fork
        begin
          for (int i = 0; i < 2000; i++) begin
            enable = 1;
            @(negedge clk);
            a = 8'(levels[l]);
          end
          enable = 0;
        end
        begin
          @(negedge clk);
          repeat (2001) begin
            @(negedge clk);
            if (spike_valid) begin nval++; cnt += int'(spike_out); end
          end
        end
      join
      exp_cnt = levels[l] * 2000 / 256;
      check($sformatf("valid count at %0d", levels[l]), nval == 2000);
      check($sformatf("rate at %0d: %0d vs %0d", levels[l], cnt, exp_cnt),
            cnt >= exp_cnt - 80 && cnt <= exp_cnt + 80);
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
