// tb_xorshift_prng: self-checking testbench for xorshift_prng.
//
// Keeps an independent software model of the xorshift32 recurrence and
// checks rnd_val and rnd_valid after every cycle over 2000 cycles with a
// random enable pattern, including a reseed and a zero-seed reload (which
// must fall back to the default seed). It also checks that the output bytes
// are roughly uniform (mean of the 8-bit values near 127.5).
module tb_xorshift_prng;
  localparam logic [31:0] SEED = 32'h2545_F491;
  logic clk = 0, rst_n = 0, enable = 0, seed_load = 0;
  logic [31:0] seed = '0;
  logic [7:0] rnd_val;
  logic rnd_valid;
  int checks = 0, failures = 0;
  logic [31:0] model;
  longint sum = 0;
  int nsum = 0;

  xorshift_prng #(.DATA_WIDTH(8), .SEED(SEED)) dut (.*);

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = SEED;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 2000; i++) begin
      logic en;
      en = ($urandom_range(3) != 0);
      if (i == 700) begin
        seed_load = 1; seed = 32'hDEAD_BEEF;
        @(negedge clk);
        seed_load = 0; model = 32'hDEAD_BEEF;
        check("valid after reseed", rnd_valid == 0);
      end
      if (i == 1400) begin
        seed_load = 1; seed = 32'h0;
        @(negedge clk);
        seed_load = 0; model = SEED;
        check("zero seed replaced", rnd_val == SEED[7:0]);
      end
      enable = en;
      @(negedge clk);
      if (en) model = step(model);
      check("rnd_valid", rnd_valid == en);
      check("rnd_val", rnd_val == model[7:0]);
      if (en) begin sum += rnd_val; nsum++; end
    end
    check("mean of outputs", (sum / nsum) > 115 && (sum / nsum) < 140);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
