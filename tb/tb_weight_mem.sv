// tb_weight_mem: self-checking testbench for weight_mem at its full size
// (784 x 10 x 9-bit). Writes every weight with a value computed from its
// position, reads every row back and compares all ten weights, checks the
// one-cycle read latency, that a read without rd_en holds the previous row,
// and that overwriting one weight leaves its neighbours untouched.
module tb_weight_mem;
  localparam int NI = 784, NN = 10;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  logic [3:0] wr_neuron = '0;
  logic signed [8:0] wr_data = '0;
  logic signed [8:0] rd_data [NN];
  int checks = 0, failures = 0;

  weight_mem dut (.*);

  always #5 clk = ~clk;

  function automatic logic signed [8:0] wval(int i, int j);
    return 9'((i * 37 + j * 101 + 11) % 512);
  endfunction

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
    @(negedge clk);
    for (int i = 0; i < NI; i++)
      for (int j = 0; j < NN; j++) begin
        wr_en = 1; wr_addr = 10'(i); wr_neuron = 4'(j); wr_data = wval(i, j);
        @(negedge clk);
      end
    wr_en = 0;
    for (int i = NI - 1; i >= 0; i--) begin
      rd_en = 1; rd_addr = 10'(i);
      @(negedge clk);
      for (int j = 0; j < NN; j++)
        check($sformatf("row %0d neuron %0d", i, j), rd_data[j] == wval(i, j));
    end
    rd_en = 0; rd_addr = 10'd5;
    @(negedge clk);
    check("hold without rd_en", rd_data[3] == wval(0, 3));
    wr_en = 1; wr_addr = 10'd5; wr_neuron = 4'd4; wr_data = -9'sd7;
    @(negedge clk);
    wr_en = 0; rd_en = 1;
    @(negedge clk);
    check("overwritten weight", rd_data[4] == -9'sd7);
    check("neighbour 3 intact", rd_data[3] == wval(5, 3));
    check("neighbour 5 intact", rd_data[5] == wval(5, 5));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
