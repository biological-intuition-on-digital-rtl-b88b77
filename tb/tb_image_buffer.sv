// tb_image_buffer: self-checking testbench for image_buffer at its full size
// (784 x 8-bit). Writes a pattern computed from the address, reads it back in
// raster and in random order, and checks the one-cycle read latency and that
// rd_data holds while rd_en is low.
module tb_image_buffer;
  localparam int NP = 784;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  logic [7:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  image_buffer dut (.*);

  always #5 clk = ~clk;

  function automatic logic [7:0] pval(int i);
    return 8'((i * 29 + 3) ^ (i >> 3));
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
    for (int i = 0; i < NP; i++) begin
      wr_en = 1; wr_addr = 10'(i); wr_data = pval(i);
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < NP; i++) begin
      rd_en = 1; rd_addr = 10'(i);
      @(negedge clk);
      check($sformatf("pixel %0d", i), rd_data == pval(i));
    end
    for (int k = 0; k < 500; k++) begin
      int a;
      a = $urandom_range(NP - 1);
      rd_en = 1; rd_addr = 10'(a);
      @(negedge clk);
      check("random read", rd_data == pval(a));
    end
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(NP - 1);
      rd_en = 1; rd_addr = 10'(a);
      @(negedge clk);
      repeat (3) begin
        rd_en = 0; rd_addr = 10'($urandom_range(NP - 1));
        @(negedge clk);
        check("hold without rd_en", rd_data == pval(a) || rd_addr == 10'(a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
