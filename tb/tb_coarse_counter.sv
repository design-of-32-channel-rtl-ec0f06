// tb_coarse_counter: the 16-bit coarse counter must count every clock from
// zero after reset and wrap after 65,536 clocks (327.68 us at 200 MHz).
module tb_coarse_counter;
  logic        clk = 0, rst;
  logic [15:0] count;
  int checks = 0, failures = 0;

  coarse_counter dut (.clk(clk), .rst(rst), .count(count));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    checks++;
    if (count !== 16'd0) failures++;
    for (int n = 1; n <= 65536 + 100; n++) begin
      @(posedge clk); #1;
      checks++;
      if (count !== 16'(n % 65536)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d count=%0d", n, count);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
