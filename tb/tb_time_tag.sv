// tb_time_tag: with the prescaler shortened to DIV = 10 clocks, the tag must
// read floor(n / 10) n clocks after reset. A second instance with the
// default DIV (one second at 200 MHz) must not move within the test.
module tb_time_tag;
  logic clk = 0, rst;
  logic [25:0] tag, tag_def;
  int checks = 0, failures = 0;

  time_tag #(.DIV(10)) dut (.clk(clk), .rst(rst), .tag(tag));
  time_tag u_def (.clk(clk), .rst(rst), .tag(tag_def));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 1; n <= 5000; n++) begin
      @(posedge clk); #1;
      checks++;
      if (tag !== 26'(n / 10)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d tag=%0d", n, tag);
      end
    end
    checks++;
    if (tag_def !== 26'd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
