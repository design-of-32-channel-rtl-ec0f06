// tb_error_detect: an error condition must hold tdc_rst high for exactly
// RST_CYCLES clocks and count one error; a condition that persists through
// the reset window starts the next reset right after it; the system reset
// always drives tdc_rst.
module tb_error_detect;
  logic clk = 0, rst, err_in, tdc_rst;
  logic [15:0] err_count;
  int checks = 0, failures = 0;

  error_detect #(.RST_CYCLES(16)) dut (.clk(clk), .rst(rst), .err_in(err_in),
    .tdc_rst(tdc_rst), .err_count(err_count));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int len;
    rst = 1; err_in = 0;
    @(posedge clk); #1;
    chk("rst passes", tdc_rst);
    @(posedge clk); #1 rst = 0;
    #1 chk("idle", !tdc_rst && err_count == 0);
    for (int e = 1; e <= 5; e++) begin
      repeat ($urandom % 20 + 1) @(posedge clk);
      #1 err_in = 1;
      @(posedge clk); #1 err_in = 0;
      len = 0;
      while (tdc_rst) begin len++; @(posedge clk); #1; end
      chk("reset length 16", len == 16);
      chk("count", err_count == 16'(e));
    end
    // persistent error: back-to-back resets
    err_in = 1;
    repeat (40) @(posedge clk);
    #1 err_in = 0;
    chk("persistent error counted twice or thrice", err_count >= 7 && err_count <= 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
