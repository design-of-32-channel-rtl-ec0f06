// tb_hit_buffer: fills the 512-deep hit-buffer, checks that the 513th hit
// raises the sticky overflow flag and is lost, that all 512 come back in
// order, and that random simultaneous write/read traffic matches a queue.
module tb_hit_buffer;
  import tdc_pkg::*;
  logic clk = 0, rst, wr_en, rd_en, empty, overflow;
  hit_t din, dout;
  int checks = 0, failures = 0;
  hit_t model[$];

  hit_buffer dut (.clk(clk), .rst(rst), .wr_en(wr_en), .din(din), .rd_en(rd_en),
                  .dout(dout), .empty(empty), .overflow(overflow));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr_en = 0; rd_en = 0; din = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 513; i++) begin
      wr_en = 1; din = hit_t'(21'(i * 37 + 5));
      @(posedge clk); #1;
      checks++;
      if (overflow !== (i == 512)) begin
        failures++;
        $display("FAIL overflow=%b at write %0d", overflow, i);
      end
    end
    wr_en = 0;
    for (int i = 0; i < 512; i++) begin
      checks++;
      if (empty || dout !== hit_t'(21'(i * 37 + 5))) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d dout=%h", i, dout);
      end
      rd_en = 1; @(posedge clk); #1; rd_en = 0;
    end
    checks++;
    if (!empty || !overflow) failures++;
    // random traffic
    rst = 1; @(posedge clk); #1 rst = 0;
    checks++;
    if (overflow) failures++;
    for (int c = 0; c < 5000; c++) begin
      wr_en = ($urandom % 3) != 0;
      rd_en = ($urandom % 2) != 0;
      din = hit_t'(21'($urandom));
      if (rd_en && !empty) begin
        checks++;
        if (dout !== model[0]) failures++;
      end
      @(posedge clk);
      begin
        int pre;
        pre = model.size();
        if (rd_en && pre > 0) void'(model.pop_front());
        if (wr_en && pre < 512) model.push_back(din);
      end
      #1;
      checks++;
      if (empty !== (model.size() == 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
