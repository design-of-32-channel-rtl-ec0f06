// tb_selfcheck_dac_ctrl: checks the self-check start pulse (period and
// width, and none while disabled) and decodes the DAC serial frames by
// sampling dac_sdi on rising dac_sclk while dac_csn is low: every written
// threshold must arrive as {channel, value}, 24 bits, MSB first.
module tb_selfcheck_dac_ctrl;
  logic clk = 0, rst, sc_en, sc_start, fe_selfcheck, dac_wr, dac_csn, dac_sclk, dac_sdi, dac_busy;
  logic [31:0] sc_period;
  logic [15:0] dac_thr [32];
  logic [7:0] dac_ch;
  int checks = 0, failures = 0;
  logic [23:0] frames[$];
  logic [23:0] cur;
  int nbits = 0;

  selfcheck_dac_ctrl dut (.clk(clk), .rst(rst), .sc_en(sc_en), .sc_period(sc_period),
    .sc_start(sc_start), .fe_selfcheck(fe_selfcheck), .dac_thr(dac_thr), .dac_wr(dac_wr),
    .dac_ch(dac_ch), .dac_csn(dac_csn), .dac_sclk(dac_sclk), .dac_sdi(dac_sdi), .dac_busy(dac_busy));

  always #5 clk = ~clk;

  // serial receiver
  always @(posedge dac_sclk) if (!dac_csn) begin cur = {cur[22:0], dac_sdi}; nbits++; end
  always @(posedge dac_csn) if (nbits > 0) begin
    if (nbits != 24) begin failures++; $display("FAIL frame of %0d bits", nbits); end
    frames.push_back(cur); nbits = 0;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int rises[$];
    int hi;
    rst = 1; sc_en = 0; sc_period = 100; dac_wr = 0; dac_ch = 0;
    foreach (dac_thr[i]) dac_thr[i] = 16'h1000 + 16'(i * 3);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    repeat (300) begin @(posedge clk); #1 if (sc_start) failures++; end
    chk("no pulse when disabled", !fe_selfcheck);
    sc_en = 1;
    hi = 0;
    for (int c = 1; c <= 1050; c++) begin
      logic prev;
      prev = sc_start;
      @(posedge clk); #1;
      if (sc_start && !prev) rises.push_back(c);
      if (sc_start) hi++;
    end
    chk("fe_selfcheck", fe_selfcheck);
    chk("10 pulses", rises.size() == 10);
    for (int i = 1; i < rises.size(); i++) chk("period 100", rises[i] - rises[i-1] == 100);
    chk("width 4", hi == 40);
    sc_en = 0;
    // DAC: write channels 5, 17, 31 (17 and 5 while busy)
    foreach (dac_thr[i]) dac_thr[i] = 16'($urandom);
    dac_ch = 17; dac_wr = 1; @(posedge clk); #1 dac_wr = 0;
    repeat (3) @(posedge clk);
    dac_ch = 31; dac_wr = 1; @(posedge clk); #1 dac_wr = 0;
    dac_ch = 5;  dac_wr = 1; @(posedge clk); #1 dac_wr = 0;
    repeat (1000) @(posedge clk);
    chk("3 frames", frames.size() == 3);
    if (frames.size() == 3) begin
      chk("frame 17", frames[0] == {8'd17, dac_thr[17]});
      chk("frame 5",  frames[1] == {8'd5,  dac_thr[5]});
      chk("frame 31", frames[2] == {8'd31, dac_thr[31]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
