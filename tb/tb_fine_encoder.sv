// tb_fine_encoder: drives sample words for a random input waveform and
// checks hit and the 20-bit time stamp one clock later. The expected fine
// count is computed from the waveform's edge time: the input rises at bin
// e (global bin count) and is high for a random length; the encoder must
// report the first such edge of each 5 ns word as {coarse, e mod 16}.
module tb_fine_encoder;
  logic        clk = 0, rst;
  logic [15:0] word;
  logic [15:0] coarse;
  logic        hit;
  logic [19:0] ts;
  int checks = 0, failures = 0;

  fine_encoder dut (.clk(clk), .rst(rst), .word(word), .coarse(coarse), .hit(hit), .ts(ts));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // waveform in bins: level[b] for global bin b
  bit level [0:40000];
  initial begin
    int b, e_hit, fine_exp;
    bit exp_hit;
    rst = 1; word = 0; coarse = 0;
    // build a waveform of pulses separated by gaps
    b = 40;
    foreach (level[i]) level[i] = 0;
    while (b < 39000) begin
      int len, gap;
      len = 1 + ($urandom % 30);
      gap = 1 + ($urandom % 40);
      for (int i = 0; i < len; i++) level[b + i] = 1;
      b += len + gap;
    end
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int w = 0; w < 2400; w++) begin
      for (int k = 0; k < 16; k++) word[k] = level[w * 16 + k];
      coarse = 16'(w * 7 + 3);
      // expected: first bin k in this word with level rising from previous bin
      exp_hit = 0; fine_exp = 0;
      for (int k = 15; k >= 0; k--) begin
        int g;
        g = w * 16 + k;
        if (g > 0 && level[g] && !level[g - 1] && w > 0) begin
          exp_hit = 1; fine_exp = k;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (hit !== exp_hit || (exp_hit && ts !== {16'(w * 7 + 3), 4'(fine_exp)})) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d hit=%b exp=%b ts=%h fine_exp=%0d", w, hit, exp_hit, ts, fine_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
