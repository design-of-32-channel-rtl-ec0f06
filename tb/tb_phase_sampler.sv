// tb_phase_sampler: checks that the 16 sampling flip-flops capture the input
// at 16 equally spaced phases of the 5 ns period. A rising edge is placed
// 3 ticks (~94 ps) after phase j of period P for every j; the retimed word
// of period P must then hold ones exactly in bits j+1..15 and the next word
// must be all ones. Time unit: 1 tick = 31.25 ps, period 160, bin 10.
module tb_phase_sampler;
  logic [7:0]  clk_ph;
  logic        sig;
  logic [15:0] word;
  int checks = 0, failures = 0;

  phase_clock_model u_clk (.clk_ph(clk_ph));
  phase_sampler dut (.clk_ph(clk_ph), .sig(sig), .word(word));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] exp_w;
    sig = 1'b0;
    repeat (3) @(posedge clk_ph[0]);
    for (int rep = 0; rep < 3; rep++) begin
      for (int j = 0; j < 16; j++) begin
        @(posedge clk_ph[0]);
        #(10 * j + 3) sig = 1'b1;
        @(posedge clk_ph[0]); #1;
        exp_w = (j == 15) ? 16'h0000 : 16'(16'hFFFF << (j + 1));
        checks++;
        if (word !== exp_w) begin
          failures++;
          $display("FAIL j=%0d word=%h exp=%h", j, word, exp_w);
        end
        @(posedge clk_ph[0]); #1;
        checks++;
        if (word !== 16'hFFFF) begin
          failures++;
          $display("FAIL j=%0d second word=%h", j, word);
        end
        sig = 1'b0;
        repeat (2) @(posedge clk_ph[0]);
        #1;
        checks++;
        if (word !== 16'h0000) begin
          failures++;
          $display("FAIL j=%0d low word=%h", j, word);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
