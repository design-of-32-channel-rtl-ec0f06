// phase_clock_model: behavioural model of the two PLLs that produce the
// eight shifted-phase 200 MHz sampling clocks (simulation only, not
// synthesizable).
//
// Time unit convention of all testbenches: one simulation tick stands for
// 31.25 ps, so a 5 ns clock period is PERIOD = 160 ticks and one TDC bin
// (312.5 ps, 22.5 degrees) is STEP = 10 ticks. clk_ph[k] is a 50 % duty
// clock whose rising edges fall at k*STEP + n*PERIOD; its falling edges
// therefore give the phases 8..15.
module phase_clock_model #(
  parameter int unsigned N_CLK  = 8,
  parameter int unsigned PERIOD = 160,
  parameter int unsigned STEP   = 10
) (
  output logic [N_CLK-1:0] clk_ph
);

  for (genvar k = 0; k < N_CLK; k++) begin : g_clk
    logic c;
    initial begin
      c = 1'b0;
      #(k * STEP);
      forever begin
        c = 1'b1;
        #(PERIOD / 2);
        c = 1'b0;
        #(PERIOD / 2);
      end
    end
    assign clk_ph[k] = c;
  end

endmodule
