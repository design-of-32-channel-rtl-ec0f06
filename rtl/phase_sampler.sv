// phase_sampler: the 16 sampling flip-flops of one TDC channel.
//
// Eight 200 MHz clocks clk_ph[0..7] are spaced 22.5 degrees (312.5 ps) apart.
// The input is captured on the rising edge of clk_ph[k] (phase k, k = 0..7)
// and on the falling edge of clk_ph[k-8] (phase k, k = 8..15), which is the
// same as sampling with 16 equally spaced clocks: bin = 5 ns / 16 = 312.5 ps.
// The 16 samples of one clk_ph[0] period are then registered together on
// the next rising edge of clk_ph[0]; `word` changes on that edge and
// word[k] is the input value k x 312.5 ps after the start of the period
// before it.
//
// The rising/falling split follows the design description; the single
// retiming register on clk_ph[0] is this design's choice (in silicon the
// late phases would be retimed through an intermediate phase to meet setup).
// In the FPGA the input reaches the 16 flip-flops through a balanced tree
// of identity LUTs; that tree only matters for placement and is not logic.
module phase_sampler #(
  parameter int unsigned N_CLK = 8
) (
  input  logic [N_CLK-1:0]   clk_ph,
  input  logic               sig,
  output logic [2*N_CLK-1:0] word
);

  logic [N_CLK-1:0] q_r, q_f;   // rising-edge and falling-edge samples

  for (genvar k = 0; k < N_CLK; k++) begin : g_ph
    logic r, f;
    always_ff @(posedge clk_ph[k]) r <= sig;
    always_ff @(negedge clk_ph[k]) f <= sig;
    assign q_r[k] = r;
    assign q_f[k] = f;
  end

  always_ff @(posedge clk_ph[0]) word <= {q_f, q_r};

endmodule
