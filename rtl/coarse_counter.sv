// coarse_counter: the single 16-bit coarse time counter of the TDC.
//
// Counts clock periods of the 200 MHz sampling clock clk_ph[0] and wraps,
// so the time range is 2^16 x 5 ns = 327.68 us. One counter serves the start
// channel and all 32 stop channels. Synchronous reset to zero; the count
// advances on every rising clock edge. Width and clock follow the design
// description; free-running (rather than restarting on each start) is this
// design's choice, the start time being subtracted in each stop channel.
module coarse_counter #(
  parameter int unsigned COARSE_W = 16
) (
  input  logic                clk,
  input  logic                rst,
  output logic [COARSE_W-1:0] count
);

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end

endmodule
