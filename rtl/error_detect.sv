// error_detect: resets the whole TDC logic when an error occurs.
//
// err_in is high while an error condition holds: a hit lost to a full
// hit-buffer in any channel (sticky until the reset clears it), or a reset
// request from the configuration registers. When err_in is seen while no
// error reset is running, tdc_rst is held high for RST_CYCLES clocks and
// err_count (16 bits, saturating) goes up by one. tdc_rst is also high
// while the system reset rst is. The role (reset the entire TDC logic on
// an error) follows the design description; which conditions count as
// errors, the reset length and the counter are this design's choices.
module error_detect #(
  parameter int unsigned RST_CYCLES = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        err_in,
  output logic        tdc_rst,
  output logic [15:0] err_count
);

  localparam int unsigned CW = $clog2(RST_CYCLES + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      err_count <= '0;
    end else if (cnt != '0) begin
      cnt <= cnt - 1'b1;
    end else if (err_in) begin
      cnt <= CW'(RST_CYCLES);
      if (err_count != '1) err_count <= err_count + 1'b1;
    end
  end

  assign tdc_rst = rst || (cnt != '0);

endmodule
