// time_tag: the 26-bit time tag that records, at second level, when a hit
// was detected.
//
// A prescaler counts DIV clocks of the 200 MHz clock (DIV = 200,000,000 for
// one second) and then advances the tag by one; the tag wraps after 2^26 s.
// Both counters reset synchronously to zero. The 26-bit width and the
// second-level resolution follow the design description; deriving the
// second from the sampling clock (rather than from an external time
// reference) is this design's choice.
module time_tag
  import tdc_pkg::*;
#(
  parameter int unsigned DIV = 200_000_000
) (
  input  logic             clk,
  input  logic             rst,
  output logic [TAG_W-1:0] tag
);

  localparam int unsigned PW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [PW-1:0] pre;

  always_ff @(posedge clk) begin
    if (rst) begin
      pre <= '0;
      tag <= '0;
    end else if (pre == PW'(DIV - 1)) begin
      pre <= '0;
      tag <= tag + 1'b1;
    end else begin
      pre <= pre + 1'b1;
    end
  end

endmodule
