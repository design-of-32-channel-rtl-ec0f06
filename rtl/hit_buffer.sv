// hit_buffer: the deep per-channel buffer that lets a stop channel record
// many hits in a short time (multi-stop).
//
// A FIFO of DEPTH (512) entries of {epoch, 20-bit time}. A hit can be
// written every 5 ns clock; the trigger counter pops entries when it has
// decided about them. If a hit arrives while the buffer is full it is lost,
// and the sticky `overflow` flag is raised until reset; error detection
// uses it to reset the TDC logic. The depth follows the design description;
// the entry format and the overflow flag are this design's choices.
module hit_buffer
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic clk,
  input  logic rst,
  input  logic wr_en,
  input  hit_t din,
  input  logic rd_en,
  output hit_t dout,
  output logic empty,
  output logic overflow
);

  logic full;

  sync_fifo #(.WIDTH($bits(hit_t)), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst(rst), .wr_en(wr_en), .din(din), .full(full),
    .rd_en(rd_en), .dout(dout), .empty(empty), .count());

  always_ff @(posedge clk) begin
    if (rst)                overflow <= 1'b0;
    else if (wr_en && full) overflow <= 1'b1;
  end

endmodule
