// sync_fifo: single-clock first-in first-out buffer, used for the per-channel
// hit-buffer storage, the per-channel readout FIFO and the output FIFO.
//
// Memory is an array of DEPTH words (DEPTH a power of two), with read and
// write pointers one bit wider than the address. dout is the head entry
// and is valid whenever empty is low (first-word fall-through); rd_en pops
// it. A write while full and a read while empty are ignored. Both sides may
// act in the same cycle. count gives the occupancy. Synchronous reset.
module sync_fifo #(
  parameter int unsigned WIDTH = 54,
  parameter int unsigned DEPTH = 64
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       din,
  output logic                   full,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       dout,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             do_wr, do_rd;

  assign count = wp - rp;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (wp == rp);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end

endmodule
