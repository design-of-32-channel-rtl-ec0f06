// data_packing: packs a channel-coded record into the 64-bit data word that
// is sent to the data acquisition system.
//
// 54 bits of record (20-bit time, 26-bit time tag, 8-bit trigger count)
// plus the 7-bit channel number make 61 bits; the remaining three top bits
// carry a fixed marker 3'b101 so the DAQ can check word alignment:
//   [63:61] marker  [60:54] channel  [53:46] trigger count
//   [45:20] time tag  [19:0] time (312.5 ps bins)
// One register stage with valid/ready, one word per clock. Packing into
// 64 bits follows the design description; the field order and the marker
// are this design's choices.
module data_packing
  import tdc_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [CHID_W-1:0] in_ch,
  input  rec_t              in_rec,
  output logic              out_valid,
  input  logic              out_ready,
  output word_t             out_word
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_word <= '{mark: WORD_MARK, ch: in_ch, rec: in_rec};
    end
  end

endmodule
