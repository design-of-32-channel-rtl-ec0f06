// channel_coding: reads the 32 per-channel readout FIFOs and gives each
// record the 7-bit identification number of its channel in the 128-channel
// spectrometer (ch_base + channel index).
//
// A round-robin pointer starts the search at the channel after the one
// served last, so every non-empty channel is served within 32 records. The
// output is one register stage with a valid/ready handshake: a FIFO is
// popped when the output register is empty or being taken, so one record
// can leave per clock. The 7-bit channel number follows the design
// description; the round-robin order and the base number are this design's
// choices.
module channel_coding
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [CHID_W-1:0] ch_base,
  // per-channel readout FIFOs
  input  rec_t              rd_data [N_CH],
  input  logic [N_CH-1:0]   rd_empty,
  output logic [N_CH-1:0]   rd_en,
  // coded record stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [CHID_W-1:0] out_ch,
  output rec_t              out_rec
);

  localparam int unsigned IW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic [IW-1:0] last;     // channel served last
  logic [IW-1:0] sel;
  logic          any;
  logic          load;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = N_CH; k >= 1; k--) begin
      int idx;
      idx = (int'(last) + k) % N_CH;
      if (!rd_empty[idx]) begin
        any = 1'b1;
        sel = IW'(idx);
      end
    end
  end

  assign load = any && (!out_valid || out_ready);

  always_comb begin
    rd_en = '0;
    if (load) rd_en[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last      <= IW'(N_CH - 1);
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_rec   <= '0;
    end else begin
      if (load) begin
        last      <= sel;
        out_valid <= 1'b1;
        out_ch    <= ch_base + CHID_W'(sel);
        out_rec   <= rd_data[sel];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
