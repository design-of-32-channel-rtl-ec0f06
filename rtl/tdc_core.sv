// tdc_core: the 32-channel TDC: one start channel, 32 stop channels, the
// shared 16-bit coarse counter and the shared 26-bit time tag.
//
// All logic runs on clk_ph[0] (200 MHz); clk_ph[1..7] only clock the
// sampling flip-flops. The external trigger is brought into the clock
// domain by two flip-flops and its rising edge becomes a one-clock pulse
// (two to three clocks of latency). Each stop channel i (Stop[i+1]) offers
// its readout FIFO head on rd_data[i]/rd_empty[i]; rd_en[i] pops it.
// `overflow` is the OR of the channels' hit-buffer overflow flags. The hit,
// reject and discard outputs are per-channel one-clock status pulses.
// The structure (start, trigger and 32 stops into one TDC block sharing a
// coarse counter) follows the design description; the trigger
// synchroniser is this design's choice.
module tdc_core
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH     = 32,
  parameter int unsigned N_CLK    = 8,
  parameter int unsigned HB_DEPTH = 512,
  parameter int unsigned RO_DEPTH = 64,
  parameter int unsigned TAG_DIV  = 200_000_000
) (
  input  logic [N_CLK-1:0] clk_ph,
  input  logic             rst,
  input  logic             start_sig,
  input  logic             trig,
  input  logic [N_CH-1:0]  stop_sig,
  // configuration
  input  logic [N_CH-1:0]  shield,
  input  time_t            win_lo,
  input  time_t            win_hi,
  input  logic             self_mode,
  // readout
  input  logic [N_CH-1:0]  rd_en,
  output rec_t             rd_data [N_CH],
  output logic [N_CH-1:0]  rd_empty,
  // status
  output logic             overflow,
  output logic             start_evt,
  output logic             ext_trig,
  output logic [N_CH-1:0]  hit_acc,
  output logic [N_CH-1:0]  hit_rej,
  output logic [N_CH-1:0]  discard
);

  logic                clk;
  logic [COARSE_W-1:0] coarse;
  logic [TAG_W-1:0]    tag;
  time_t               start_ts;
  logic                epoch, started;
  logic [2:0]          trig_sync;
  logic [N_CH-1:0]     ovf;

  assign clk = clk_ph[0];

  coarse_counter #(.COARSE_W(COARSE_W)) u_coarse (.clk(clk), .rst(rst), .count(coarse));

  time_tag #(.DIV(TAG_DIV)) u_tag (.clk(clk), .rst(rst), .tag(tag));

  start_channel #(.N_CLK(N_CLK)) u_start (
    .clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .coarse(coarse),
    .start_evt(start_evt), .start_ts(start_ts), .epoch(epoch), .started(started));

  always_ff @(posedge clk) begin
    if (rst) trig_sync <= '0;
    else     trig_sync <= {trig_sync[1:0], trig};
  end
  assign ext_trig = trig_sync[1] && !trig_sync[2];

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    tdc_channel #(.N_CLK(N_CLK), .HB_DEPTH(HB_DEPTH), .RO_DEPTH(RO_DEPTH)) u_ch (
      .clk_ph(clk_ph), .rst(rst), .stop_sig(stop_sig[i]), .coarse(coarse),
      .start_evt(start_evt), .start_ts(start_ts), .epoch(epoch), .started(started),
      .shield(shield[i]), .win_lo(win_lo), .win_hi(win_hi),
      .self_mode(self_mode), .ext_trig(ext_trig), .tag(tag),
      .rd_en(rd_en[i]), .rd_data(rd_data[i]), .rd_empty(rd_empty[i]),
      .overflow(ovf[i]), .hit_acc(hit_acc[i]), .hit_rej(hit_rej[i]),
      .discard(discard[i]));
  end

  assign overflow = |ovf;

endmodule
