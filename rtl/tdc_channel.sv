// tdc_channel: one stop channel of the TDC.
//
// Chain: 16-phase sampler -> fine encoder (hit + 20-bit time stamp) ->
// time relative to the latest start -> channel-shielding and time-window
// cut -> hit-buffer (512) -> trigger counter (keep/discard, 8-bit trigger
// count) -> readout FIFO, where the 26-bit time tag is added.
//
// Timing: a rising edge of stop_sig reaches the encoder output two clk_ph[0]
// cycles after the period it fell in and is written to the hit-buffer in
// the same cycle, so a new hit can be accepted every 5 ns. The stored time
// is (stop - start) mod 2^20 in 312.5 ps bins. A hit is dropped if the
// channel is shielded, if no start has been seen since reset, or if the
// time lies outside [win_lo, win_hi] (both inclusive). The readout FIFO is
// read first-word-fall-through: rd_data is valid when rd_empty is low.
// The chain of Fig. 2 of the design (flip-flops, encoder, coarse counter,
// hit-buffer, trigger counter, time tag, readout FIFO) is followed; where
// the shielding and window cut sit in it is this design's choice.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter int unsigned N_CLK    = 8,
  parameter int unsigned HB_DEPTH = 512,
  parameter int unsigned RO_DEPTH = 64
) (
  input  logic [N_CLK-1:0]    clk_ph,
  input  logic                rst,
  input  logic                stop_sig,
  input  logic [COARSE_W-1:0] coarse,
  // from the start channel
  input  logic                start_evt,
  input  time_t               start_ts,
  input  logic                epoch,
  input  logic                started,
  // configuration
  input  logic                shield,
  input  time_t               win_lo,
  input  time_t               win_hi,
  input  logic                self_mode,
  input  logic                ext_trig,
  input  logic [TAG_W-1:0]    tag,
  // readout
  input  logic                rd_en,
  output rec_t                rd_data,
  output logic                rd_empty,
  // status
  output logic                overflow,
  output logic                hit_acc,
  output logic                hit_rej,
  output logic                discard
);

  logic               clk;
  logic [2*N_CLK-1:0] word;
  logic               hit;
  time_t              ts, dt;
  logic               in_win;
  hit_t               hb_head;
  logic               hb_empty, hb_pop;
  logic               ro_full, ro_wr;
  rec_t               ro_rec;
  logic [TRIG_W-1:0]  trig_cnt;

  assign clk = clk_ph[0];

  phase_sampler #(.N_CLK(N_CLK)) u_smp (.clk_ph(clk_ph), .sig(stop_sig), .word(word));

  fine_encoder #(.N_PH(2*N_CLK), .COARSE_W(COARSE_W)) u_enc (
    .clk(clk), .rst(rst), .word(word), .coarse(coarse), .hit(hit), .ts(ts));

  assign dt      = ts - start_ts;
  assign in_win  = (dt >= win_lo) && (dt <= win_hi);
  assign hit_acc = hit && started && !shield && in_win;
  assign hit_rej = hit && !hit_acc;

  hit_buffer #(.DEPTH(HB_DEPTH)) u_hb (
    .clk(clk), .rst(rst), .wr_en(hit_acc), .din('{epoch: epoch, tm: dt}),
    .rd_en(hb_pop), .dout(hb_head), .empty(hb_empty), .overflow(overflow));

  trigger_counter u_trg (
    .clk(clk), .rst(rst), .self_mode(self_mode), .ext_trig(ext_trig),
    .start_evt(start_evt), .epoch(epoch), .tag(tag),
    .hb_empty(hb_empty), .hb_head(hb_head), .hb_pop(hb_pop),
    .out_full(ro_full), .out_wr(ro_wr), .out_rec(ro_rec),
    .discard(discard), .trig_cnt(trig_cnt));

  sync_fifo #(.WIDTH($bits(rec_t)), .DEPTH(RO_DEPTH)) u_ro (
    .clk(clk), .rst(rst), .wr_en(ro_wr), .din(ro_rec), .full(ro_full),
    .rd_en(rd_en), .dout(rd_data), .empty(rd_empty), .count());

endmodule
