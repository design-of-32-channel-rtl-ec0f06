// trigger_counter: trigger decision and trigger count for one stop channel.
//
// A trigger event is the external trigger pulse (self_mode = 0) or the
// start itself (self_mode = 1, internal self-trigger). Each event adds one
// to the 8-bit trigger count (wrapping) and marks the current epoch (the
// interval from one start to the next) as triggered. The block looks at
// the head of the hit-buffer every clock:
//   * its epoch was triggered          -> pop it and write the record
//     {trigger count, time tag, time} to the readout FIFO (unless full);
//   * its epoch is closed, untriggered -> pop and discard it;
//   * its epoch is still open, untriggered -> leave it and wait.
// At most one entry moves per 5 ns clock. The decision state holds one
// flag per epoch parity, so the hit-buffer must drain a pulse's hits before
// the next-but-one start (at a 25 Hz beam this leaves 80 ms against a few
// microseconds needed). The external/self-trigger choice, the keep-or-
// discard role and the 8-bit count follow the design description; the
// epoch rule is this design's choice.
module trigger_counter
  import tdc_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              self_mode,
  input  logic              ext_trig,    // one-clock pulse
  input  logic              start_evt,   // one-clock pulse
  input  logic              epoch,       // current epoch, new value during start_evt
  input  logic [TAG_W-1:0]  tag,
  // hit-buffer head
  input  logic              hb_empty,
  input  hit_t              hb_head,
  output logic              hb_pop,
  // readout FIFO write
  input  logic              out_full,
  output logic              out_wr,
  output rec_t              out_rec,
  // status
  output logic              discard,
  output logic [TRIG_W-1:0] trig_cnt
);

  logic [1:0] seen;
  logic       trig_evt;
  logic       keep;

  assign trig_evt = self_mode ? start_evt : ext_trig;

  always_ff @(posedge clk) begin
    if (rst) begin
      seen     <= '0;
      trig_cnt <= '0;
    end else begin
      if (start_evt) seen[epoch] <= 1'b0;
      if (trig_evt) begin
        seen[epoch] <= 1'b1;
        trig_cnt    <= trig_cnt + 1'b1;
      end
    end
  end

  assign keep    = !hb_empty && seen[hb_head.epoch];
  assign discard = !hb_empty && !seen[hb_head.epoch] && (hb_head.epoch != epoch);
  assign out_wr  = keep && !out_full;
  assign hb_pop  = out_wr || discard;
  assign out_rec = '{trig: trig_cnt, tag: tag, tm: hb_head.tm};

endmodule
