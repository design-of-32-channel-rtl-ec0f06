// tb_trigger_counter: a queue stands in for the hit-buffer. Checks
//  * external mode: hits of an epoch wait until the external trigger, then
//    leave with the trigger count; hits of an epoch closed without a
//    trigger are discarded;
//  * readout-FIFO full stalls the transfer;
//  * self-trigger mode: every start is a trigger, all hits are kept and the
//    trigger count follows the number of starts.
module tb_trigger_counter;
  import tdc_pkg::*;
  logic clk = 0, rst, self_mode, ext_trig, start_evt, epoch;
  logic [TAG_W-1:0] tag;
  logic hb_empty, hb_pop, out_full, out_wr, discard;
  hit_t hb_head;
  rec_t out_rec;
  logic [TRIG_W-1:0] trig_cnt;
  int checks = 0, failures = 0;
  hit_t q[$];
  rec_t got[$];
  int n_disc = 0;

  trigger_counter dut (.clk(clk), .rst(rst), .self_mode(self_mode), .ext_trig(ext_trig),
    .start_evt(start_evt), .epoch(epoch), .tag(tag), .hb_empty(hb_empty), .hb_head(hb_head),
    .hb_pop(hb_pop), .out_full(out_full), .out_wr(out_wr), .out_rec(out_rec),
    .discard(discard), .trig_cnt(trig_cnt));

  always #5 clk = ~clk;
  assign hb_empty = (q.size() == 0);
  assign hb_head  = hb_empty ? '0 : q[0];

  always @(posedge clk) begin
    if (!rst) begin
      if (out_wr) got.push_back(out_rec);
      if (discard) n_disc++;
      if (hb_pop && q.size() > 0) void'(q.pop_front());
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_start();
    start_evt = 1; epoch = ~epoch;
    @(posedge clk); #1 start_evt = 0;
  endtask

  task automatic check(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst = 1; self_mode = 0; ext_trig = 0; start_evt = 0; epoch = 0; tag = 26'h123; out_full = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // epoch 1: three hits, no trigger yet -> must wait
    do_start();
    for (int i = 0; i < 3; i++) q.push_back('{epoch: epoch, tm: 20'(100 + i)});
    repeat (10) @(posedge clk); #1;
    check("waits for trigger", q.size() == 3 && got.size() == 0 && n_disc == 0);
    // trigger with readout FIFO full -> still waits
    out_full = 1;
    ext_trig = 1; @(posedge clk); #1 ext_trig = 0;
    repeat (5) @(posedge clk); #1;
    check("stalls on full", q.size() == 3 && got.size() == 0);
    check("trigger counted", trig_cnt == 8'd1);
    out_full = 0;
    repeat (5) @(posedge clk); #1;
    check("kept after trigger", got.size() == 3 && q.size() == 0);
    for (int i = 0; i < got.size(); i++)
      check("record content", got[i].tm == 20'(100 + i) && got[i].trig == 8'd1 && got[i].tag == 26'h123);
    got.delete();
    // epoch 2: hits, no trigger, then a new start -> discarded
    do_start();
    for (int i = 0; i < 4; i++) q.push_back('{epoch: epoch, tm: 20'(200 + i)});
    repeat (5) @(posedge clk); #1;
    check("epoch 2 waits", q.size() == 4);
    do_start();
    for (int i = 0; i < 2; i++) q.push_back('{epoch: epoch, tm: 20'(300 + i)});
    repeat (8) @(posedge clk); #1;
    check("untriggered discarded", n_disc == 4 && got.size() == 0 && q.size() == 2);
    ext_trig = 1; @(posedge clk); #1 ext_trig = 0;
    repeat (5) @(posedge clk); #1;
    check("epoch 3 kept", got.size() == 2 && got[0].tm == 20'd300 && got[0].trig == 8'd2);
    got.delete();
    // self-trigger mode
    self_mode = 1;
    for (int s = 0; s < 5; s++) begin
      do_start();
      for (int i = 0; i < 3; i++) q.push_back('{epoch: epoch, tm: 20'(1000 * s + i)});
      repeat (6) @(posedge clk); #1;
      check("self mode kept", got.size() == 3 * (s + 1) && got[3 * s].trig == 8'(3 + s));
    end
    check("no further discards", n_disc == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
