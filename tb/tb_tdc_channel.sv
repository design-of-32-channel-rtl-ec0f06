// tb_tdc_channel: one stop channel with a real start channel, coarse counter
// and shifted-phase clocks, in self-trigger mode. For several starts it
// sends bursts of stop pulses at random bin offsets after the start and
// checks every record read from the readout FIFO against the programmed
// interval (312.5 ps bins). Then it checks the time window (hits outside
// [win_lo, win_hi] are dropped) and channel shielding.
// Time unit: 1 tick = 31.25 ps (period 160, bin 10).
module tb_tdc_channel;
  import tdc_pkg::*;
  logic [7:0]  clk_ph;
  logic        clk, rst, start_sig, stop_sig;
  logic [15:0] coarse;
  logic        start_evt, epoch, started;
  time_t       start_ts, win_lo, win_hi;
  logic        shield, rd_en, rd_empty, overflow, hit_acc, hit_rej, discard;
  rec_t        rd_data;
  int checks = 0, failures = 0;
  int exp_q[$];
  int n_rej = 0;

  phase_clock_model u_clk (.clk_ph(clk_ph));
  assign clk = clk_ph[0];
  coarse_counter u_cnt (.clk(clk), .rst(rst), .count(coarse));
  start_channel u_start (.clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .coarse(coarse),
    .start_evt(start_evt), .start_ts(start_ts), .epoch(epoch), .started(started));
  tdc_channel dut (.clk_ph(clk_ph), .rst(rst), .stop_sig(stop_sig), .coarse(coarse),
    .start_evt(start_evt), .start_ts(start_ts), .epoch(epoch), .started(started),
    .shield(shield), .win_lo(win_lo), .win_hi(win_hi), .self_mode(1'b1), .ext_trig(1'b0),
    .tag(26'h2A5), .rd_en(rd_en), .rd_data(rd_data), .rd_empty(rd_empty),
    .overflow(overflow), .hit_acc(hit_acc), .hit_rej(hit_rej), .discard(discard));

  // reader: pops whenever data is there and compares with the expected queue
  assign rd_en = !rd_empty;
  always @(posedge clk) begin
    if (!rst && hit_rej) n_rej++;
    if (!rst && !rd_empty) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected record tm=%0d", rd_data.tm);
      end else begin
        int e;
        e = exp_q.pop_front();
        if (rd_data.tm !== 20'(e) || rd_data.tag !== 26'h2A5) begin
          failures++; $display("FAIL tm=%0d exp=%0d", rd_data.tm, e);
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one start at t0 and stops at t0 + d*10 for each d in ds (ascending)
  task automatic burst(int ds[$], int lo, int hi, bit expect_all);
    longint t0;
    @(posedge clk); #3;
    t0 = $time;
    start_sig = 1; #40 start_sig = 0;
    foreach (ds[i]) begin
      #(t0 + longint'(ds[i]) * 10 - $time);
      stop_sig = 1; #40 stop_sig = 0;
      if (expect_all || (ds[i] >= lo && ds[i] <= hi)) exp_q.push_back(ds[i]);
    end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    int ds[$];
    start_sig = 0; stop_sig = 0; rst = 1; shield = 0; win_lo = 0; win_hi = '1;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    // a stop before any start is ignored
    repeat (3) @(posedge clk); #3 stop_sig = 1; #40 stop_sig = 0;
    repeat (5) @(posedge clk);
    for (int b = 0; b < 8; b++) begin
      int d;
      ds.delete();
      d = 30 + ($urandom % 100);
      for (int i = 0; i < 20; i++) begin
        ds.push_back(d);
        d += 32 + ($urandom % 300);   // >= 2 clock periods apart
      end
      burst(ds, 0, 0, 1);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d records missing", exp_q.size()); end
    // time window
    win_lo = 20'd500; win_hi = 20'd1500;
    ds.delete();
    for (int i = 0; i < 20; i++) ds.push_back(100 + i * 100 + ($urandom % 50));
    n_rej = 0;
    burst(ds, 500, 1500, 0);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL window: %0d missing", exp_q.size()); end
    if (n_rej < 5) begin failures++; $display("FAIL window rejects %0d", n_rej); end
    // shielding
    win_lo = 0; win_hi = '1; shield = 1;
    ds.delete();
    for (int i = 0; i < 5; i++) ds.push_back(50 + i * 70);
    burst(ds, 1, 0, 0);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || overflow) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
