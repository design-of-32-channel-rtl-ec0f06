// tb_start_channel: sends start pulses at chosen sub-period offsets and
// checks that the difference of two successive start time stamps equals
// the programmed interval in 312.5 ps bins, that the epoch bit flips on
// every start and that `started` rises with the first start.
// Time unit: 1 tick = 31.25 ps (period 160, bin 10).
module tb_start_channel;
  import tdc_pkg::*;
  logic [7:0]  clk_ph;
  logic        rst, start_sig;
  logic [15:0] coarse;
  logic        start_evt, epoch, started;
  time_t       start_ts;
  int checks = 0, failures = 0;

  phase_clock_model u_clk (.clk_ph(clk_ph));
  coarse_counter u_cnt (.clk(clk_ph[0]), .rst(rst), .count(coarse));
  start_channel dut (.clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .coarse(coarse),
                     .start_evt(start_evt), .start_ts(start_ts), .epoch(epoch), .started(started));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  time_t ts_list[$];
  logic  ep_list[$];
  always @(posedge clk_ph[0]) begin
    if (!rst && start_evt) begin
      ts_list.push_back(start_ts);
      ep_list.push_back(epoch);
    end
  end

  initial begin
    int starts_at[$];
    int t_abs;
    start_sig = 0; rst = 1;
    repeat (4) @(posedge clk_ph[0]);
    #1 rst = 0;
    @(posedge clk_ph[0]); #1;
    checks++;
    if (started !== 1'b0) failures++;
    // absolute start times in bins from now
    t_abs = 0;
    for (int n = 0; n < 20; n++) begin
      t_abs += 64 + ($urandom % 400);
      starts_at.push_back(t_abs);
    end
    begin
      longint t0;
      t0 = $time + 3;   // 3 ticks after a sampling phase: no sampling race
      foreach (starts_at[n]) begin
        #(t0 + longint'(starts_at[n]) * 10 - $time);
        start_sig = 1;
        #60 start_sig = 0;
      end
    end
    repeat (6) @(posedge clk_ph[0]);
    checks++;
    if (ts_list.size() != starts_at.size()) begin
      failures++;
      $display("FAIL got %0d starts, expected %0d", ts_list.size(), starts_at.size());
    end else begin
      for (int n = 1; n < starts_at.size(); n++) begin
        checks += 2;
        if (20'(ts_list[n] - ts_list[n-1]) !== 20'(starts_at[n] - starts_at[n-1])) begin
          failures++;
          $display("FAIL n=%0d dts=%0d exp=%0d", n, 20'(ts_list[n] - ts_list[n-1]), starts_at[n] - starts_at[n-1]);
        end
        if (ep_list[n] === ep_list[n-1]) failures++;
      end
    end
    checks++;
    if (started !== 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
