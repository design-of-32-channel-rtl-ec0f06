// tb_tdc_core: the TDC core with 4 stop channels (N_CH reduced for speed)
// in external-trigger mode. Each pulse: a start, then stops on random
// channels at random bin offsets; the external trigger comes after the
// stops for even pulses only. Records of triggered pulses must appear in
// the per-channel readout FIFOs with the right times and trigger count;
// hits of untriggered pulses must be discarded.
// Time unit: 1 tick = 31.25 ps (period 160, bin 10).
module tb_tdc_core;
  import tdc_pkg::*;
  localparam int N = 4;
  logic [7:0]  clk_ph;
  logic        clk, rst, start_sig, trig;
  logic [N-1:0] stop_sig, rd_en, rd_empty, hit_acc, hit_rej, discard;
  rec_t        rd_data [N];
  logic        overflow, start_evt, ext_trig;
  int checks = 0, failures = 0;
  int exp_q [N][$];
  int n_disc = 0;

  phase_clock_model u_clk (.clk_ph(clk_ph));
  assign clk = clk_ph[0];
  tdc_core #(.N_CH(N)) dut (.clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .trig(trig),
    .stop_sig(stop_sig), .shield('0), .win_lo('0), .win_hi('1), .self_mode(1'b0),
    .rd_en(rd_en), .rd_data(rd_data), .rd_empty(rd_empty), .overflow(overflow),
    .start_evt(start_evt), .ext_trig(ext_trig), .hit_acc(hit_acc), .hit_rej(hit_rej),
    .discard(discard));

  assign rd_en = ~rd_empty;
  int trig_no = 0;
  always @(posedge clk) begin
    if (!rst) begin
      n_disc += $countones(discard);
      for (int c = 0; c < N; c++) begin
        if (!rd_empty[c]) begin
          int e;
          checks++;
          e = (exp_q[c].size() > 0) ? exp_q[c].pop_front() : -1;
          if (rd_data[c].tm !== 20'(e) || rd_data[c].trig !== 8'(trig_no)) begin
            failures++;
            $display("FAIL ch%0d tm=%0d exp=%0d trig=%0d/%0d", c, rd_data[c].tm, e, rd_data[c].trig, trig_no);
          end
        end
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_disc_exp = 0;
    start_sig = 0; stop_sig = 0; trig = 0; rst = 1;
    repeat (4) @(posedge clk);
    #1 rst = 0;
    for (int p = 0; p < 10; p++) begin
      longint t0;
      int d;
      int tmp [N][$];
      for (int c = 0; c < N; c++) tmp[c].delete();
      @(posedge clk); #3;
      t0 = $time;
      start_sig = 1; #40 start_sig = 0;
      d = 20;
      for (int i = 0; i < 12; i++) begin
        int c;
        d += 40 + ($urandom % 200);
        c = $urandom % N;
        #(t0 + longint'(d) * 10 - $time);
        stop_sig[c] = 1; #40 stop_sig[c] = 0;
        tmp[c].push_back(d);
      end
      repeat (10) @(posedge clk);
      if (p % 2 == 0) begin
        for (int c = 0; c < N; c++) foreach (tmp[c][k]) exp_q[c].push_back(tmp[c][k]);
        #7 trig = 1;
        repeat (3) @(posedge clk);
        trig_no++;
        #7 trig = 0;
      end else begin
        n_disc_exp += 12;
      end
      repeat (30) @(posedge clk);
    end
    // a last start closes the final, untriggered pulse, whose hits are then discarded
    @(posedge clk); #3 start_sig = 1; #40 start_sig = 0;
    repeat (30) @(posedge clk);
    checks += 2;
    for (int c = 0; c < N; c++) if (exp_q[c].size() != 0) begin failures++; $display("FAIL ch%0d missing", c); end
    if (n_disc != n_disc_exp) begin failures++; $display("FAIL discards %0d exp %0d", n_disc, n_disc_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
