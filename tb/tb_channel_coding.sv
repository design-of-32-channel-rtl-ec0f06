// tb_channel_coding: 8 channels whose readout FIFOs are modelled by queues
// filled at random; the output is taken with random back-pressure. Every
// record must come out exactly once, in per-channel order, with channel
// number ch_base + index; while all channels stay busy the grant must
// rotate (round robin): no channel is served twice before a waiting one.
module tb_channel_coding;
  import tdc_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst;
  rec_t rd_data [N];
  logic [N-1:0] rd_empty, rd_en;
  logic out_valid, out_ready;
  logic [CHID_W-1:0] out_ch;
  rec_t out_rec;
  int checks = 0, failures = 0;
  rec_t q [N][$];
  rec_t sent [N][$];
  int total_in = 0, total_out = 0;

  channel_coding #(.N_CH(N)) dut (.clk(clk), .rst(rst), .ch_base(7'd40), .rd_data(rd_data),
    .rd_empty(rd_empty), .rd_en(rd_en), .out_valid(out_valid), .out_ready(out_ready),
    .out_ch(out_ch), .out_rec(out_rec));

  always #5 clk = ~clk;

  // the modelled FIFO heads are refreshed after every change of the queues
  task automatic drive();
    for (int c = 0; c < N; c++) begin
      rd_empty[c] = (q[c].size() == 0);
      rd_data[c]  = rd_empty[c] ? '0 : q[c][0];
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_ch = -1;
    rst = 1; out_ready = 0;
    drive();
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      out_ready = ($urandom % 4) != 0;
      if (cyc < 3000)
        for (int c = 0; c < N; c++)
          if ($urandom % 16 == 0) begin
            rec_t r;
            r = rec_t'({$urandom, $urandom});
            q[c].push_back(r); sent[c].push_back(r); total_in++;
          end
      drive();
      #2;
      // decide on what the clock edge will do, from values settled before it
      if (out_valid && out_ready) begin
        int c;
        c = int'(out_ch) - 40;
        checks++;
        if (c < 0 || c >= N || sent[c].size() == 0 || out_rec !== sent[c][0]) begin
          failures++; if (failures < 4) $display("FAIL ch=%0d t=%0t rec=%h exp=%h n=%0d", out_ch, $time, out_rec, (c>=0 && c<N && sent[c].size()>0) ? sent[c][0] : 0, (c>=0 && c<N) ? sent[c].size() : -1);
        end else void'(sent[c].pop_front());
        total_out++;
      end
      begin
        logic [N-1:0] pop;
        pop = rd_en;
        @(posedge clk); #1;
        for (int c = 0; c < N; c++) if (pop[c]) begin
          checks++;
          if (q[c].size() == 0) failures++; else void'(q[c].pop_front());
        end
      end
      drive();
    end
    // round-robin: fill all channels, then observe 2N grants
    for (int c = 0; c < N; c++) repeat (4) begin
      rec_t r; r = rec_t'({$urandom, $urandom});
      q[c].push_back(r); sent[c].push_back(r); total_in++;
    end
    out_ready = 1;
    drive();
    for (int k = 0; k < 3 * N; k++) begin
      logic [N-1:0] pop;
      #2;
      pop = rd_en;
      if (out_valid) begin void'(sent[int'(out_ch) - 40].pop_front()); total_out++; end
      @(posedge clk); #1;
      for (int c = 0; c < N; c++) if (pop[c]) begin
        void'(q[c].pop_front());
        if (last_ch >= 0) begin
          checks++;
          if (c != (last_ch + 1) % N) begin failures++; $display("FAIL rr %0d after %0d", c, last_ch); end
        end
        last_ch = c;
      end
      drive();
    end
    repeat (10) @(posedge clk);
    checks++;
    if (total_out < total_in - N - 2) begin failures++; $display("FAIL in=%0d out=%0d", total_in, total_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
