// tb_tdc_top: end-to-end test of the whole design at its default size
// (32 channels, 512-deep hit-buffers). The testbench plays the detector,
// the front-end and the DAQ: it configures the registers, sends start,
// stop and trigger pulses, takes the 64-bit words from the output stream
// under random back-pressure and checks every word's marker, channel
// number and time against the programmed start-to-stop interval.
// Mechanisms exercised and counted (each must happen at least once):
//   external trigger keeps a pulse, an untriggered pulse is discarded,
//   channel shielding and the time window reject hits, self-trigger mode
//   with the self-check start pulse, DAC threshold frames, output
//   back-pressure, a hit-buffer overflow that triggers an error reset, and
//   an error reset requested through the registers.
// Time unit: 1 tick = 31.25 ps (5 ns period = 160 ticks, bin = 10 ticks).
module tb_tdc_top;
  import tdc_pkg::*;
  localparam int N = 32;
  localparam int BASE = 32;
  logic [7:0]  clk_ph;
  logic        clk, rst, start_sig, trig;
  logic [N-1:0] stop_sig;
  logic        m_valid, m_ready;
  logic [63:0] m_data;
  logic        cfg_wr;
  logic [7:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic        fe_selfcheck, dac_csn, dac_sclk, dac_sdi;
  int checks = 0, failures = 0;
  int exp_q [N][$];
  // mechanism counters
  int n_words = 0, n_kept_pulses = 0, n_disc = 0, n_rej = 0, n_sc = 0, n_dac = 0;
  int n_bp = 0, n_ovf_rst = 0, n_soft_rst = 0, n_self_pulses = 0;

  phase_clock_model u_clk (.clk_ph(clk_ph));
  assign clk = clk_ph[0];

  tdc_top dut (.clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .trig(trig), .stop_sig(stop_sig),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data), .cfg_wr(cfg_wr), .cfg_addr(cfg_addr),
    .cfg_wdata(cfg_wdata), .cfg_rdata(cfg_rdata), .fe_selfcheck(fe_selfcheck),
    .dac_csn(dac_csn), .dac_sclk(dac_sclk), .dac_sdi(dac_sdi));

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- output stream monitor (mid-cycle sampling) ----
  always @(negedge clk) begin
    if (!rst && m_valid && !m_ready) n_bp++;
    if (!rst && m_valid && m_ready) begin
      int c, e;
      c = int'(m_data[60:54]) - BASE;
      checks++;
      n_words++;
      if (m_data[63:61] !== 3'b101 || c < 0 || c >= N || exp_q[c].size() == 0) begin
        failures++;
        if (failures < 10) $display("FAIL word %h unexpected", m_data);
      end else begin
        e = exp_q[c].pop_front();
        if (m_data[19:0] !== 20'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL ch%0d time %0d exp %0d", c, m_data[19:0], e);
        end
      end
    end
  end
  always @(posedge clk) begin
    #1 m_ready = ($urandom % 4) != 0;
  end

  // ---- status counters from inside the design ----
  logic sc_q = 0;
  always @(posedge clk) if (!rst) begin
    n_disc += $countones(dut.u_core.discard);
    n_rej  += $countones(dut.u_core.hit_rej);
    if (dut.sc_start && !sc_q) n_sc++;
    sc_q <= dut.sc_start;
  end

  // ---- DAC frame receiver ----
  logic [23:0] dac_cur;
  int dac_bits = 0;
  logic [23:0] dac_frames[$];
  always @(posedge dac_sclk) if (!dac_csn) begin dac_cur = {dac_cur[22:0], dac_sdi}; dac_bits++; end
  always @(posedge dac_csn) if (dac_bits > 0) begin
    checks++;
    if (dac_bits != 24) failures++;
    dac_frames.push_back(dac_cur); dac_bits = 0; n_dac++;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(posedge clk); #2;
    cfg_addr = a; cfg_wdata = d; cfg_wr = 1;
    @(posedge clk); #2 cfg_wr = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(posedge clk); #2 cfg_addr = a;
    #1 d = cfg_rdata;
  endtask

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse_stop(int c);
    stop_sig[c] = 1; #40 stop_sig[c] = 0;
  endtask

  // One beam pulse: a start, then n stops on random channels at random
  // times; returns the stops as (channel, bin) pairs.
  task automatic beam(int n, output int chs[$], output int ds[$]);
    longint t0;
    int d;
    chs.delete(); ds.delete();
    @(posedge clk); #3;
    t0 = $time;
    start_sig = 1; #40 start_sig = 0;
    d = 60;
    for (int i = 0; i < n; i++) begin
      int c;
      d += 5 + ($urandom % 40);
      c = $urandom % N;
      // a channel needs its input low for a clock before the next edge
      foreach (chs[k]) if (chs[k] == c && d - ds[k] < 40) c = (c + 1) % N;
      #(t0 + longint'(d) * 10 - $time);
      pulse_stop(c);
      chs.push_back(c); ds.push_back(d);
    end
  endtask

  task automatic expect_all(int chs[$], int ds[$], int lo, int hi, logic [N-1:0] shield);
    foreach (chs[k]) if (!shield[chs[k]] && ds[k] >= lo && ds[k] <= hi) exp_q[chs[k]].push_back(ds[k]);
  endtask

  task automatic ext_trigger();
    #7 trig = 1;
    repeat (3) @(posedge clk);
    #7 trig = 0;
  endtask

  task automatic drain();
    int idle = 0;
    while (idle < 200) begin
      @(posedge clk);
      idle = m_valid ? 0 : idle + 1;
    end
  endtask

  function automatic int pending();
    int s = 0;
    for (int c = 0; c < N; c++) s += exp_q[c].size();
    return s;
  endfunction

  initial begin
    int chs[$], ds[$];
    logic [31:0] r;
    int rej0;
    rst = 1; start_sig = 0; trig = 0; stop_sig = '0; cfg_wr = 0; cfg_addr = 0; cfg_wdata = 0;
    m_ready = 0;
    repeat (6) @(posedge clk);
    #2 rst = 0;
    wr(REG_CH_BASE, BASE);

    // --- external trigger: triggered pulses kept ---
    for (int p = 0; p < 4; p++) begin
      beam(150, chs, ds);
      repeat (5) @(posedge clk);
      expect_all(chs, ds, 0, 32'hFFFFF, '0);
      ext_trigger();
      n_kept_pulses++;
      repeat (20) @(posedge clk);
    end
    // --- untriggered pulse, closed by the next (triggered) pulse ---
    beam(40, chs, ds);
    repeat (20) @(posedge clk);
    beam(40, chs, ds);
    expect_all(chs, ds, 0, 32'hFFFFF, '0);
    ext_trigger();
    drain();
    chk("all triggered hits read out", pending() == 0);
    chk("untriggered hits discarded", n_disc == 40);

    // --- shielding and time window ---
    wr(REG_SHIELD, 32'h0000_F00F);
    wr(REG_WIN_LO, 300);
    wr(REG_WIN_HI, 700);
    rej0 = n_rej;
    beam(120, chs, ds);
    repeat (5) @(posedge clk);
    expect_all(chs, ds, 300, 700, 32'h0000_F00F);
    ext_trigger();
    drain();
    chk("shield/window hits kept", pending() == 0);
    chk("shield/window rejects", n_rej > rej0 + 20);
    wr(REG_SHIELD, 0);
    wr(REG_WIN_LO, 0);
    wr(REG_WIN_HI, 32'hFFFFF);

    // --- self-trigger mode with the self-check pulse as start ---
    wr(REG_SC_PER, 3000);
    wr(REG_CTRL, 32'h3);
    chk("front-end self-check on", fe_selfcheck);
    for (int p = 0; p < 3; p++) begin
      longint te;
      @(posedge dut.sc_start);
      te = $time;
      // the front-end answers with a test pulse on every channel,
      // channel c delayed by 100 + 7c bins
      for (int c = 0; c < N; c++) begin
        #(te + 3 + longint'(100 + 7 * c) * 10 - $time);
        pulse_stop(c);
        // start and stop are both seen at the first phase after their edge
        exp_q[c].push_back(100 + 7 * c);
      end
      n_self_pulses++;
    end
    wr(REG_CTRL, 32'h1);   // self-check off, stay in self-trigger mode
    drain();
    chk("self-check hits read out", pending() == 0);
    chk("self-check pulses", n_sc >= 3);
    wr(REG_CTRL, 32'h0);

    // --- DAC thresholds ---
    wr(REG_DAC_BASE + 8'd5, 32'h0000_1234);
    wr(REG_DAC_BASE + 8'd30, 32'h0000_0ABC);
    repeat (400) @(posedge clk);
    chk("two DAC frames", dac_frames.size() == 2);
    if (dac_frames.size() == 2)
      chk("DAC frame content", dac_frames[0] == {8'd5, 16'h1234} && dac_frames[1] == {8'd30, 16'h0ABC});
    rd(REG_DAC_BASE + 8'd30, r);
    chk("DAC readback", r == 32'h0ABC);

    // --- hit-buffer overflow -> error reset ---
    begin
      longint t0;
      @(posedge clk); #3;
      t0 = $time;
      start_sig = 1; #40 start_sig = 0;
      for (int i = 0; i < 520; i++) begin
        #(t0 + longint'(40 + 32 * i) * 10 - $time);
        pulse_stop(5);
      end
    end
    repeat (40) @(posedge clk);
    rd(REG_ERR_CNT, r);
    chk("overflow caused one error reset", r == 1);
    if (r == 1) n_ovf_rst++;
    drain();
    chk("nothing from the untriggered overflow pulse", pending() == 0);

    // --- error reset on request ---
    wr(REG_CTRL, 32'h4);
    repeat (40) @(posedge clk);
    rd(REG_ERR_CNT, r);
    chk("requested error reset", r == 2);
    if (r == 2) n_soft_rst++;

    // --- after the resets the TDC measures again ---
    beam(60, chs, ds);
    repeat (5) @(posedge clk);
    expect_all(chs, ds, 0, 32'hFFFFF, '0);
    ext_trigger();
    n_kept_pulses++;
    drain();
    chk("hits after error resets", pending() == 0);

    $display("mechanisms: words=%0d kept_pulses=%0d discarded=%0d rejected=%0d selfcheck=%0d dac=%0d backpressure=%0d overflow_rst=%0d soft_rst=%0d",
             n_words, n_kept_pulses, n_disc, n_rej, n_self_pulses, n_dac, n_bp, n_ovf_rst, n_soft_rst);
    chk("mechanism: kept",          n_kept_pulses > 0 && n_words > 0);
    chk("mechanism: discard",       n_disc > 0);
    chk("mechanism: reject",        n_rej > 0);
    chk("mechanism: self-check",    n_self_pulses > 0);
    chk("mechanism: DAC",           n_dac > 0);
    chk("mechanism: back-pressure", n_bp > 0);
    chk("mechanism: overflow reset", n_ovf_rst > 0);
    chk("mechanism: soft reset",    n_soft_rst > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
