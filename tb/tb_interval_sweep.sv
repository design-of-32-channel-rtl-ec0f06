// tb_interval_sweep: the single-channel timing test run through the whole
// design (tdc_top at its default size). A periodic start and a stop on
// Stop[1] are sent with the interval stepped 27 times by 200 ps from
// 100 ns, each interval repeated 16 times at random phases with respect to
// the sampling clocks. Every measured time must equal the exact
// quantisation of the two edges, ceil(t_stop / bin) - ceil(t_start / bin),
// and the mean of each interval must lie within half a bin of the true
// interval; the straight-line fit of mean against interval must have a
// slope within 1 % of one.
// Time unit of this testbench: 1 tick = 6.25 ps (period 800, bin 50), so
// that 200 ps steps are whole ticks.
module tb_interval_sweep;
  import tdc_pkg::*;
  localparam int BIN = 50;
  localparam int NSTEP = 27;
  localparam int NREP = 16;
  logic [7:0]  clk_ph;
  logic        clk, rst, start_sig, trig;
  logic [31:0] stop_sig;
  logic        m_valid, m_ready;
  logic [63:0] m_data;
  logic        cfg_wr;
  logic [7:0]  cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic        fe_selfcheck, dac_csn, dac_sclk, dac_sdi;
  int checks = 0, failures = 0;
  int exp_q[$];
  real sum [NSTEP];
  int  step_q[$];

  phase_clock_model #(.PERIOD(800), .STEP(50)) u_clk (.clk_ph(clk_ph));
  assign clk = clk_ph[0];

  tdc_top dut (.clk_ph(clk_ph), .rst(rst), .start_sig(start_sig), .trig(trig), .stop_sig(stop_sig),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data), .cfg_wr(cfg_wr), .cfg_addr(cfg_addr),
    .cfg_wdata(cfg_wdata), .cfg_rdata(cfg_rdata), .fe_selfcheck(fe_selfcheck),
    .dac_csn(dac_csn), .dac_sclk(dac_sclk), .dac_sdi(dac_sdi));

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign m_ready = 1'b1;
  always @(negedge clk) begin
    if (!rst && m_valid) begin
      int e, s;
      checks++;
      e = (exp_q.size() > 0) ? exp_q.pop_front() : -1;
      s = (step_q.size() > 0) ? step_q.pop_front() : 0;
      if (m_data[60:54] !== 7'd0 || m_data[19:0] !== 20'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL time %0d exp %0d", m_data[19:0], e);
      end
      sum[s] += real'(m_data[19:0]);
    end
  end

  function automatic longint ceil_bin(longint t);
    return (t + BIN - 1) / BIN;
  endfunction

  initial begin
    real sx = 0, sy = 0, sxx = 0, sxy = 0, slope;
    rst = 1; start_sig = 0; trig = 0; stop_sig = '0; cfg_wr = 0; cfg_addr = 0; cfg_wdata = 0;
    foreach (sum[i]) sum[i] = 0.0;
    repeat (4) @(posedge clk);
    #2 rst = 0;
    // self-trigger mode: every start keeps its hits
    @(posedge clk); #2 cfg_addr = REG_CTRL; cfg_wdata = 1; cfg_wr = 1;
    @(posedge clk); #2 cfg_wr = 0;
    for (int s = 0; s < NSTEP; s++) begin
      longint dt;
      dt = 16000 + 32 * s;   // 100 ns + s x 200 ps
      for (int r = 0; r < NREP; r++) begin
        longint ta, tb;
        int off;
        @(posedge clk);
        // random phase, never on a sampling edge for start or stop
        do off = 1 + ($urandom % 798);
        while (off % BIN == 0 || (off + dt) % BIN == 0);
        ta = $time + off;
        tb = ta + dt;
        exp_q.push_back(int'(ceil_bin(tb) - ceil_bin(ta)));
        step_q.push_back(s);
        #(ta - $time) start_sig = 1;
        #200 start_sig = 0;
        #(tb - $time) stop_sig[0] = 1;
        #200 stop_sig[0] = 0;
        repeat (4) @(posedge clk);
      end
    end
    repeat (50) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d measurements missing", exp_q.size()); end
    for (int s = 0; s < NSTEP; s++) begin
      real x, y;
      x = (16000.0 + 32.0 * s) / BIN;     // true interval in bins
      y = sum[s] / NREP;                  // mean measured
      checks++;
      if (y - x > 0.5 || x - y > 0.5) begin failures++; $display("FAIL step %0d mean %f true %f", s, y, x); end
      sx += x; sy += y; sxx += x * x; sxy += x * y;
    end
    slope = (NSTEP * sxy - sx * sy) / (NSTEP * sxx - sx * sx);
    $display("sweep: %0d intervals x %0d, fitted slope %f", NSTEP, NREP, slope);
    checks++;
    if (slope < 0.99 || slope > 1.01) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
