// tb_config_regs: checks reset values, write and read-back of every
// register, the outputs they drive, the self-clearing error-reset request,
// the DAC write pulse and the read-only error count.
module tb_config_regs;
  import tdc_pkg::*;
  logic clk = 0, rst, wr_en;
  logic [7:0] addr;
  logic [31:0] wdata, rdata;
  logic self_mode, sc_en, soft_err, dac_wr;
  logic [31:0] shield, sc_period;
  time_t win_lo, win_hi;
  logic [6:0] ch_base;
  logic [15:0] dac_thr [32];
  logic [7:0] dac_ch;
  int checks = 0, failures = 0;

  config_regs dut (.clk(clk), .rst(rst), .wr_en(wr_en), .addr(addr), .wdata(wdata), .rdata(rdata),
    .self_mode(self_mode), .sc_en(sc_en), .soft_err(soft_err), .shield(shield), .win_lo(win_lo),
    .win_hi(win_hi), .sc_period(sc_period), .ch_base(ch_base), .dac_thr(dac_thr), .dac_wr(dac_wr),
    .dac_ch(dac_ch), .err_count(16'd77));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    addr = a; wdata = d; wr_en = 1;
    @(posedge clk); #1 wr_en = 0;
  endtask

  initial begin
    logic [15:0] thr [32];
    rst = 1; wr_en = 0; addr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    chk("reset window", win_lo == 0 && win_hi == 20'hFFFFF && shield == 0 && !self_mode && !sc_en);
    wr(REG_CTRL, 32'h7);
    chk("ctrl", self_mode && sc_en && soft_err);
    @(posedge clk); #1;
    chk("soft_err pulse", !soft_err);
    addr = REG_CTRL; #1 chk("ctrl read", rdata == 32'h3);
    wr(REG_SHIELD, 32'hDEAD_BEEF); chk("shield", shield == 32'hDEAD_BEEF);
    addr = REG_SHIELD; #1 chk("shield read", rdata == 32'hDEAD_BEEF);
    wr(REG_WIN_LO, 32'h0001_2345); chk("win_lo", win_lo == 20'h12345);
    wr(REG_WIN_HI, 32'hFFF5_4321); chk("win_hi", win_hi == 20'h54321);
    addr = REG_WIN_HI; #1 chk("win_hi read", rdata == 32'h54321);
    wr(REG_SC_PER, 32'd12345); chk("period", sc_period == 32'd12345);
    wr(REG_CH_BASE, 32'd96); chk("ch_base", ch_base == 7'd96);
    addr = REG_ERR_CNT; #1 chk("err count", rdata == 32'd77);
    for (int i = 0; i < 32; i++) begin
      thr[i] = 16'($urandom);
      wr(REG_DAC_BASE + 8'(i), {16'hFFFF, thr[i]});
      chk("dac pulse", dac_wr && dac_ch == 8'(i));
    end
    @(posedge clk); #1 chk("dac pulse ends", !dac_wr);
    for (int i = 0; i < 32; i++) begin
      addr = REG_DAC_BASE + 8'(i); #1;
      chk("dac read", rdata == 32'(thr[i]) && dac_thr[i] == thr[i]);
    end
    addr = 8'h7F; #1 chk("unmapped reads 0", rdata == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
