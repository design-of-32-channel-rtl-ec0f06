// tdc_top: the complete single-FPGA design of the 32-channel TDC for the
// muSR spectrometer.
//
// Data path: start + 32 stops + trigger -> tdc_core (16-phase sampling,
// 312.5 ps bins, 327.68 us range, 512-deep hit-buffers, trigger decision,
// time tag, readout FIFOs) -> channel_coding (7-bit channel number,
// round robin) -> data_packing (64-bit word) -> output FIFO -> m_* stream
// towards the Gigabit Ethernet MAC (not part of this RTL).
// Control path: the cfg_* register port (from the MAC side) -> config_regs
// -> channel shielding, time window, trigger mode to the TDC; self-check
// and DAC thresholds to selfcheck_dac_ctrl and from there to the front-end;
// error_detect resets the TDC logic on a lost hit or on request.
//
// Clocks: clk_ph[0..7] are the eight 200 MHz clocks, clk_ph[i] delayed by
// i x 22.5 degrees (from two PLLs outside this RTL); everything except the
// sampling flip-flops runs on clk_ph[0]. rst is synchronous to clk_ph[0].
// The self-check pulse is ORed into the start input. The m_* stream is
// valid/ready: a word moves on a clock edge where both are high; m_data is
// valid while m_valid is high (output FIFO head).
// The block structure follows the design description; the interfaces, the
// FIFO depths and the register map are this design's choices.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH       = 32,
  parameter int unsigned HB_DEPTH   = 512,
  parameter int unsigned RO_DEPTH   = 64,
  parameter int unsigned OUT_DEPTH  = 1024,
  parameter int unsigned TAG_DIV    = 200_000_000,
  parameter int unsigned RST_CYCLES = 16
) (
  input  logic [NUM_CLK-1:0] clk_ph,
  input  logic              rst,
  // detector side
  input  logic              start_sig,
  input  logic              trig,
  input  logic [N_CH-1:0]   stop_sig,
  // data stream to the Ethernet MAC
  output logic              m_valid,
  input  logic              m_ready,
  output logic [WORD_W-1:0] m_data,
  // configuration port from the Ethernet MAC
  input  logic              cfg_wr,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // front-end electronics
  output logic              fe_selfcheck,
  output logic              dac_csn,
  output logic              dac_sclk,
  output logic              dac_sdi
);

  localparam int unsigned DAC_W = 16;

  logic              clk;
  logic              tdc_rst;
  // configuration
  logic              self_mode, sc_en, soft_err;
  logic [N_CH-1:0]   shield;
  time_t             win_lo, win_hi;
  logic [31:0]       sc_period;
  logic [CHID_W-1:0] ch_base;
  logic [DAC_W-1:0]  dac_thr [N_CH];
  logic              dac_wr;
  logic [7:0]        dac_ch;
  logic [15:0]       err_count;
  // TDC
  logic              sc_start;
  logic [N_CH-1:0]   rd_en, rd_empty;
  rec_t              rd_data [N_CH];
  logic              overflow;
  // readout chain
  logic              cc_valid, cc_ready;
  logic [CHID_W-1:0] cc_ch;
  rec_t              cc_rec;
  logic              pk_valid, pk_ready;
  word_t             pk_word;
  logic              of_full, of_empty;

  assign clk = clk_ph[0];

  config_regs #(.N_CH(N_CH), .DAC_W(DAC_W)) u_cfg (
    .clk(clk), .rst(rst), .wr_en(cfg_wr), .addr(cfg_addr), .wdata(cfg_wdata),
    .rdata(cfg_rdata), .self_mode(self_mode), .sc_en(sc_en), .soft_err(soft_err),
    .shield(shield), .win_lo(win_lo), .win_hi(win_hi), .sc_period(sc_period),
    .ch_base(ch_base), .dac_thr(dac_thr), .dac_wr(dac_wr), .dac_ch(dac_ch),
    .err_count(err_count));

  error_detect #(.RST_CYCLES(RST_CYCLES)) u_err (
    .clk(clk), .rst(rst), .err_in(overflow || soft_err),
    .tdc_rst(tdc_rst), .err_count(err_count));

  selfcheck_dac_ctrl #(.N_CH(N_CH), .DAC_W(DAC_W)) u_fe (
    .clk(clk), .rst(rst), .sc_en(sc_en), .sc_period(sc_period),
    .sc_start(sc_start), .fe_selfcheck(fe_selfcheck),
    .dac_thr(dac_thr), .dac_wr(dac_wr), .dac_ch(dac_ch),
    .dac_csn(dac_csn), .dac_sclk(dac_sclk), .dac_sdi(dac_sdi), .dac_busy());

  tdc_core #(.N_CH(N_CH), .N_CLK(NUM_CLK), .HB_DEPTH(HB_DEPTH), .RO_DEPTH(RO_DEPTH),
             .TAG_DIV(TAG_DIV)) u_core (
    .clk_ph(clk_ph), .rst(tdc_rst), .start_sig(start_sig || sc_start), .trig(trig),
    .stop_sig(stop_sig), .shield(shield), .win_lo(win_lo), .win_hi(win_hi),
    .self_mode(self_mode), .rd_en(rd_en), .rd_data(rd_data), .rd_empty(rd_empty),
    .overflow(overflow), .start_evt(), .ext_trig(), .hit_acc(), .hit_rej(),
    .discard());

  channel_coding #(.N_CH(N_CH)) u_cc (
    .clk(clk), .rst(tdc_rst), .ch_base(ch_base), .rd_data(rd_data),
    .rd_empty(rd_empty), .rd_en(rd_en), .out_valid(cc_valid), .out_ready(cc_ready),
    .out_ch(cc_ch), .out_rec(cc_rec));

  data_packing u_pack (
    .clk(clk), .rst(tdc_rst), .in_valid(cc_valid), .in_ready(cc_ready),
    .in_ch(cc_ch), .in_rec(cc_rec), .out_valid(pk_valid), .out_ready(pk_ready),
    .out_word(pk_word));

  assign pk_ready = !of_full;

  sync_fifo #(.WIDTH(WORD_W), .DEPTH(OUT_DEPTH)) u_out (
    .clk(clk), .rst(rst), .wr_en(pk_valid), .din(pk_word), .full(of_full),
    .rd_en(m_ready), .dout(m_data), .empty(of_empty), .count());

  assign m_valid = !of_empty;

endmodule
