// config_regs: run-time configuration of the TDC and of the front-end
// control, written by the data acquisition system over the network.
//
// 32-bit registers on a simple synchronous port: a write takes effect on
// the clock edge where wr_en is high; rdata shows the register at `addr`
// combinationally. Map (see tdc_pkg):
//   0x00 CTRL    [0] self-trigger mode, [1] self-check on,
//                [2] write 1: request an error reset (reads 0)
//   0x01 SHIELD  bit i = 1 shields channel Stop[i+1]
//   0x02 WIN_LO, 0x03 WIN_HI  time window, 20 bits, inclusive
//   0x04 SC_PER  self-check pulse period in 5 ns clocks
//   0x05 CH_BASE channel number of Stop[1] (7 bits)
//   0x06 ERR_CNT read-only count of error resets
//   0x20+i       DAC threshold of Stop[i+1] (16 bits); a write also pulses
//                dac_wr with dac_ch = i
// Reset: all channels enabled, full-range window, external trigger,
// self-check off, period 2^20 clocks, thresholds 0. Channel shielding,
// time window and the other settings are named by the design description;
// the map and the reset values are this design's choices.
module config_regs
  import tdc_pkg::*;
#(
  parameter int unsigned N_CH  = 32,
  parameter int unsigned DAC_W = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              wr_en,
  input  logic [7:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  // settings
  output logic              self_mode,
  output logic              sc_en,
  output logic              soft_err,
  output logic [N_CH-1:0]   shield,
  output time_t             win_lo,
  output time_t             win_hi,
  output logic [31:0]       sc_period,
  output logic [CHID_W-1:0] ch_base,
  output logic [DAC_W-1:0]  dac_thr [N_CH],
  output logic              dac_wr,
  output logic [7:0]        dac_ch,
  // status
  input  logic [15:0]       err_count
);

  localparam int unsigned CIW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic       dac_sel;
  logic [7:0] dac_idx;

  assign dac_idx = addr - REG_DAC_BASE;
  assign dac_sel = (addr >= REG_DAC_BASE) && (dac_idx < 8'(N_CH));

  always_ff @(posedge clk) begin
    if (rst) begin
      self_mode <= 1'b0;
      sc_en     <= 1'b0;
      soft_err  <= 1'b0;
      shield    <= '0;
      win_lo    <= '0;
      win_hi    <= '1;
      sc_period <= 32'd1 << 20;
      ch_base   <= '0;
      dac_wr    <= 1'b0;
      dac_ch    <= '0;
      for (int i = 0; i < N_CH; i++) dac_thr[i] <= '0;
    end else begin
      soft_err <= 1'b0;
      dac_wr   <= 1'b0;
      if (wr_en) begin
        case (addr)
          REG_CTRL: begin
            self_mode <= wdata[0];
            sc_en     <= wdata[1];
            soft_err  <= wdata[2];
          end
          REG_SHIELD:  shield    <= wdata[N_CH-1:0];
          REG_WIN_LO:  win_lo    <= wdata[TIME_W-1:0];
          REG_WIN_HI:  win_hi    <= wdata[TIME_W-1:0];
          REG_SC_PER:  sc_period <= wdata;
          REG_CH_BASE: ch_base   <= wdata[CHID_W-1:0];
          default: begin
            if (dac_sel) begin
              dac_thr[dac_idx[CIW-1:0]] <= wdata[DAC_W-1:0];
              dac_wr <= 1'b1;
              dac_ch <= dac_idx;
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    case (addr)
      REG_CTRL:    rdata = {30'd0, sc_en, self_mode};
      REG_SHIELD:  rdata = 32'(shield);
      REG_WIN_LO:  rdata = 32'(win_lo);
      REG_WIN_HI:  rdata = 32'(win_hi);
      REG_SC_PER:  rdata = sc_period;
      REG_CH_BASE: rdata = 32'(ch_base);
      REG_ERR_CNT: rdata = 32'(err_count);
      default:     if (dac_sel) rdata = 32'(dac_thr[dac_idx[CIW-1:0]]);
    endcase
  end

endmodule
