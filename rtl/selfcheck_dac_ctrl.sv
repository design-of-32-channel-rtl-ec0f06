// selfcheck_dac_ctrl: control of the front-end electronics.
//
// Self-check: while sc_en is high, fe_selfcheck tells the front-end to
// emit its periodic test pulses, and sc_start pulses high for PULSE_CYC
// clocks once every sc_period clocks (first pulse sc_period clocks after
// sc_en rises). sc_start is used as the TDC start, the front-end's test
// pulses arrive as stops, so the whole chain can be tested, and each
// channel's delay calibrated, without detectors.
//
// DAC thresholds: a write of channel i's threshold (dac_wr, dac_ch) marks
// that channel pending. When the serial port is idle the lowest pending
// channel is sent as a 24-bit frame {8-bit channel, DAC_W=16-bit value},
// MSB first: dac_csn low for the frame, dac_sdi changes after the falling
// edge of dac_sclk and is stable at its rising edge; dac_sclk is clk
// divided by 2*SCLK_DIV. dac_busy is high while a frame is sent.
// The self-check scheme follows the design description; the pulse length
// and the whole DAC serial format are this design's choices (the
// front-end's DAC interface is not specified).
module selfcheck_dac_ctrl #(
  parameter int unsigned N_CH      = 32,
  parameter int unsigned DAC_W     = 16,
  parameter int unsigned SCLK_DIV  = 4,
  parameter int unsigned PULSE_CYC = 4
) (
  input  logic             clk,
  input  logic             rst,
  // self-check
  input  logic             sc_en,
  input  logic [31:0]      sc_period,
  output logic             sc_start,
  output logic             fe_selfcheck,
  // DAC
  input  logic [DAC_W-1:0] dac_thr [N_CH],
  input  logic             dac_wr,
  input  logic [7:0]       dac_ch,
  output logic             dac_csn,
  output logic             dac_sclk,
  output logic             dac_sdi,
  output logic             dac_busy
);

  localparam int unsigned FRAME_W = 8 + DAC_W;
  localparam int unsigned DW      = (SCLK_DIV > 1) ? $clog2(SCLK_DIV) : 1;
  localparam int unsigned PCW     = $clog2(PULSE_CYC + 1);
  localparam int unsigned BCW     = $clog2(FRAME_W + 1);
  localparam int unsigned CIW     = (N_CH > 1) ? $clog2(N_CH) : 1;

  // ---------------- self-check pulse ----------------
  logic [31:0]    per_cnt;
  logic [PCW-1:0] pw_cnt;

  always_ff @(posedge clk) begin
    if (rst || !sc_en) begin
      per_cnt <= '0;
      pw_cnt  <= '0;
    end else begin
      if (per_cnt + 32'd1 >= sc_period) begin
        per_cnt <= '0;
        pw_cnt  <= PCW'(PULSE_CYC);
      end else begin
        per_cnt <= per_cnt + 32'd1;
        if (pw_cnt != '0) pw_cnt <= pw_cnt - 1'b1;
      end
    end
  end

  assign sc_start     = (pw_cnt != '0);
  assign fe_selfcheck = sc_en;

  // ---------------- DAC serial port ----------------
  logic [N_CH-1:0]    pending;
  logic [FRAME_W-1:0] sh;
  logic [BCW-1:0]     bits_left;
  logic [DW-1:0]      div;
  logic               pick_any;
  logic [CIW-1:0]     pick;

  always_comb begin
    pick_any = 1'b0;
    pick     = '0;
    for (int i = N_CH - 1; i >= 0; i--) begin
      if (pending[i]) begin
        pick_any = 1'b1;
        pick     = CIW'(i);
      end
    end
  end

  assign dac_busy = (bits_left != '0);
  assign dac_csn  = !dac_busy;
  assign dac_sdi  = sh[FRAME_W-1];

  always_ff @(posedge clk) begin
    if (rst) begin
      pending   <= '0;
      sh        <= '0;
      bits_left <= '0;
      div       <= '0;
      dac_sclk  <= 1'b0;
    end else begin
      if (!dac_busy) begin
        dac_sclk <= 1'b0;
        div      <= '0;
        if (pick_any) begin
          sh            <= {8'(pick), dac_thr[pick]};
          bits_left     <= BCW'(FRAME_W);
          pending[pick] <= 1'b0;
        end
      end else if (div == DW'(SCLK_DIV - 1)) begin
        div      <= '0;
        dac_sclk <= !dac_sclk;
        if (dac_sclk) begin            // falling edge: next bit
          sh        <= sh << 1;
          bits_left <= bits_left - 1'b1;
        end
      end else begin
        div <= div + 1'b1;
      end
      if (dac_wr) pending[dac_ch[CIW-1:0]] <= 1'b1;
    end
  end

endmodule
