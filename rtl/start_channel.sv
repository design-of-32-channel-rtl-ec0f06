// start_channel: the start channel of the TDC.
//
// The start signal (beam arrival, or the self-check pulse) is digitised by
// the same 16-phase sampler and fine encoder as a stop channel, against the
// same coarse counter. Each detected start:
//   * gives start_evt for one clock, with start_ts its 20-bit time stamp
//     (start_ts bypasses the register in that cycle and holds it after);
//   * flips the epoch bit, which labels the hits that follow until the next
//     start (epoch also bypasses: it already has the new value in the
//     start_evt cycle);
//   * sets `started`, which stays high until reset.
// Stop channels subtract start_ts from their own time stamps. Latency from
// the input to start_evt equals that of a stop channel's hit, so the
// pipeline offset cancels. Having one start channel and 32 stop channels
// on one coarse counter follows the design description; the epoch bit and
// the subtraction are this design's choices.
module start_channel
  import tdc_pkg::*;
#(
  parameter int unsigned N_CLK = 8
) (
  input  logic [N_CLK-1:0]    clk_ph,
  input  logic                rst,
  input  logic                start_sig,
  input  logic [COARSE_W-1:0] coarse,
  output logic                start_evt,
  output time_t               start_ts,
  output logic                epoch,
  output logic                started
);

  logic [2*N_CLK-1:0] word;
  logic               hit;
  time_t              ts, ts_q;
  logic               epoch_q, started_q;

  phase_sampler #(.N_CLK(N_CLK)) u_smp (.clk_ph(clk_ph), .sig(start_sig), .word(word));

  fine_encoder #(.N_PH(2*N_CLK), .COARSE_W(COARSE_W)) u_enc (
    .clk(clk_ph[0]), .rst(rst), .word(word), .coarse(coarse), .hit(hit), .ts(ts));

  always_ff @(posedge clk_ph[0]) begin
    if (rst) begin
      ts_q      <= '0;
      epoch_q   <= 1'b0;
      started_q <= 1'b0;
    end else if (hit) begin
      ts_q      <= ts;
      epoch_q   <= ~epoch_q;
      started_q <= 1'b1;
    end
  end

  assign start_evt = hit;
  assign start_ts  = hit ? ts : ts_q;
  assign epoch     = epoch_q ^ hit;
  assign started   = started_q | hit;

endmodule
