// fine_encoder: turns the 16-phase sample word of a channel into a time stamp.
//
// The bits word[0..15] are the input in time order across one 5 ns clock
// period; prev15 (the last sample of the previous word, kept inside) makes
// an edge that falls exactly on a period boundary visible. The encoder finds
// the first 0-to-1 transition and outputs its position as the 4-bit fine
// count, joined with the coarse count as ts = {coarse, fine}. One registered
// stage: hit/ts appear one clock after word. Only the first rising edge in
// a 5 ns period is reported (a channel's dead time is thus one period).
//
// That a 4-bit fine count is encoded from the 16 flip-flops follows the
// design description; leading-edge detection and the registered output are
// this design's choice. The coarse value is the one of the cycle the word is
// encoded in: the constant offset is the same for start and stop channels
// and cancels in their difference.
module fine_encoder #(
  parameter int unsigned N_PH     = 16,
  parameter int unsigned COARSE_W = 16
) (
  input  logic                              clk,
  input  logic                              rst,
  input  logic [N_PH-1:0]                   word,
  input  logic [COARSE_W-1:0]               coarse,
  output logic                              hit,
  output logic [COARSE_W+$clog2(N_PH)-1:0]  ts
);

  localparam int unsigned FW = $clog2(N_PH);

  logic          prev15;
  logic [N_PH:0] seq;      // seq[0] = previous sample, seq[k+1] = word[k]
  logic          edge_found;
  logic [FW-1:0] fine;

  assign seq = {word, prev15};

  always_comb begin
    edge_found = 1'b0;
    fine       = '0;
    for (int k = N_PH - 1; k >= 0; k--) begin
      if (!seq[k] && seq[k+1]) begin
        edge_found = 1'b1;
        fine       = FW'(k);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev15 <= 1'b1;   // no edge can be seen in the first word after reset
      hit    <= 1'b0;
      ts     <= '0;
    end else begin
      prev15 <= word[N_PH-1];
      hit    <= edge_found;
      ts     <= {coarse, fine};
    end
  end

endmodule
