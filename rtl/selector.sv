// selector: second selection step and return to the 40 MHz domain.
//
// Compares the group results of the N_IN lanes of the LUT pair and keeps the
// highest pT (final_pt_fast_o, registered on clk320). On each rising edge of
// clk40 that value, with the flag saying whether any lane found a valid
// candidate, is registered as the bunch-crossing result pt_o / match_o.
//
// Timing: the lane results change once per bunch crossing, on the fast edge
// after the last candidate of a group; the fast register takes them one
// fast cycle later and keeps them well before the clk40 edge that samples
// them, so the 40 MHz capture is a single-cycle path between related clocks.
//
// The highest-of-two choice and the hand-back on the 40 MHz clock follow the
// published scheme; the register placement is this design's choice.
module selector
  import nsl_pkg::*;
#(
  parameter int unsigned N_IN = N_LANE
) (
  input  logic clk320,
  input  logic rst320_n,
  input  logic clk40,
  input  logic rst40_n,
  input  pt_t  lane_pt_i    [N_IN],
  input  logic lane_match_i [N_IN],
  output pt_t  final_pt_fast_o,
  output pt_t  pt_o,
  output logic match_o
);

  pt_t  best_pt;
  logic any_match;
  logic match_fast_q;

  always_comb begin
    best_pt   = '0;
    any_match = 1'b0;
    for (int i = 0; i < int'(N_IN); i++) begin
      best_pt   = pt_max(best_pt, lane_pt_i[i]);
      any_match = any_match | lane_match_i[i];
    end
  end

  always_ff @(posedge clk320) begin
    if (!rst320_n) begin
      final_pt_fast_o <= '0;
      match_fast_q    <= 1'b0;
    end else begin
      final_pt_fast_o <= best_pt;
      match_fast_q    <= any_match;
    end
  end

  always_ff @(posedge clk40) begin
    if (!rst40_n) begin
      pt_o    <= '0;
      match_o <= 1'b0;
    end else begin
      pt_o    <= final_pt_fast_o;
      match_o <= match_fast_q;
    end
  end

endmodule
