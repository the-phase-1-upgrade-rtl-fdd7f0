// pt_recalc: first selection step, the highest pT of one LUT's candidates.
//
// Takes one LUT result per 320 MHz cycle. A candidate counts only if it and
// its seed are valid; otherwise it contributes pT 0. The running maximum
// (high_pt_o) restarts with the candidate tagged first_i; when the candidate
// tagged last_i arrives, the maximum of the whole group is stored in
// group_pt_o, with group_match_o saying whether any candidate was valid.
// Both hold until the next group ends, RATIO fast cycles later, which gives
// the next stage most of a bunch crossing to take them.
//
// Timing: group_pt_o changes on the clk320 edge that takes the last
// candidate's result.
//
// Choosing the highest pT among the group follows the published scheme;
// counting an invalid candidate as pT 0 is this design's choice.
module pt_recalc
  import nsl_pkg::*;
(
  input  logic clk320,
  input  logic rst320_n,
  input  logic in_stb_i,      // a candidate result is present this cycle
  input  logic in_valid_i,    // the candidate and its seed are valid
  input  pt_t  in_pt_i,
  input  logic first_i,
  input  logic last_i,
  output pt_t  high_pt_o,     // running maximum of the current group
  output pt_t  group_pt_o,    // maximum of the last complete group
  output logic group_match_o  // the last complete group held a valid candidate
);

  pt_t  cand_pt;
  pt_t  acc_pt;
  logic acc_match;
  logic match_q;

  assign cand_pt   = in_valid_i ? in_pt_i : '0;
  assign acc_pt    = first_i ? cand_pt    : pt_max(high_pt_o, cand_pt);
  assign acc_match = first_i ? in_valid_i : (match_q | in_valid_i);

  always_ff @(posedge clk320) begin
    if (!rst320_n) begin
      high_pt_o     <= '0;
      match_q       <= 1'b0;
      group_pt_o    <= '0;
      group_match_o <= 1'b0;
    end else if (in_stb_i) begin
      high_pt_o <= acc_pt;
      match_q   <= acc_match;
      if (last_i) begin
        group_pt_o    <= acc_pt;
        group_match_o <= acc_match;
      end
    end
  end

endmodule
