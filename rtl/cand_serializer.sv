// cand_serializer: the 8-to-1 hand-over of inner candidates to one LUT.
//
// A group of RATIO NSW candidates, held steady for one bunch crossing in the
// 40 MHz domain together with the seed they belong to, is read out one per
// 320 MHz cycle: the candidate whose index equals the fast phase is
// registered on each clk320 edge. Candidate k of the group (k = 0 .. RATIO-1)
// therefore appears on the output after fast edge k+1 counted from the clk40
// edge that launched the group, with the seed fields and the tags first_o
// (k = 0) and last_o (k = RATIO-1) alongside, so that downstream stages need
// nothing from the 40 MHz domain. The last candidate is taken on the fast
// edge that coincides with the next clk40 edge, so it still sees the old
// group.
//
// Serial processing of the candidates in index order, eight per bunch
// crossing, follows the published scheme; the register placement and tags
// are this design's choice.
module cand_serializer
  import nsl_pkg::*;
#(
  parameter int unsigned RATIO = CLK_RATIO
) (
  input  logic                     clk320,
  input  logic                     rst320_n,
  input  logic [$clog2(RATIO)-1:0] phase_i,
  input  logic                     locked_i,
  input  bw_cand_t                 seed_i,
  input  nsw_cand_t                cands_i [RATIO],
  output bw_cand_t                 seed_o,
  output nsw_cand_t                cand_o,
  output logic [$clog2(RATIO)-1:0] idx_o,
  output logic                     first_o,
  output logic                     last_o,
  output logic                     stb_o
);

  always_ff @(posedge clk320) begin
    if (!rst320_n) begin
      seed_o  <= '0;
      cand_o  <= '0;
      idx_o   <= '0;
      first_o <= 1'b0;
      last_o  <= 1'b0;
      stb_o   <= 1'b0;
    end else begin
      seed_o  <= seed_i;
      cand_o  <= cands_i[phase_i];
      idx_o   <= phase_i;
      first_o <= locked_i && (phase_i == '0);
      last_o  <= locked_i && (phase_i == $clog2(RATIO)'(RATIO - 1));
      stb_o   <= locked_i;
    end
  end

endmodule
