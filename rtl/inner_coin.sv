// inner_coin: inner-station coincidence of one Big Wheel seed with up to
// N_CAND NSW segments, in a fixed latency of two bunch crossings.
//
// The candidates are split into N_LANE groups of RATIO (candidates
// 0..RATIO-1 to lane 0, the next RATIO to lane 1, ...). Each group goes to
// its own copy of the matching tables (lut_lane), which the 320 MHz clock
// lets it re-use RATIO times per bunch crossing; the selector then keeps the
// highest of the lane results and hands it back to the 40 MHz domain. With
// the default two lanes and 8:1 ratio, 16 candidates cost two copies of the
// tables instead of sixteen, and two bunch crossings of latency instead of
// sixteen.
//
// Interface and timing: seed_i and cands_i are taken as the outputs of
// 40 MHz registers, i.e. they change on a clk40 rising edge E(k) and hold
// until E(k+1). The result for them, pt_o (highest matched pT, 0 when none)
// and match_o (some valid candidate was matched), appears on E(k+2) and
// holds for one bunch crossing. angle_en_i selects position matching only
// (0) or position and angle matching (1). A seed with no valid candidate
// gets match_o = 0 and pt_o = 0, i.e. it is rejected. The mon_* outputs
// show lane 0's table output, running maximum and the selector's 320 MHz
// register, for debugging.
//
// The split into two identical LUTs run at 8x the bunch-crossing rate, the
// two-step highest-pT selection and the two-bunch-crossing latency follow
// the published scheme; the rest is described in the sub-blocks.
module inner_coin
  import nsl_pkg::*;
#(
  parameter int unsigned NCAND = N_CAND,
  parameter int unsigned RATIO = CLK_RATIO
) (
  input  logic      clk40,
  input  logic      rst40_n,
  input  logic      clk320,
  input  logic      rst320_n,
  input  logic      angle_en_i,
  input  bw_cand_t  seed_i,
  input  nsw_cand_t cands_i [NCAND],
  input  lut_wr_t   lut_wr_i,
  output pt_t       pt_o,
  output logic      match_o,
  // Monitoring of lane 0 (320 MHz domain): raw position-table output,
  // running highest pT, and the selector's fast-domain result.
  output pt_t       mon_lut_o,
  output pt_t       mon_high_o,
  output pt_t       mon_final_fast_o
);

  localparam int unsigned NL = NCAND / RATIO;

  logic [$clog2(RATIO)-1:0] phase;
  logic                     locked;

  phase_gen #(.RATIO(RATIO)) u_phase (
    .clk40    (clk40),
    .rst40_n  (rst40_n),
    .clk320   (clk320),
    .rst320_n (rst320_n),
    .phase_o  (phase),
    .first_o  (),
    .locked_o (locked)
  );

  pt_t  lane_lut [NL];
  pt_t  lane_high [NL];
  pt_t  lane_pt [NL];
  logic lane_match [NL];

  for (genvar l = 0; l < int'(NL); l++) begin : g_lane
    nsw_cand_t group [RATIO];
    for (genvar c = 0; c < int'(RATIO); c++) begin : g_c
      assign group[c] = cands_i[l*RATIO + c];
    end

    lut_lane #(.RATIO(RATIO)) u_lane (
      .clk40         (clk40),
      .clk320        (clk320),
      .rst320_n      (rst320_n),
      .phase_i       (phase),
      .locked_i      (locked),
      .angle_en_i    (angle_en_i),
      .seed_i        (seed_i),
      .cands_i       (group),
      .lut_wr_i      (lut_wr_i),
      .lut_out_o     (lane_lut[l]),
      .high_pt_o     (lane_high[l]),
      .group_pt_o    (lane_pt[l]),
      .group_match_o (lane_match[l])
    );
  end

  pt_t final_pt_fast;

  assign mon_lut_o        = lane_lut[0];
  assign mon_high_o       = lane_high[0];
  assign mon_final_fast_o = final_pt_fast;

  selector #(.N_IN(NL)) u_sel (
    .clk320          (clk320),
    .rst320_n        (rst320_n),
    .clk40           (clk40),
    .rst40_n         (rst40_n),
    .lane_pt_i       (lane_pt),
    .lane_match_i    (lane_match),
    .final_pt_fast_o (final_pt_fast),
    .pt_o            (pt_o),
    .match_o         (match_o)
  );

endmodule
