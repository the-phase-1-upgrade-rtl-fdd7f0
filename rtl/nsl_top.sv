// nsl_top: trigger datapath of the New Sector Logic for one Big Wheel seed.
//
// A Big Wheel seed (position plus the track deviations dR, dphi measured
// between the outer and inner Big Wheel stations) first gets its pT from the
// BW local coincidence table (bw_coin). The seed is then confirmed by the
// inner station: up to N_CAND NSW segments found around it are matched in
// position (deta, dphi) and, optionally, in angle (deta, dtheta), and the
// highest pT that survives the matching becomes the seed's final pT
// (inner_coin). A seed with no matching segment is rejected: this is what
// removes fake triggers from particles that never crossed the inner
// station, and the tables reject low-pT tracks that only mimic a high pT in
// the Big Wheel.
//
// Interface (all 40 MHz domain except clk320/rst320_n):
//   seed_i, nsw_i   one bunch crossing's seed and its NSW segments, both
//                   sampled on the same clk40 rising edge E(k);
//   angle_en_i      0: position matching only, 1: position and angle;
//   lut_wr_i        table loading (BW, position, angle tables);
//   l1_o            final candidate (valid = seed valid and matched, roi,
//                   final pT), changes on E(k+2);
//   bw_pt_o         the BW-only pT of the same seed, aligned with l1_o.
// Latency: the BW table's registered read happens on the sampling edge
// E(k) itself, and its output register (with the NSW segment register next
// to it) is the 40 MHz launch register of the inner coincidence, which
// takes two bunch crossings: l1_o changes on E(k+2).
//
// Receiving the seed and segments (G-Link and multi-gigabit links, their
// decoding), the other inner detectors, the output link and the board
// control path are outside this module; their data enter and leave through
// these ports. The split of the chain into BW table then inner coincidence
// follows the published scheme; the port set and the alignment registers
// are this design's choice.
module nsl_top
  import nsl_pkg::*;
(
  input  logic      clk40,
  input  logic      rst40_n,
  input  logic      clk320,
  input  logic      rst320_n,
  input  bw_seed_t  seed_i,
  input  nsw_cand_t nsw_i [N_CAND],
  input  logic      angle_en_i,
  input  lut_wr_t   lut_wr_i,
  output bw_cand_t  l1_o,
  output pt_t       bw_pt_o
);

  // ---- BW local coincidence: seed -> (roi, pT), read on the sampling edge -----
  bw_cand_t bw_cand;

  bw_coin u_bw (
    .clk40    (clk40),
    .rst40_n  (rst40_n),
    .seed_i   (seed_i),
    .lut_wr_i (lut_wr_i),
    .cand_o   (bw_cand)
  );

  // NSW segments wait one clk40 so they reach the inner coincidence with
  // the seed's pT.
  nsw_cand_t nsw_q [N_CAND];

  always_ff @(posedge clk40) begin
    for (int i = 0; i < int'(N_CAND); i++) begin
      if (!rst40_n) nsw_q[i] <= '0;
      else          nsw_q[i] <= nsw_i[i];
    end
  end

  // ---- inner coincidence: two clk40 -----------------------------------------
  pt_t  inner_pt;
  logic inner_match;

  inner_coin u_inner (
    .clk40      (clk40),
    .rst40_n    (rst40_n),
    .clk320     (clk320),
    .rst320_n   (rst320_n),
    .angle_en_i (angle_en_i),
    .seed_i     (bw_cand),
    .cands_i    (nsw_q),
    .lut_wr_i   (lut_wr_i),
    .pt_o       (inner_pt),
    .match_o    (inner_match),
    .mon_lut_o        (),
    .mon_high_o       (),
    .mon_final_fast_o ()
  );

  // Seed fields follow the inner coincidence through its two clk40 stages.
  bw_cand_t seed_d1, seed_d2;

  always_ff @(posedge clk40) begin
    if (!rst40_n) begin
      seed_d1 <= '0;
      seed_d2 <= '0;
    end else begin
      seed_d1 <= bw_cand;
      seed_d2 <= seed_d1;
    end
  end

  always_comb begin
    l1_o.valid = seed_d2.valid && inner_match;
    l1_o.roi   = seed_d2.roi;
    l1_o.pt    = l1_o.valid ? inner_pt : '0;
  end

  assign bw_pt_o = seed_d2.pt;

endmodule
