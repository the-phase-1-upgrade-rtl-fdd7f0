// lut_lane: one half of the LUT pair, matching up to RATIO inner candidates
// with a Big Wheel seed in one bunch crossing.
//
// Pipeline, all on clk320 after the serializer:
//   1. cand_serializer hands candidate k of the group to the LUT in fast
//      cycle k (8-to-1 selection);
//   2. two block-RAM tables are read with the candidate and the seed
//      position: the position-matching table with (roi, deta, dphi) and the
//      angle-matching table with (roi, deta, dtheta). The candidate's pT is
//      the position result, or, when angle_en_i is set, the lower of the two,
//      so that a candidate must pass both matchings to keep its pT;
//   3. pt_recalc keeps the highest candidate pT of the group.
// The group result is ready RATIO+2 fast cycles after the clk40 edge that
// launched the group and holds for RATIO fast cycles.
//
// Both tables are loaded through lut_wr_i (sel LUT_POS or LUT_ANG) on clk40.
// The two lanes of the pair receive the same writes, so their contents are
// identical, as the published scheme requires.
//
// The serial re-use of one LUT at 320 MHz, the (deta, dphi) and
// (deta, dtheta) tables and the highest-pT selection follow the design
// description. How the two matchings combine (minimum of the two pT codes),
// the table address order and the mode input are this design's choices.
module lut_lane
  import nsl_pkg::*;
#(
  parameter int unsigned RATIO = CLK_RATIO
) (
  input  logic      clk40,
  input  logic      clk320,
  input  logic      rst320_n,
  input  logic [$clog2(RATIO)-1:0] phase_i,
  input  logic      locked_i,
  input  logic      angle_en_i,
  input  bw_cand_t  seed_i,
  input  nsw_cand_t cands_i [RATIO],
  input  lut_wr_t   lut_wr_i,
  output pt_t       lut_out_o,     // raw position-table output, for monitoring
  output pt_t       high_pt_o,
  output pt_t       group_pt_o,
  output logic      group_match_o
);

  bw_cand_t                 s_seed;
  nsw_cand_t                s_cand;
  logic [$clog2(RATIO)-1:0] s_idx;
  logic                     s_first, s_last, s_stb;

  cand_serializer #(.RATIO(RATIO)) u_ser (
    .clk320   (clk320),
    .rst320_n (rst320_n),
    .phase_i  (phase_i),
    .locked_i (locked_i),
    .seed_i   (seed_i),
    .cands_i  (cands_i),
    .seed_o   (s_seed),
    .cand_o   (s_cand),
    .idx_o    (s_idx),
    .first_o  (s_first),
    .last_o   (s_last),
    .stb_o    (s_stb)
  );

  // ---- LUT stage -------------------------------------------------------------
  pt_t pos_pt, ang_pt;

  lut_ram #(.ADDR_W(POS_ADDR_W), .DATA_W(PT_W)) u_pos_lut (
    .wclk  (clk40),
    .we    (lut_wr_i.we && lut_wr_i.sel == LUT_POS),
    .waddr (lut_wr_i.addr[POS_ADDR_W-1:0]),
    .wdata (lut_wr_i.data),
    .rclk  (clk320),
    .raddr ({s_seed.roi, s_cand.deta, s_cand.dphi}),
    .rdata (pos_pt)
  );

  lut_ram #(.ADDR_W(ANG_ADDR_W), .DATA_W(PT_W)) u_ang_lut (
    .wclk  (clk40),
    .we    (lut_wr_i.we && lut_wr_i.sel == LUT_ANG),
    .waddr (lut_wr_i.addr[ANG_ADDR_W-1:0]),
    .wdata (lut_wr_i.data),
    .rclk  (clk320),
    .raddr ({s_seed.roi, s_cand.deta, s_cand.dtheta}),
    .rdata (ang_pt)
  );

  // Tags follow the table read by one cycle.
  logic l_valid, l_first, l_last, l_stb;

  always_ff @(posedge clk320) begin
    if (!rst320_n) begin
      l_valid <= 1'b0;
      l_first <= 1'b0;
      l_last  <= 1'b0;
      l_stb   <= 1'b0;
    end else begin
      l_valid <= s_stb && s_seed.valid && s_cand.valid;
      l_first <= s_first;
      l_last  <= s_last;
      l_stb   <= s_stb;
    end
  end

  pt_t cand_pt;
  assign cand_pt   = angle_en_i ? pt_min(pos_pt, ang_pt) : pos_pt;
  assign lut_out_o = pos_pt;

  // ---- pT re-calculation (8-to-1 selection) ------------------------------------
  pt_recalc u_recalc (
    .clk320        (clk320),
    .rst320_n      (rst320_n),
    .in_stb_i      (l_stb),
    .in_valid_i    (l_valid),
    .in_pt_i       (cand_pt),
    .first_i       (l_first),
    .last_i        (l_last),
    .high_pt_o     (high_pt_o),
    .group_pt_o    (group_pt_o),
    .group_match_o (group_match_o)
  );

endmodule
