// tb_model_pkg: reference contents of the trigger tables and a reference
// model of the inner coincidence, used by the testbenches to work out
// expected results independently of the RTL. The table contents are
// arbitrary test patterns given by simple formulas.
package tb_model_pkg;
  import nsl_pkg::*;

  // two seed positions are used by the tests
  localparam logic [ROI_W-1:0] ROI_A = 8'd3;
  localparam logic [ROI_W-1:0] ROI_B = 8'd200;

  function automatic pt_t bw_lut(logic [ROI_W-1:0] roi, logic [DR_W-1:0] dr, logic [BWDPHI_W-1:0] dphi);
    return pt_t'((int'(roi) * 3 + int'(dr) * 5 + int'(dphi) * 7 + 1) % 16);
  endfunction

  function automatic pt_t pos_lut(logic [ROI_W-1:0] roi, logic [DETA_W-1:0] deta, logic [DPHI_W-1:0] dphi);
    return pt_t'((int'(roi) + int'(deta) * 11 + int'(dphi) * 3) % 16);
  endfunction

  function automatic pt_t ang_lut(logic [ROI_W-1:0] roi, logic [DETA_W-1:0] deta, logic [DTHETA_W-1:0] dth);
    return pt_t'((int'(roi) * 5 + int'(deta) * 7 + int'(dth) * 13 + 2) % 16);
  endfunction

  // pT of one candidate after the matching tables
  function automatic pt_t cand_pt(logic [ROI_W-1:0] roi, nsw_cand_t c, logic angle_en);
    pt_t p, a;
    p = pos_lut(roi, c.deta, c.dphi);
    a = ang_lut(roi, c.deta, c.dtheta);
    return (angle_en && a < p) ? a : p;
  endfunction

  function automatic logic [ROI_W-1:0] rand_roi();
    return ($urandom_range(0, 1) != 0) ? ROI_A : ROI_B;
  endfunction

endpackage
