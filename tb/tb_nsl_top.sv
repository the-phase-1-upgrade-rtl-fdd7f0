// tb_nsl_top: end-to-end test of the trigger datapath at its default sizes.
// Loads the Big Wheel, position and angle tables through the configuration
// port, then sends one seed with up to 16 NSW segments per bunch crossing
// and checks every final candidate (valid, position, final pT) and the
// aligned BW-only pT against a reference model, including the latency:
// inputs sampled on clk40 edge E(j) must give their result on E(j+2).
// Runs first with position matching only, then with position and angle
// matching. Counts how often each mechanism happened (BW table lookup,
// rejection for lack of an inner segment, invalid seed, 16 candidates,
// either lane winning the selection, angle matching lowering a pT, mode
// switch) and fails if one never did.
`timescale 1ns/1ps
module tb_nsl_top;
  import nsl_pkg::*;
  import tb_model_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic      rst_n, angle_en;
  bw_seed_t  seed;
  nsw_cand_t nsw [N_CAND];
  lut_wr_t   wr;
  bw_cand_t  l1;
  pt_t       bw_pt;
  int checks = 0, failures = 0;

  nsl_top dut (.clk40(clk40), .rst40_n(rst_n), .clk320(clk320), .rst320_n(rst_n),
    .seed_i(seed), .nsw_i(nsw), .angle_en_i(angle_en), .lut_wr_i(wr), .l1_o(l1), .bw_pt_o(bw_pt));

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 1000;
  bw_cand_t exp_l1 [NG];
  pt_t      exp_bw [NG];
  logic     skip   [NG];
  int n_bw_lookup = 0, n_reject = 0, n_invalid = 0, n_full16 = 0;
  int n_lane0 = 0, n_lane1 = 0, n_angle_cut = 0, n_switch = 0, n_accept = 0;
  bw_seed_t  s;
  nsw_cand_t c [N_CAND];

  task automatic load_tables();
    for (int r = 0; r < 2; r++) begin
      logic [ROI_W-1:0] roi;
      roi = (r == 0) ? ROI_A : ROI_B;
      for (int a = 0; a < 2**(DR_W + BWDPHI_W); a++) begin
        @(posedge clk40);
        wr <= '{we: 1'b1, sel: LUT_BW, addr: CFG_ADDR_W'({roi, a[DR_W+BWDPHI_W-1:0]}),
                data: bw_lut(roi, a[DR_W+BWDPHI_W-1:BWDPHI_W], a[BWDPHI_W-1:0])};
      end
      for (int a = 0; a < 2**(DETA_W + DPHI_W); a++) begin
        @(posedge clk40);
        wr <= '{we: 1'b1, sel: LUT_POS, addr: CFG_ADDR_W'({roi, a[DETA_W+DPHI_W-1:0]}),
                data: pos_lut(roi, a[DETA_W+DPHI_W-1:DPHI_W], a[DPHI_W-1:0])};
      end
      for (int a = 0; a < 2**(DETA_W + DTHETA_W); a++) begin
        @(posedge clk40);
        wr <= '{we: 1'b1, sel: LUT_ANG, addr: CFG_ADDR_W'({roi, a[DETA_W+DTHETA_W-1:0]}),
                data: ang_lut(roi, a[DETA_W+DTHETA_W-1:DTHETA_W], a[DTHETA_W-1:0])};
      end
    end
    @(posedge clk40);
    wr <= '0;
  endtask

  initial begin
    rst_n = 0; angle_en = 0; seed = '0; wr = '0;
    foreach (nsw[i]) nsw[i] = '0;
    repeat (3) @(posedge clk40);
    rst_n <= 1;
    load_tables();
    for (int k = 0; k < NG + 4; k++) begin
      @(posedge clk40);
      if (k < NG) begin
        int best0, best1, kind;
        logic m0, m1, mode;
        mode = (k >= NG / 2);
        kind = k % 8;
        s.valid = (kind != 7);
        s.roi   = rand_roi();
        s.dr    = DR_W'($urandom);
        s.dphi  = BWDPHI_W'($urandom);
        best0 = 0; best1 = 0; m0 = 0; m1 = 0;
        for (int i = 0; i < int'(N_CAND); i++) begin
          c[i] = nsw_cand_t'($urandom);
          case (kind)
            1: c[i].valid = 1'b0;
            2: c[i].valid = (i < 8);
            3: c[i].valid = (i >= 8);
            4: c[i].valid = 1'b1;
            default: ;
          endcase
          if (s.valid && c[i].valid) begin
            int p;
            p = int'(cand_pt(s.roi, c[i], mode));
            if (mode && cand_pt(s.roi, c[i], 1'b1) < cand_pt(s.roi, c[i], 1'b0)) n_angle_cut++;
            if (i < 8) begin m0 = 1; if (p > best0) best0 = p; end
            else       begin m1 = 1; if (p > best1) best1 = p; end
          end
        end
        seed <= s;
        foreach (c[i]) nsw[i] <= c[i];
        angle_en <= mode;
        exp_l1[k].valid = s.valid && (m0 | m1);
        exp_l1[k].roi   = s.roi;
        exp_l1[k].pt    = exp_l1[k].valid ? pt_t'((best0 > best1) ? best0 : best1) : '0;
        exp_bw[k]       = s.valid ? bw_lut(s.roi, s.dr, s.dphi) : '0;
        skip[k]         = (k >= NG / 2 - 2) && (k <= NG / 2);
        if (k == NG / 2) n_switch++;
        if (s.valid) n_bw_lookup++; else n_invalid++;
        if (s.valid && !(m0 | m1)) n_reject++;
        if (exp_l1[k].valid) n_accept++;
        if (s.valid && kind == 4) n_full16++;
        if (best0 > best1) n_lane0++;
        if (best1 > best0) n_lane1++;
      end
      @(negedge clk40);
      // inputs driven on edge E(k-3) were sampled on E(k-2); their result was registered on E(k)
      if (k >= 3 && k - 3 < NG && !skip[k-3]) begin
        checks++;
        if (l1 !== exp_l1[k-3] || bw_pt !== exp_bw[k-3]) begin
          failures++;
          if (failures < 6) $display("seed %0d got %h bw %0d want %h bw %0d", k-3, l1, bw_pt, exp_l1[k-3], exp_bw[k-3]);
        end
      end
    end
    $display("BW lookups %0d, accepted %0d, rejected (no inner segment) %0d, invalid seeds %0d, 16-candidate seeds %0d,",
             n_bw_lookup, n_accept, n_reject, n_invalid, n_full16);
    $display("lane 0 wins %0d, lane 1 wins %0d, angle matching lowered a pT %0d, mode switches %0d",
             n_lane0, n_lane1, n_angle_cut, n_switch);
    checks++;
    if (n_bw_lookup == 0 || n_accept == 0 || n_reject == 0 || n_invalid == 0 || n_full16 == 0 ||
        n_lane0 == 0 || n_lane1 == 0 || n_angle_cut == 0 || n_switch == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
