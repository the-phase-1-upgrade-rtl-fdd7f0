// tb_inner_coin: the LUT pair with its selector. Loads the matching tables,
// launches one seed with up to 16 random NSW candidates on every clk40 edge
// and checks that the final pT and match flag of the seed launched on edge
// E(k) appear on edge E(k+2), no earlier and no later, in position-only
// and then in position-and-angle mode. Counts the cases where each lane
// wins, where only one lane has candidates and where a seed is rejected
// for lack of any candidate, and fails if one of them never happened.
`timescale 1ns/1ps
module tb_inner_coin;
  import nsl_pkg::*;
  import tb_model_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic      rst_n, angle_en, match;
  bw_cand_t  seed;
  nsw_cand_t cands [16];
  lut_wr_t   wr;
  pt_t       pt, mon_lut, mon_high, mon_fast;
  int checks = 0, failures = 0;

  inner_coin dut (.clk40(clk40), .rst40_n(rst_n), .clk320(clk320), .rst320_n(rst_n),
    .angle_en_i(angle_en), .seed_i(seed), .cands_i(cands), .lut_wr_i(wr), .pt_o(pt),
    .match_o(match), .mon_lut_o(mon_lut), .mon_high_o(mon_high), .mon_final_fast_o(mon_fast));

  initial begin
    #500us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 800;
  pt_t  exp_pt [NG];
  logic exp_m  [NG];
  logic skip   [NG];
  int   n_lane0_wins = 0, n_lane1_wins = 0, n_only0 = 0, n_only1 = 0, n_reject = 0, n_full16 = 0;
  bw_cand_t  s;
  nsw_cand_t c [16];

  task automatic load_tables();
    for (int r = 0; r < 2; r++) begin
      logic [ROI_W-1:0] roi;
      roi = (r == 0) ? ROI_A : ROI_B;
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
    foreach (cands[i]) cands[i] = '0;
    repeat (3) @(posedge clk40);
    rst_n <= 1;
    load_tables();
    for (int k = 0; k < NG + 3; k++) begin
      @(posedge clk40);
      if (k < NG) begin
        int best0, best1, kind;
        logic m0, m1, mode;
        mode = (k >= NG / 2);
        kind = k % 8;
        s.valid = (kind != 7) || ($urandom_range(0, 1) != 0);
        s.roi   = rand_roi();
        s.pt    = pt_t'($urandom);
        best0 = 0; best1 = 0; m0 = 0; m1 = 0;
        for (int i = 0; i < 16; i++) begin
          c[i] = nsw_cand_t'($urandom);
          case (kind)
            1: c[i].valid = 1'b0;              // no segment: fake rejected
            2: c[i].valid = (i < 8);           // lane 0 only
            3: c[i].valid = (i >= 8);          // lane 1 only
            4: c[i].valid = 1'b1;              // all 16 candidates
            default: ;
          endcase
          if (s.valid && c[i].valid) begin
            int p;
            p = int'(cand_pt(s.roi, c[i], mode));
            if (i < 8) begin m0 = 1; if (p > best0) best0 = p; end
            else       begin m1 = 1; if (p > best1) best1 = p; end
          end
        end
        seed <= s;
        foreach (c[i]) cands[i] <= c[i];
        angle_en <= mode;
        exp_pt[k] = pt_t'((best0 > best1) ? best0 : best1);
        exp_m[k]  = m0 | m1;
        skip[k]   = (k == NG / 2 - 1) || (k == NG / 2);
        if (best0 > best1) n_lane0_wins++;
        if (best1 > best0) n_lane1_wins++;
        if (m0 && !m1) n_only0++;
        if (m1 && !m0) n_only1++;
        if (s.valid && !(m0 | m1)) n_reject++;
        if (s.valid && kind == 4) n_full16++;
      end
      @(negedge clk40);
      // seed k-2 was launched two edges ago: its result was registered on this edge
      if (k >= 2 && k - 2 < NG && !skip[k-2]) begin
        checks++;
        if (pt !== exp_pt[k-2] || match !== exp_m[k-2]) begin
          failures++;
          if (failures < 6) $display("seed %0d got %0d/%0d want %0d/%0d", k-2, pt, match, exp_pt[k-2], exp_m[k-2]);
        end
      end
    end
    $display("lane0 wins %0d, lane1 wins %0d, lane0 only %0d, lane1 only %0d, rejected %0d, 16 candidates %0d",
             n_lane0_wins, n_lane1_wins, n_only0, n_only1, n_reject, n_full16);
    checks++;
    if (n_lane0_wins == 0 || n_lane1_wins == 0 || n_only0 == 0 || n_only1 == 0 || n_reject == 0 || n_full16 == 0) begin
      failures++; $display("a case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
