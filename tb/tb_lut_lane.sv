// tb_lut_lane: one lane of the LUT pair with its phase generator. Loads the
// position and angle tables for two seed positions, launches a new group of
// eight random candidates on every clk40 edge (as 40 MHz registers would)
// and checks the group's highest pT and match flag against the reference
// model, in position-only mode and then with angle matching. The group
// launched on edge E(k) must be complete between E(k+1) and E(k+2).
`timescale 1ns/1ps
module tb_lut_lane;
  import nsl_pkg::*;
  import tb_model_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic       rst_n, locked, angle_en;
  logic [2:0] phase;
  bw_cand_t   seed;
  nsw_cand_t  cands [8];
  lut_wr_t    wr;
  pt_t        lut_out, high, gpt;
  logic       gmatch;
  int checks = 0, failures = 0;

  phase_gen u_ph (.clk40(clk40), .rst40_n(rst_n), .clk320(clk320), .rst320_n(rst_n),
                  .phase_o(phase), .first_o(), .locked_o(locked));

  lut_lane dut (.clk40(clk40), .clk320(clk320), .rst320_n(rst_n), .phase_i(phase),
    .locked_i(locked), .angle_en_i(angle_en), .seed_i(seed), .cands_i(cands), .lut_wr_i(wr),
    .lut_out_o(lut_out), .high_pt_o(high), .group_pt_o(gpt), .group_match_o(gmatch));

  initial begin
    #500us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NG = 600;
  pt_t  exp_pt [NG];
  logic exp_m  [NG];
  logic skip   [NG];
  int   angle_cut = 0, empty = 0;
  bw_cand_t  s;       // next seed and group
  nsw_cand_t c [8];

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
    for (int k = 0; k < NG + 2; k++) begin
      @(posedge clk40);
      if (k < NG) begin
        int best;
        logic m, mode;
        mode = (k >= NG / 2);
        s.valid = ($urandom_range(0, 9) != 0);
        s.roi   = rand_roi();
        s.pt    = pt_t'($urandom);
        best = 0; m = 0;
        for (int i = 0; i < 8; i++) begin
          c[i] = nsw_cand_t'($urandom);
          if (k % 6 == 1) c[i].valid = 1'b0;
          if (s.valid && c[i].valid) begin
            m = 1;
            if (int'(cand_pt(s.roi, c[i], mode)) > best) best = int'(cand_pt(s.roi, c[i], mode));
            if (mode && cand_pt(s.roi, c[i], 1'b1) != cand_pt(s.roi, c[i], 1'b0)) angle_cut++;
          end
        end
        seed <= s;
        foreach (c[i]) cands[i] <= c[i];
        angle_en <= mode;
        exp_pt[k] = pt_t'(best);
        exp_m[k]  = m;
        skip[k]   = (k == NG / 2 - 1) || (k == NG / 2);  // mode switch in flight
        if (!m) empty++;
      end
      @(negedge clk40);
      // group k-1, launched one edge ago, completed 10 fast cycles after its launch,
      // i.e. 2 fast cycles after this edge; the negedge is fast cycle 4
      if (k >= 1 && k - 1 < NG && !skip[k-1]) begin
        checks++;
        if (gpt !== exp_pt[k-1] || gmatch !== exp_m[k-1]) begin
          failures++;
          if (failures < 6) $display("group %0d got %0d/%0d want %0d/%0d", k-1, gpt, gmatch, exp_pt[k-1], exp_m[k-1]);
        end
      end
    end
    checks++;
    if (angle_cut == 0 || empty == 0) begin failures++; $display("angle cut %0d empty %0d", angle_cut, empty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
