// tb_fig12_identity_lut: replays the published single-lane demonstration of
// the inner coincidence. The position table is loaded so that it returns
// its d-eta input (identity); one seed with BW pT 7 is accompanied by eight
// NSW segments with d-eta 1, 2, 3, 4, 8, 7, 6, 5 on lane 0 and none on lane
// 1. Expected, from the published trace: the table outputs 1,2,3,4,8,7,6,5
// on eight consecutive 320 MHz cycles, the running maximum goes
// 1,2,3,4,8,8,8,8, the fast-domain final pT is 8 and the 40 MHz pT turns
// from 0 to 8 exactly two clk40 edges after the inputs were launched.
`timescale 1ns/1ps
module tb_fig12_identity_lut;
  import nsl_pkg::*;
  import tb_model_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic      rst_n, match;
  bw_cand_t  seed;
  nsw_cand_t cands [16];
  lut_wr_t   wr;
  pt_t       pt, mon_lut, mon_high, mon_fast;
  int checks = 0, failures = 0;

  inner_coin dut (.clk40(clk40), .rst40_n(rst_n), .clk320(clk320), .rst320_n(rst_n),
    .angle_en_i(1'b0), .seed_i(seed), .cands_i(cands), .lut_wr_i(wr), .pt_o(pt),
    .match_o(match), .mon_lut_o(mon_lut), .mon_high_o(mon_high), .mon_final_fast_o(mon_fast));

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int DETA [8] = '{1, 2, 3, 4, 8, 7, 6, 5};
  localparam int HIGH [8] = '{1, 2, 3, 4, 8, 8, 8, 8};
  int lut_seen [32];
  int high_seen [32];
  int start;

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    rst_n = 0; seed = '0; wr = '0;
    foreach (cands[i]) cands[i] = '0;
    repeat (3) @(posedge clk40);
    rst_n <= 1;
    // identity table for this seed position, d-phi 0: output = d-eta
    for (int d = 0; d < 2**DETA_W; d++) begin
      @(posedge clk40);
      wr <= '{we: 1'b1, sel: LUT_POS, addr: CFG_ADDR_W'({ROI_A, DETA_W'(d), DPHI_W'(0)}), data: pt_t'(d)};
    end
    @(posedge clk40);
    wr <= '0;
    repeat (4) @(posedge clk40);
    // launch: edge E0
    @(posedge clk40);
    seed <= '{valid: 1'b1, roi: ROI_A, pt: pt_t'(7)};
    for (int i = 0; i < 16; i++)
      cands[i] <= (i < 8) ? '{valid: 1'b1, deta: DETA_W'(DETA[i]), dphi: '0, dtheta: '0} : '0;
    // record the 320 MHz monitors for 3 bunch crossings
    for (int f = 0; f < 24; f++) begin
      @(negedge clk320);
      lut_seen[f]  = int'(mon_lut);
      high_seen[f] = int'(mon_high);
      if (f == 7) begin
        // inputs are held for one bunch crossing only (as in the trace)
        expect_eq("pT before E1", int'(pt), 0);
      end
      if (f == 8) begin
        seed <= '0;
        foreach (cands[i]) cands[i] <= '0;
      end
      if (f == 12) expect_eq("pT between E1 and E2", int'(pt), 0);
      if (f == 14) expect_eq("Final_pT (320 MHz) before E2", int'(mon_fast), 8);
      if (f == 20) begin
        expect_eq("pT after E2", int'(pt), 8);
        expect_eq("match after E2", int'(match), 1);
      end
    end
    // the LUT outputs must appear in input order on consecutive fast cycles
    start = -1;
    for (int f = 0; f < 16; f++) if (start < 0 && lut_seen[f] == 1) start = f;
    checks++;
    if (start < 0) begin failures++; $display("LUT output sequence not found"); end
    else begin
      for (int i = 0; i < 8; i++) begin
        expect_eq($sformatf("LUT out %0d", i), lut_seen[start + i], DETA[i]);
        expect_eq($sformatf("High_pT %0d", i), high_seen[start + i + 1], HIGH[i]);
      end
      // all of it inside the two bunch crossings
      checks++;
      if (start + 8 > 16) begin failures++; $display("LUT sequence ends after 2 bunch crossings"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
