// tb_bw_coin: loads the Big Wheel coincidence table for two seed positions,
// sends random seeds and checks that each seed's pT (from the reference
// table formula), position and valid flag appear one clk40 later. Invalid
// seeds must give pT 0.
`timescale 1ns/1ps
module tb_bw_coin;
  import nsl_pkg::*;
  import tb_model_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic     rst_n;
  bw_seed_t seed;
  lut_wr_t  wr;
  bw_cand_t cand;
  int checks = 0, failures = 0;

  bw_coin dut (.clk40(clk40), .rst40_n(rst_n), .seed_i(seed), .lut_wr_i(wr), .cand_o(cand));

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bw_cand_t exp_c;
  int       invalid_seen = 0;

  initial begin
    rst_n = 0; seed = '0; wr = '0;
    repeat (3) @(posedge clk40);
    rst_n <= 1;
    // load both seed positions; writes to the other tables must not land here
    for (int r = 0; r < 2; r++)
      for (int a = 0; a < 2**(DR_W + BWDPHI_W); a++) begin
        logic [ROI_W-1:0] roi;
        roi = (r == 0) ? ROI_A : ROI_B;
        @(posedge clk40);
        wr <= '{we: 1'b1, sel: LUT_BW, addr: CFG_ADDR_W'({roi, a[DR_W+BWDPHI_W-1:0]}),
                data: bw_lut(roi, a[DR_W+BWDPHI_W-1:BWDPHI_W], a[BWDPHI_W-1:0])};
      end
    @(posedge clk40);
    wr <= '{we: 1'b1, sel: LUT_POS, addr: CFG_ADDR_W'({ROI_A, 9'd0}), data: ~bw_lut(ROI_A, '0, '0)};
    @(posedge clk40);
    wr <= '0;
    for (int n = 0; n < 1000; n++) begin
      bw_seed_t s;
      s.valid = ($urandom_range(0, 4) != 0);
      s.roi   = rand_roi();
      s.dr    = DR_W'($urandom);
      s.dphi  = BWDPHI_W'($urandom);
      if (n == 5) begin s.roi = ROI_A; s.dr = '0; s.dphi = '0; s.valid = 1; end
      @(posedge clk40);
      seed <= s;
      // the previous seed was taken at this edge: its result is visible now
      @(negedge clk40);
      if (n > 0) begin
        checks++;
        if (cand !== exp_c) begin
          failures++; if (failures < 6) $display("n%0d got %h want %h", n, cand, exp_c);
        end
      end
      exp_c.valid = s.valid;
      exp_c.roi   = s.roi;
      exp_c.pt    = s.valid ? bw_lut(s.roi, s.dr, s.dphi) : '0;
      if (!s.valid) invalid_seen++;
    end
    checks++;
    if (invalid_seen == 0) begin failures++; $display("no invalid seed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
