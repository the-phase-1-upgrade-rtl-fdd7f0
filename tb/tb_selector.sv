// tb_selector: changes the two lane results once per bunch crossing, in the
// middle of it as the lanes do, and checks that the clk40 output after the
// next clk40 edge is the higher pT, with the OR of the match flags.
`timescale 1ns/1ps
module tb_selector;
  import nsl_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic rst_n;
  pt_t  lane_pt [2];
  logic lane_m  [2];
  pt_t  fast_pt, pt;
  logic match;
  int checks = 0, failures = 0;

  selector dut (.clk320(clk320), .rst320_n(rst_n), .clk40(clk40), .rst40_n(rst_n),
    .lane_pt_i(lane_pt), .lane_match_i(lane_m), .final_pt_fast_o(fast_pt), .pt_o(pt), .match_o(match));

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pt_t  exp_pt;
  logic exp_m;
  int   a_wins = 0, b_wins = 0;

  initial begin
    rst_n = 0;
    lane_pt[0] = '0; lane_pt[1] = '0; lane_m[0] = 0; lane_m[1] = 0;
    repeat (3) @(posedge clk40);
    #1ns; rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      // change in fast cycle 2 of the bunch crossing
      @(posedge clk40); repeat (2) @(posedge clk320);
      #100ps;
      lane_pt[0] = pt_t'($urandom); lane_pt[1] = pt_t'($urandom);
      lane_m[0] = 1'($urandom); lane_m[1] = 1'($urandom);
      exp_pt = pt_max(lane_pt[0], lane_pt[1]);
      exp_m  = lane_m[0] | lane_m[1];
      if (lane_pt[0] > lane_pt[1]) a_wins++;
      if (lane_pt[1] > lane_pt[0]) b_wins++;
      @(posedge clk40); #100ps;
      checks++;
      if (pt !== exp_pt || match !== exp_m) begin
        failures++; if (failures < 6) $display("n%0d got %0d/%0d want %0d/%0d", n, pt, match, exp_pt, exp_m);
      end
      checks++;
      if (fast_pt !== exp_pt) begin failures++; $display("fast register %0d want %0d", fast_pt, exp_pt); end
    end
    checks++;
    if (a_wins == 0 || b_wins == 0) begin failures++; $display("one lane never won"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
