// tb_pt_recalc: streams random groups of eight LUT results, some invalid,
// and checks the running maximum after every candidate and the group
// maximum and match flag after the last one, against a reference model.
`timescale 1ns/1ps
module tb_pt_recalc;
  import nsl_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic rst_n, stb, vld, first, last, gmatch;
  pt_t  pt, high, gpt;
  int checks = 0, failures = 0;

  pt_recalc dut (.clk320(clk320), .rst320_n(rst_n), .in_stb_i(stb), .in_valid_i(vld),
    .in_pt_i(pt), .first_i(first), .last_i(last), .high_pt_o(high), .group_pt_o(gpt),
    .group_match_o(gmatch));

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int   run_max, grp_max;
  logic run_m, grp_m;
  int   empty_groups = 0;

  initial begin
    rst_n = 0; stb = 0; vld = 0; first = 0; last = 0; pt = '0;
    repeat (4) @(negedge clk320);
    rst_n = 1;
    grp_max = 0; grp_m = 0;
    for (int g = 0; g < 300; g++) begin
      int density;
      density = (g % 5 == 0) ? 0 : 1 + $urandom_range(0, 3);  // some groups with no valid candidate
      for (int k = 0; k < 8; k++) begin
        stb = 1; first = (k == 0); last = (k == 7);
        vld = (density != 0) && ($urandom_range(0, 3) < density);
        pt  = pt_t'($urandom);
        if (k == 0) begin run_max = 0; run_m = 0; end
        if (vld && int'(pt) > run_max) run_max = int'(pt);
        run_m |= vld;
        @(negedge clk320);
        checks++;
        if (high !== pt_t'(run_max)) begin failures++; if (failures < 6) $display("g%0d k%0d high %0d want %0d", g, k, high, run_max); end
        if (k == 7) begin grp_max = run_max; grp_m = run_m; if (!run_m) empty_groups++; end
        checks++;
        if (gpt !== pt_t'(grp_max) || gmatch !== grp_m) begin
          failures++; if (failures < 6) $display("g%0d k%0d group %0d/%0d want %0d/%0d", g, k, gpt, gmatch, grp_max, grp_m);
        end
      end
      // an idle cycle without strobe must not disturb anything
      if (g % 7 == 0) begin
        stb = 0; vld = 1; pt = '1; first = 1; last = 1;
        @(negedge clk320);
        checks++;
        if (gpt !== pt_t'(grp_max) || high !== pt_t'(run_max)) begin failures++; $display("changed without strobe"); end
      end
    end
    checks++;
    if (empty_groups == 0) begin failures++; $display("no empty group exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
