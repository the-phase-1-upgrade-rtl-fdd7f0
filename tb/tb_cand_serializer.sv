// tb_cand_serializer: feeds random candidate groups and phases and checks
// that candidate k of the group is presented, with its index, seed and
// first/last tags, one fast cycle after the cycle of phase k.
`timescale 1ns/1ps
module tb_cand_serializer;
  import nsl_pkg::*;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic      rst_n;
  logic [2:0] phase;
  logic      locked;
  bw_cand_t  seed, seed_o;
  nsw_cand_t cands [8];
  nsw_cand_t cand_o;
  logic [2:0] idx_o;
  logic      first_o, last_o, stb_o;
  int checks = 0, failures = 0;

  cand_serializer dut (.clk320(clk320), .rst320_n(rst_n), .phase_i(phase), .locked_i(locked),
    .seed_i(seed), .cands_i(cands), .seed_o(seed_o), .cand_o(cand_o), .idx_o(idx_o),
    .first_o(first_o), .last_o(last_o), .stb_o(stb_o));

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  nsw_cand_t exp_c;
  bw_cand_t  exp_s;
  int        exp_k;

  initial begin
    rst_n = 0; locked = 0; phase = 0; seed = '0;
    foreach (cands[i]) cands[i] = '0;
    repeat (4) @(negedge clk320);
    rst_n = 1; locked = 1;
    exp_k = -1;
    for (int n = 0; n < 8 * 300; n++) begin
      @(negedge clk320);
      // check what the previous cycle asked for
      if (exp_k >= 0) begin
        checks++;
        if (cand_o !== exp_c || seed_o !== exp_s || idx_o !== 3'(exp_k) || !stb_o ||
            first_o !== (exp_k == 0) || last_o !== (exp_k == 7)) begin
          failures++;
          if (failures < 6) $display("k=%0d got %h idx %0d f%0d l%0d want %h", exp_k, cand_o, idx_o, first_o, last_o, exp_c);
        end
      end
      // new group at phase 0, random phase order is not needed: phases count 0..7
      phase = 3'(n % 8);
      if (phase == 0) begin
        seed = bw_cand_t'($urandom);
        foreach (cands[i]) cands[i] = nsw_cand_t'($urandom);
      end
      exp_k = n % 8;
      exp_c = cands[exp_k];
      exp_s = seed;
    end
    // not locked: no strobe, no tags
    locked = 0;
    @(negedge clk320); @(negedge clk320);
    checks++;
    if (stb_o || first_o || last_o) begin failures++; $display("tags while unlocked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
