// tb_phase_gen: checks that the fast-domain phase counts 0..7 within every
// bunch crossing, with 0 in the fast cycle that starts at the clk40 edge,
// that first_o marks phase 0 only, and that locked_o rises after reset.
`timescale 1ns/1ps
module tb_phase_gen;
  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic       rst40_n, rst320_n;
  logic [2:0] phase;
  logic       first, locked;
  int checks = 0, failures = 0;
  int firsts = 0;

  phase_gen dut (.clk40(clk40), .rst40_n(rst40_n), .clk320(clk320), .rst320_n(rst320_n),
                 .phase_o(phase), .first_o(first), .locked_o(locked));

  initial begin
    #50us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst40_n = 0; rst320_n = 0;
    repeat (3) @(posedge clk40);
    #1ns; rst40_n = 1; rst320_n = 1;
    checks++;
    if (locked) begin failures++; $display("locked during reset release"); end
    repeat (2) @(posedge clk40);
    #1ns; checks++;
    if (!locked) begin failures++; $display("not locked"); end
    // 200 bunch crossings, checked in the middle of every fast cycle
    repeat (1600) begin
      @(negedge clk320);
      checks++;
      if (phase !== 3'(fast_ph) || first !== (fast_ph == 0)) begin
        failures++;
        if (failures < 6) $display("t=%0t phase %0d first %0d, expected %0d", $time, phase, first, fast_ph);
      end
      if (first) firsts++;
    end
    checks++;
    if (firsts != 200) begin failures++; $display("first seen %0d times", firsts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
