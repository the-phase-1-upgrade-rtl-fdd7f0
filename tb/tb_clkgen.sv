// tb_clkgen: phase-locked 40 MHz / 320 MHz clock pair for the testbenches.
// Every clk40 rising edge coincides with a clk320 rising edge; clk320 runs
// exactly eight cycles per clk40 period (25 ns). fast_ph tells the
// testbench which fast cycle of the bunch crossing is current (0 right after
// a clk40 rising edge). Both clocks change in the same time step, so
// flip-flops on either clock see each other's old values at a shared edge.
`timescale 1ns/1ps
module tb_clkgen (
  output logic     clk40,
  output logic     clk320,
  output int       fast_ph
);
  initial begin
    clk40   = 1'b0;
    clk320  = 1'b0;
    fast_ph = 7;
    forever begin
      for (int i = 0; i < 8; i++) begin
        #1562ps;
        clk320  = 1'b1;
        fast_ph = i;
        if (i == 0) clk40 = 1'b1;
        if (i == 4) clk40 = 1'b0;
        #1563ps;
        clk320 = 1'b0;
      end
    end
  end
endmodule
