// phase_gen: bunch-crossing phase of the 320 MHz clock.
//
// The 40 MHz and 320 MHz clocks are phase-locked, every clk40 rising edge
// falling on a clk320 rising edge. A flip-flop in the 40 MHz domain toggles
// on every edge; the 320 MHz domain keeps a delayed copy, and the two differ
// exactly during the first fast cycle after a clk40 edge. That marks phase
// 0; a counter gives phases 1 .. CLK_RATIO-1 to the following fast cycles.
// The path from the toggle flop to the fast domain is a single-cycle path
// between related clocks, not an asynchronous crossing.
//
// Outputs (combinational, clk320 domain): phase_o, the index of the current
// fast cycle within the bunch crossing, and first_o, high in phase 0.
// locked_o is high once the first clk40 edge has been seen after reset.
// An assertion checks that the clock ratio is what the counter expects.
//
// The 8:1 ratio is the published scheme's; how the fast domain finds the
// bunch-crossing boundary is this design's choice.
module phase_gen
  import nsl_pkg::*;
#(
  parameter int unsigned RATIO = CLK_RATIO
) (
  input  logic                     clk40,
  input  logic                     rst40_n,
  input  logic                     clk320,
  input  logic                     rst320_n,
  output logic [$clog2(RATIO)-1:0] phase_o,
  output logic                     first_o,
  output logic                     locked_o
);

  localparam int unsigned W = $clog2(RATIO);

  logic         tog40;
  logic         tog_q;
  logic [W-1:0] cnt_q;
  logic         locked_q;

  always_ff @(posedge clk40) begin
    if (!rst40_n) tog40 <= 1'b0;
    else          tog40 <= ~tog40;
  end

  assign first_o  = (tog40 != tog_q);
  assign phase_o  = first_o ? '0 : cnt_q;
  assign locked_o = locked_q;

  always_ff @(posedge clk320) begin
    if (!rst320_n) begin
      tog_q    <= 1'b0;
      cnt_q    <= '0;
      locked_q <= 1'b0;
    end else begin
      tog_q <= tog40;
      cnt_q <= (phase_o == W'(RATIO - 1)) ? '0 : phase_o + 1'b1;
      if (first_o) locked_q <= 1'b1;
      // Once locked, a new bunch crossing must start just as the counter wraps.
      if (first_o && locked_q)
        assert (cnt_q == '0)
          else $error("phase_gen: clk40 edge at fast phase %0d", cnt_q);
    end
  end

endmodule
