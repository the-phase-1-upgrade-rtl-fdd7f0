// lut_ram: one trigger look-up table, held in block RAM.
//
// A simple dual-port memory of 2**ADDR_W words of DATA_W bits. The write
// port loads the table contents and runs on its own clock (the 40 MHz
// configuration domain); the read port runs on the processing clock and is
// registered, as a block RAM output is: the address presented before a
// rising edge of rclk gives its word on rdata after that edge (one cycle of
// read latency). A write and a read of the same word on related edges return
// the old word. The contents are not reset; they must be loaded before use.
//
// The published scheme gives the purpose (trigger LUTs live in block RAM)
// but not the port arrangement; the two-clock, registered-read form is this
// design's choice.
module lut_ram #(
  parameter int unsigned ADDR_W = 17,
  parameter int unsigned DATA_W = 4
) (
  input  logic              wclk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              rclk,
  input  logic [ADDR_W-1:0] raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    rdata <= mem[raddr];
  end

endmodule
