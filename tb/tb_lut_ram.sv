// tb_lut_ram: loads a few thousand words of the look-up table on the write
// clock, reads them back on the read clock and checks data and the one-cycle
// read latency. Expected words come from a formula, not from the memory.
`timescale 1ns/1ps
module tb_lut_ram;
  localparam int AW = 17, DW = 4, N = 3000;  // the default table size

  logic clk40, clk320;
  int   fast_ph;
  tb_clkgen u_clk (.clk40(clk40), .clk320(clk320), .fast_ph(fast_ph));

  logic          we;
  logic [AW-1:0] waddr, raddr;
  logic [DW-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  lut_ram dut (
    .wclk(clk40), .we(we), .waddr(waddr), .wdata(wdata),
    .rclk(clk320), .raddr(raddr), .rdata(rdata));

  function automatic logic [AW-1:0] addr_of(int i);
    return AW'((i * 40503) ^ (i << 7));
  endfunction
  function automatic logic [DW-1:0] word_of(logic [AW-1:0] a);
    return DW'((a * 7 + (a >> 5) + 3) % 16);
  endfunction

  initial begin
    #500us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [AW-1:0] last_a;
  logic          seen_old;

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    // load
    for (int i = 0; i < N; i++) begin
      @(posedge clk40);
      we <= 1'b1; waddr <= addr_of(i); wdata <= word_of(addr_of(i));
    end
    @(posedge clk40); we <= 1'b0;
    @(posedge clk40);
    // read back, one address per fast cycle; data must appear exactly one cycle later
    for (int i = 0; i < N + 1; i++) begin
      @(posedge clk320);
      #100ps;
      if (i > 0) begin
        checks++;
        if (rdata !== word_of(last_a)) begin
          failures++;
          if (failures < 5) $display("read %h: got %h want %h", last_a, rdata, word_of(last_a));
        end
      end
      raddr  = addr_of(i % N);
      last_a = addr_of(i % N);
    end
    // latency: one edge after changing the address the old word is gone, not before
    @(posedge clk320); #100ps; raddr = addr_of(5);
    @(posedge clk320); #100ps; raddr = addr_of(9);
    checks++;
    if (rdata !== word_of(addr_of(5))) begin failures++; $display("latency: not one cycle"); end
    // write then read returns the new word
    @(posedge clk40); we <= 1'b1; waddr <= addr_of(9); wdata <= ~word_of(addr_of(9));
    @(posedge clk40); we <= 1'b0;
    @(posedge clk320); @(posedge clk320); #100ps;
    checks++;
    if (rdata !== ~word_of(addr_of(9))) begin failures++; $display("overwrite failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
