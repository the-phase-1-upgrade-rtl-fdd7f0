// bw_coin: TGC Big Wheel local coincidence, the first pT estimate of a seed.
//
// A hit in the outermost Big Wheel station (M3) is the trigger seed. The
// deviations of the track from the infinite-momentum line in the two inner
// stations, dR and dphi, are looked up together with the seed position in a
// pre-loaded table that returns the pT code at once. Because the toroidal
// field is not uniform, the table is indexed by the seed position too:
// address = {roi, dr, dphi}.
//
// Interface: seed_i is sampled on a rising edge of clk40; cand_o (valid,
// roi, pT) is valid after that same edge (one clk40 of latency, the block
// RAM read). An invalid seed gives cand_o.valid = 0 and pT 0. The table is
// loaded through lut_wr_i (sel = LUT_BW) on clk40.
//
// The table lookup by (position, dR, dphi) follows the published scheme;
// the field widths, the address order and the one-cycle timing are this
// design's choice.
module bw_coin
  import nsl_pkg::*;
(
  input  logic     clk40,
  input  logic     rst40_n,
  input  bw_seed_t seed_i,
  input  lut_wr_t  lut_wr_i,
  output bw_cand_t cand_o
);

  logic [BW_ADDR_W-1:0] raddr;
  pt_t                  lut_pt;
  logic                 valid_q;
  logic [ROI_W-1:0]     roi_q;

  assign raddr = {seed_i.roi, seed_i.dr, seed_i.dphi};

  lut_ram #(.ADDR_W(BW_ADDR_W), .DATA_W(PT_W)) u_lut (
    .wclk  (clk40),
    .we    (lut_wr_i.we && lut_wr_i.sel == LUT_BW),
    .waddr (lut_wr_i.addr[BW_ADDR_W-1:0]),
    .wdata (lut_wr_i.data),
    .rclk  (clk40),
    .raddr (raddr),
    .rdata (lut_pt)
  );

  always_ff @(posedge clk40) begin
    if (!rst40_n) begin
      valid_q <= 1'b0;
      roi_q   <= '0;
    end else begin
      valid_q <= seed_i.valid;
      roi_q   <= seed_i.roi;
    end
  end

  always_comb begin
    cand_o.valid = valid_q;
    cand_o.roi   = roi_q;
    cand_o.pt    = valid_q ? lut_pt : '0;
  end

endmodule
