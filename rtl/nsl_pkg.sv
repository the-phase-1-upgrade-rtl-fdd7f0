// nsl_pkg: widths, record types and constants shared by the endcap muon
// Sector Logic trigger datapath.
//
// The trigger runs on two phase-locked clocks: the 40 MHz bunch-crossing
// clock (one new event per cycle) and a 320 MHz clock, exactly eight times
// faster, on which each coincidence look-up table is re-used eight times per
// bunch crossing. Up to 16 inner-station (NSW) segments may accompany one Big
// Wheel trigger seed; they are split over two identical look-up tables.
//
// Taken from the published scheme: the 4-bit pT code and 6-bit NSW d-eta
// (the widths shown in its simulation traces), 16 candidates per seed, two
// look-up tables, and the 8:1 clock ratio. Every other width here (seed
// position, BW dR/dphi, NSW dphi and dtheta) is this design's own choice.
package nsl_pkg;

  // ---- widths --------------------------------------------------------------
  parameter int unsigned PT_W      = 4;  // pT threshold code
  parameter int unsigned ROI_W     = 8;  // BW seed position (region of interest) in a sector
  parameter int unsigned DR_W      = 5;  // BW local coincidence deviation in R
  parameter int unsigned BWDPHI_W  = 4;  // BW local coincidence deviation in phi
  parameter int unsigned DETA_W    = 6;  // NSW segment d-eta w.r.t. the seed
  parameter int unsigned DPHI_W    = 3;  // NSW segment d-phi w.r.t. the seed
  parameter int unsigned DTHETA_W  = 4;  // NSW segment angle d-theta

  // ---- sizes ---------------------------------------------------------------
  parameter int unsigned N_CAND    = 16; // inner candidates per BW seed
  parameter int unsigned N_LANE    = 2;  // identical LUTs working in parallel
  parameter int unsigned CLK_RATIO = 8;  // 320 MHz / 40 MHz

  // Look-up table address widths: the table is chosen per seed position.
  parameter int unsigned BW_ADDR_W  = ROI_W + DR_W + BWDPHI_W;    // (roi, dR, dphi)
  parameter int unsigned POS_ADDR_W = ROI_W + DETA_W + DPHI_W;    // (roi, deta, dphi)
  parameter int unsigned ANG_ADDR_W = ROI_W + DETA_W + DTHETA_W;  // (roi, deta, dtheta)
  parameter int unsigned CFG_ADDR_W = 18;                         // widest of the three

  typedef logic [PT_W-1:0] pt_t;

  // One Big Wheel trigger seed, as delivered by the BW hit decoding.
  typedef struct packed {
    logic                valid;
    logic [ROI_W-1:0]    roi;
    logic [DR_W-1:0]     dr;
    logic [BWDPHI_W-1:0] dphi;
  } bw_seed_t;

  // A seed after the BW local coincidence: position and pT code.
  typedef struct packed {
    logic             valid;
    logic [ROI_W-1:0] roi;
    pt_t              pt;
  } bw_cand_t;

  // One NSW segment, expressed relative to the seed it is matched with.
  typedef struct packed {
    logic                valid;
    logic [DETA_W-1:0]   deta;
    logic [DPHI_W-1:0]   dphi;
    logic [DTHETA_W-1:0] dtheta;
  } nsw_cand_t;

  // Which table a configuration write goes to.
  typedef enum logic [1:0] {
    LUT_BW  = 2'd0,  // BW local coincidence (dR, dphi) -> pT
    LUT_POS = 2'd1,  // position matching (deta, dphi)  -> pT, both lanes
    LUT_ANG = 2'd2   // angle matching (deta, dtheta)   -> pT, both lanes
  } lut_sel_e;

  // Configuration write, in the 40 MHz domain (e.g. from the VME bridge).
  typedef struct packed {
    logic                  we;
    lut_sel_e              sel;
    logic [CFG_ADDR_W-1:0] addr;
    pt_t                   data;
  } lut_wr_t;

  function automatic pt_t pt_max(pt_t a, pt_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic pt_t pt_min(pt_t a, pt_t b);
    return (a < b) ? a : b;
  endfunction

endpackage
