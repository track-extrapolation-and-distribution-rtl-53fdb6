// seg_or -- compression stage 0: OR of the twelve segment lookups of one wedge.
//
// Each of a wedge's twelve lookup RAMs returns 36 bits per 33 ns phase: an 18-bit
// "CM" side and an 18-bit "IM" side (Table 1 of the lookup map). Neighbouring
// tracks can point at the same detector element, so the twelve results are ORed
// into one answer per wedge. Because a track may point into the next wedge, the
// result is kept as three 8-bit fields, for the wedge below, this wedge and the
// wedge above, which stages 1 and 2 (wedge_or) then deliver to their wedges.
//
// How the 18 bits of a side map onto the fields depends on the lookup:
//   muon lookups (CM side all phases, IM side phases 2 and 3):
//       bits [5:0] wedge below, [11:6] own wedge, [17:12] wedge above,
//       one bit per 2.5 degrees;
//   IM phase 0, calorimeter: bits [7:0] the eight pT bits for the own wedge,
//       bits [15:8] the same for the nearest neighbour wedge, which is the wedge
//       below for segments 0-5 and the wedge above for segments 6-11 (the 30 deg
//       window); bit 16 is the Track Trigger bit, handled by track_fpga;
//   IM phase 1, phi-gap and TOF: bits [1:0]/[3:2]/[5:4] phi-gap low/high pT for
//       below/own/above, bits [7:6]/[9:8]/[11:10] the same for TOF; each output
//       field holds {TOF[1:0], gap[1:0]}.
// The paper gives the 18-bit sides, the 2.5-degree muon bits that may reach the
// adjacent wedges, the 8 pT x 30-degree calorimeter lookup and the two-bit
// phi-gap and TOF lookups; these bit positions are this design's own.
//
// VME bypass: for each segment, bypass_en replaces the RAM output by
// bypass_data, so each input of the OR can be driven directly for testing.
//
// Timing: one register stage. lphase is the lookup phase of the words on
// ram_data; q and q_phase show the result one enabled cycle later.
module seg_or
  import xtrp_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               ce,
  input  logic [1:0]                         lphase,
  input  logic [SEGS_PER_WEDGE-1:0][LUT_DW-1:0] ram_data,
  input  logic [SEGS_PER_WEDGE-1:0]          bypass_en,
  input  logic [SEGS_PER_WEDGE-1:0][LUT_DW-1:0] bypass_data,
  output stage0_t                            q,
  output logic [1:0]                         q_phase
);
  logic [SEGS_PER_WEDGE-1:0][LUT_DW-1:0] d;
  logic [SIDE_W-1:0] cm_all, im_all, im_lo, im_hi;
  stage0_t           nxt;

  always_comb begin
    for (int s = 0; s < SEGS_PER_WEDGE; s++)
      d[s] = bypass_en[s] ? bypass_data[s] : ram_data[s];

    cm_all = '0;
    im_all = '0;
    im_lo  = '0;
    im_hi  = '0;
    for (int s = 0; s < SEGS_PER_WEDGE; s++) begin
      cm_all |= d[s][SIDE_W-1:0];
      im_all |= d[s][LUT_DW-1:SIDE_W];
      if (s < SEGS_PER_WEDGE / 2) im_lo |= d[s][LUT_DW-1:SIDE_W];
      else                        im_hi |= d[s][LUT_DW-1:SIDE_W];
    end

    nxt.cm.below = {2'b00, cm_all[5:0]};
    nxt.cm.own   = {2'b00, cm_all[11:6]};
    nxt.cm.above = {2'b00, cm_all[17:12]};
    case (lphase)
      2'd0: begin                       // calorimeter, 8 pT bits
        nxt.im.own   = im_all[7:0];
        nxt.im.below = im_lo[15:8];
        nxt.im.above = im_hi[15:8];
      end
      2'd1: begin                       // phi-gap and TOF
        nxt.im.below = {4'b0, im_all[7:6],   im_all[1:0]};
        nxt.im.own   = {4'b0, im_all[9:8],   im_all[3:2]};
        nxt.im.above = {4'b0, im_all[11:10], im_all[5:4]};
      end
      default: begin                    // IMU
        nxt.im.below = {2'b00, im_all[5:0]};
        nxt.im.own   = {2'b00, im_all[11:6]};
        nxt.im.above = {2'b00, im_all[17:12]};
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= '0;
      q_phase <= '0;
    end else if (ce) begin
      q       <= nxt;
      q_phase <= lphase;
    end
  end
endmodule
