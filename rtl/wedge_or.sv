// wedge_or -- compression stages 1 and 2: OR between the wedges of a Data Board
// and with the wedges of the neighbouring boards.
//
// Stage 0 (seg_or) leaves each wedge with three 8-bit fields per RAM side: bits
// for the wedge below, for itself and for the wedge above. A board holds two
// adjacent wedges, w0 (lower phi) and w1. Stage 1 ORs inside the board:
//     s1[w0] = own(w0) | below(w1)       s1[w1] = own(w1) | above(w0)
// and registers the two fields that leave the board: below(w0) goes to the board
// below (its w1) and above(w1) to the board above (its w0). Stage 2 adds what the
// neighbours sent:
//     s2[w0] = s1[w0] | from_below       s2[w1] = s1[w1] | from_above
// where from_below is the "to_above" output of the board below. The 24 wedges
// form a ring, so board 0 and board 11 are neighbours.
//
// From the paper: intra-wedge OR first, then inter-wedge OR that crosses board
// boundaries, in stages called 1 and 2, one 33 ns step per stage, and readable
// stage registers. The exact split of the two stages is this design's choice.
//
// Timing: each stage is one register enabled by ce; a phase tag travels along.
module wedge_or
  import xtrp_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  stage0_t [1:0]        s0,          // stage 0 of wedge 0 and wedge 1
  input  logic [1:0]           s0_phase,
  output wedge_bits_t          to_below,    // stage 1 register, to board below
  output wedge_bits_t          to_above,    // stage 1 register, to board above
  input  wedge_bits_t          from_below,  // the lower board's to_above
  input  wedge_bits_t          from_above,  // the upper board's to_below
  output wedge_bits_t [1:0]    s1,          // stage 1 (readback)
  output wedge_bits_t [1:0]    s2,          // stage 2 = compressed result
  output logic [1:0]           s2_phase
);
  logic [1:0] s1_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1       <= '0;
      to_below <= '0;
      to_above <= '0;
      s1_phase <= '0;
      s2       <= '0;
      s2_phase <= '0;
    end else if (ce) begin
      // stage 1
      s1[0].cm    <= s0[0].cm.own | s0[1].cm.below;
      s1[0].im    <= s0[0].im.own | s0[1].im.below;
      s1[1].cm    <= s0[1].cm.own | s0[0].cm.above;
      s1[1].im    <= s0[1].im.own | s0[0].im.above;
      to_below.cm <= s0[0].cm.below;
      to_below.im <= s0[0].im.below;
      to_above.cm <= s0[1].cm.above;
      to_above.im <= s0[1].im.above;
      s1_phase    <= s0_phase;
      // stage 2
      s2[0]       <= s1[0] | from_below;
      s2[1]       <= s1[1] | from_above;
      s2_phase    <= s1_phase;
    end
  end
endmodule
