// xtrp_pkg -- types and constants shared by the track extrapolation system.
//
// The XTRP receives, for every 132 ns bunch-crossing slot, one 13-bit word for
// each of the 288 azimuthal XFT segments (24 wedges of 12 segments, 1.25 deg each).
// Twelve Data Boards each cover two 15-degree wedges. Everything runs from one
// 33 ns clock; the 132 ns event period is four "phases" of that clock.
//
// From the paper: the 13-bit track word (7 pT, 3 local phi, isolation, short,
// one reserved bit), the no-track pT code 124, the 288/24/12 segmentation,
// the 32K x 36 segment RAM with 2 phase bits, the four lookup phases of Table 1,
// 18 bits per RAM side, six muon bits and eight calorimeter bits per wedge, the
// 16-bit Track Trigger word and the 8-bit bunch counter.
// Own choices: the bit order inside the track word, the 48-bit cable word of
// each 33 ns phase, the normalised 3 x 8-bit "below/own/above" form of the
// compression stages and the layout of the read-out and configuration words.
package xtrp_pkg;

  // ---- geometry -------------------------------------------------------------
  localparam int unsigned N_BOARDS        = 12;  // Data Boards
  localparam int unsigned WEDGES_PER_BRD  = 2;   // 15-degree wedges per board
  localparam int unsigned N_WEDGES        = 24;
  localparam int unsigned SEGS_PER_WEDGE  = 12;  // 1.25-degree XFT segments
  localparam int unsigned SEGS_PER_PIPE   = 3;
  localparam int unsigned PIPES_PER_WEDGE = 4;
  localparam int unsigned PIPES_PER_BRD   = 8;
  localparam int unsigned N_SEGS          = 288;

  // ---- XFT track word (13 bits) ---------------------------------------------
  localparam logic [6:0] PT_NO_TRACK = 7'd124;

  typedef struct packed {
    logic       undef;     // [12] reserved
    logic       short_trk; // [11] track did not reach the outer COT layer
    logic       iso;       // [10] isolation bit (unused by the trigger)
    logic [2:0] lphi;      // [9:7] phi inside the segment, 1.25/8 deg
    logic [6:0] pt;        // [6:0] pT bin 0..95, 124 = no track
  } track_t;

  localparam track_t NO_TRACK = '{undef: 1'b0, short_trk: 1'b0, iso: 1'b0,
                                  lphi: 3'd0, pt: PT_NO_TRACK};

  // One 33 ns word on an XFT cable: phase p carries segments 3p..3p+2.
  typedef struct packed {
    logic [7:0] bunch;     // bunch crossing number
    logic       bunch0;    // first crossing of the Tevatron turn
    track_t [2:0] trk;     // trk[i] = segment 3*phase+i of the wedge
  } xft_word_t;            // 48 bits

  // ---- lookup RAM sides and phases (Table 1) ---------------------------------
  localparam int unsigned LUT_AW   = 15;     // 2 phase bits + 13 track bits
  localparam int unsigned SIDE_W   = 18;     // bits per RAM side
  localparam int unsigned LUT_DW   = 36;     // CM side [17:0], IM side [35:18]
  localparam int unsigned MU_BITS  = 6;      // 2.5-degree muon bits per wedge
  localparam int unsigned CAL_BITS = 8;      // calorimeter pT bits per wedge
  localparam int unsigned TRK_BIT  = 16;     // IM side, phase 0: Track Trigger bit

  // Compression stages carry each side as three 8-bit fields addressed to the
  // wedge below, the wedge itself and the wedge above.
  typedef struct packed {
    logic [7:0] above;
    logic [7:0] own;
    logic [7:0] below;
  } fields_t;

  typedef struct packed {
    fields_t im;
    fields_t cm;
  } stage0_t;              // 48 bits

  typedef struct packed {
    logic [7:0] im;
    logic [7:0] cm;
  } wedge_bits_t;          // one wedge, one phase, after stage 2

  // L1 MUON word of one wedge for one crossing.
  typedef struct packed {
    logic [1:0] tof;       // IM phase 1, TOF low/high pT
    logic [1:0] gap;       // IM phase 1, phi-gap ("crack") low/high pT
    logic [5:0] imu_lo;    // IM phase 3
    logic [5:0] imu_hi;    // IM phase 2
    logic [5:0] cmx_lo;    // CM phase 3
    logic [5:0] cmx_hi;    // CM phase 2
    logic [5:0] cmu_lo;    // CM phase 1
    logic [5:0] cmu_hi;    // CM phase 0
  } muon_word_t;           // 40 bits

  // ---- Level-2 / SVT track list word -------------------------------------------
  typedef struct packed {
    logic       eoe;       // 1: end-of-event word
    logic [8:0] gseg;      // global segment 0..287   (eoe: [9:8] L2 buffer)
    track_t     trk;       //                          (eoe: [7:0] bunch counter)
  } l2_word_t;             // 23 bits

  // ---- Track Trigger bus ---------------------------------------------------------
  localparam int unsigned TT_MAX_TRACKS = 6;
  localparam int unsigned TT_PAIRS      = 15;
  localparam logic [2:0]  TT_NO_SLOT    = 3'd7;
  localparam logic [8:0]  GPHI_NONE     = 9'h1FF;

  typedef struct packed {
    logic       valid;
    logic [3:0] seg;       // segment inside the wedge
    track_t     trk;
  } tt_lane_t;             // 18 bits; two lanes per 33 ns bus cycle

  // Global segment number (= 9-bit global phi, 1.25-degree steps).
  function automatic logic [8:0] gseg_of(input logic [4:0] wedge, input logic [3:0] seg);
    return 9'(wedge * 12 + seg);
  endfunction

endpackage
