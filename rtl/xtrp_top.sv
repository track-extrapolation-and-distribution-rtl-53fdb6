// xtrp_top -- the XTRP crate: Clock/Control board, twelve Data Boards and the
// Track Trigger board.
//
// The XTRP sits between the XFT track finder and the Level-1/Level-2 triggers.
// Every 132 ns crossing the XFT reports one 13-bit word for each of 288 phi
// segments over 24 cables (one per 15-degree wedge, four 48-bit words per
// crossing at 33 ns). The crate
//   * extrapolates every track to the muon chambers and the calorimeter by table
//     lookup and sends per-wedge bits to L1 MUON (muon) and L1 CAL (cal);
//   * selects up to two tracks per wedge, six in all, for the Track Trigger,
//     which forms the 16-bit L1 TRACK word (trig_word);
//   * keeps all tracks for up to 32 crossings and, on a Level-1 accept, sends the
//     list of found tracks of that crossing to Level 2 and the SVT (l2_*, svt_*).
//
// Wiring (the backplane of the crate): the Clock/Control board drives the clock
// enable, phase and Level-1 accept of every board and starts the read-out token,
// which runs through Data Boards 0..11 and back. The Data Boards' read-out words
// and Track Trigger lanes are wired-OR buses. The inter-wedge compression links
// connect each Data Board to its two neighbours in a ring (board 11 next to
// board 0). All units share the configuration bus (the stand-in for VME):
// unit cfg_addr[31:28] = 0 Clock/Control, 1 Track Trigger, 2 Data Boards.
//
// Clocking: one clock, clk, at the 33 ns period; ce and phase from the
// Clock/Control board gate every datapath register (normal, VME-step or burst
// operation). The analog clock conditioning and programmable delay of the
// Clock/Control board, the transition modules with their LVDS drivers and
// Channel Link serialiser, and the VME protocol engine are outside this RTL; their
// signals are the ports here.
//
// Latency: L1 MUON / L1 CAL words appear 9 cycles (297 ns) after the last cable
// word of a crossing; the L1 TRACK word 13 cycles (429 ns) after it, 6 cycles
// after the last track reaches the Track Trigger.
//
// The reset also disables the assertion at the end while it is active; lint
// reports that as a synchronous use of the asynchronous reset. It builds no
// logic, so the warning stands.
module xtrp_top
  import xtrp_pkg::*;
#(
  parameter int unsigned MAX_DEPTH  = 32,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // from the TRACER
  input  logic                           cdf_tick,
  input  logic                           bunch0,
  input  logic                           l1_accept_in,
  input  logic [1:0]                     l1_buf_in,
  input  logic                           burst_trig,
  // XFT cables
  input  xft_word_t [N_WEDGES-1:0]       xft,
  // Level-1 outputs
  output muon_word_t [N_WEDGES-1:0]      muon,
  output logic [N_WEDGES-1:0][CAL_BITS-1:0] cal,
  output logic [15:0]                    trig_word,
  output logic [3:0][15:0]               tt_l2_trig,
  // Level-2 and SVT track lists
  output logic                           l2_valid,
  input  logic                           l2_ready,
  output l2_word_t                       l2_data,
  output logic                           svt_valid,
  input  logic                           svt_ready,
  output l2_word_t                       svt_data,
  // status
  output logic                           ce_out,
  output logic [1:0]                     phase_out,
  output logic                           ro_busy,
  output logic                           ro_hold,
  output logic                           err_queue,
  output logic                           err_fifo,
  output logic [2:0]                     tt_n_tracks,
  // configuration bus
  input  logic                           cfg_we,
  input  logic [31:0]                    cfg_addr,
  input  logic [63:0]                    cfg_wdata,
  output logic [63:0]                    cfg_rdata
);
  logic       ce, l1_accept, tok_start, hold;
  logic [1:0] phase, l1_buf, rd_buf;

  assign ce_out    = ce;
  assign phase_out = phase;
  assign ro_hold   = hold;

  logic [N_BOARDS:0]                tok;
  logic [N_BOARDS-1:0]              b_valid;
  l2_word_t [N_BOARDS-1:0]          b_word;
  wedge_bits_t [N_BOARDS-1:0]       to_below, to_above;
  logic [N_WEDGES-1:0][1:0]         hit_code;
  logic [N_WEDGES-1:0][2:0]         slot_code;
  tt_lane_t [N_BOARDS-1:0][1:0]     b_lane;
  logic [N_BOARDS-1:0][63:0]        b_rdata;
  logic [63:0]                      cc_rdata, tt_rdata;

  logic     ro_valid;
  l2_word_t ro_word;
  tt_lane_t [1:0] lane;

  assign tok[0] = tok_start;

  clock_ctrl #(.MAX_DEPTH(MAX_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_clk (
    .clk, .rst_n,
    .cdf_tick, .bunch0, .l1_accept_in, .l1_buf_in, .burst_trig,
    .ce, .phase, .l1_accept, .l1_buf,
    .tok_out (tok_start), .rd_buf, .tok_in (tok[N_BOARDS]), .hold,
    .ro_valid, .ro_word,
    .l2_valid, .l2_ready, .l2_data, .svt_valid, .svt_ready, .svt_data,
    .busy (ro_busy), .err_queue, .err_fifo,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata (cc_rdata)
  );

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_db
    localparam int unsigned BL = (b + N_BOARDS - 1) % N_BOARDS;  // board below
    localparam int unsigned BU = (b + 1) % N_BOARDS;             // board above
    data_board #(.MAX_DEPTH(MAX_DEPTH)) u_db (
      .clk, .rst_n, .ce, .phase,
      .board_id   (4'(b)),
      .xft        (xft[2*b +: 2]),
      .l1_accept, .l1_buf,
      .tok_in     (tok[b]),
      .rd_buf, .hold,
      .tok_out    (tok[b+1]),
      .ro_valid   (b_valid[b]),
      .ro_word    (b_word[b]),
      .to_below   (to_below[b]),
      .to_above   (to_above[b]),
      .from_below (to_above[BL]),
      .from_above (to_below[BU]),
      .muon       (muon[2*b +: 2]),
      .cal        (cal[2*b +: 2]),
      .hit_code   (hit_code[2*b +: 2]),
      .slot_code  (slot_code[2*b +: 2]),
      .lane       (b_lane[b]),
      .cfg_we, .cfg_addr, .cfg_wdata,
      .cfg_rdata  (b_rdata[b])
    );
  end

  // wired-OR backplane buses
  always_comb begin
    ro_valid  = |b_valid;
    ro_word   = '0;
    lane      = '0;
    cfg_rdata = cc_rdata | tt_rdata;
    for (int b = 0; b < N_BOARDS; b++) begin
      ro_word   |= b_word[b];
      lane[0]   |= b_lane[b][0];
      lane[1]   |= b_lane[b][1];
      cfg_rdata |= b_rdata[b];
    end
  end

  track_trigger #(.MAX_DEPTH(MAX_DEPTH)) u_tt (
    .clk, .rst_n, .ce, .phase,
    .hit_code, .slot_code, .lane,
    .trig_word, .n_tracks (tt_n_tracks),
    .l1_accept, .l1_buf, .l2_trig (tt_l2_trig),
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata (tt_rdata)
  );

  // one board at a time on the read-out bus
  a_one_board: assert property (@(posedge clk) disable iff (!rst_n) (b_valid & (b_valid - 1'b1)) == '0);
endmodule
