// track_fpga -- Track Trigger interface of a Data Board: Code PROM, Address PROM
// and Track FPGA for the board's two wedges.
//
// In lookup phase 0 every segment RAM sets IM bit 16 when its track passes the
// single programmable Track Trigger pT threshold. For each wedge this block
//   * counts the set bits, saturating at two (the Code PROM function): the
//     2-bit "hit code" 0, 1 or 2 sent to the Track Trigger;
//   * finds the set bits with the smallest and the largest segment number (the
//     Address PROM function): the two "outer" tracks in phi;
//   * latches those two tracks from the Pipe outputs.
// The Track Trigger sums the hit codes of all 24 wedges and returns a 3-bit slot
// code per wedge: the first of the six track slots this wedge may use, or 7 for
// none. The block then drives its tracks on the time-multiplexed Track Trigger
// bus: the smaller-phi track in slot `code`, the larger-phi one in slot code+1
// when the wedge has two. The bus moves two slots (lanes) per 33 ns cycle, slots
// 0-1 in phase 3, 2-3 in phase 0 and 4-5 in phase 1 of the following crossing.
// Lanes are zero when not driven so that boards can be wire-ORed.
//
// From the paper: the threshold bit from the first IM lookup phase, 0/1/2 tracks
// per wedge with more than two counted as two, the outer-track choice, Code and
// Address PROMs, a handshake with 3-bit codes returned by the Track Trigger and a
// time-multiplexed bus carrying the track and its segment. Own choices: the PROMs
// are written as the equivalent logic, and the slot and bus timing.
//
// Timing: bits_phase is the lookup phase of trk_bit; the counts are taken when
// it is 0 (phase counter 1) and hit_code is valid from phase 2 on.
module track_fpga
  import xtrp_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 ce,
  input  logic [1:0]                           phase,
  input  logic [1:0]                           bits_phase,
  input  logic [1:0][SEGS_PER_WEDGE-1:0]       trk_bit,
  input  track_t [1:0][SEGS_PER_WEDGE-1:0]     trk_in,
  output logic [1:0][1:0]                      hit_code,
  input  logic [1:0][2:0]                      slot_code,
  output tt_lane_t [1:0]                       lane
);
  logic [1:0][3:0] lo_seg, hi_seg;
  track_t [1:0]    lo_trk, hi_trk;

  // Code PROM and Address PROM functions
  function automatic logic [1:0] code_prom(input logic [SEGS_PER_WEDGE-1:0] b);
    int n;
    n = 0;
    for (int s = 0; s < SEGS_PER_WEDGE; s++) n += int'(b[s]);
    return (n > 2) ? 2'd2 : 2'(n);
  endfunction

  function automatic logic [7:0] addr_prom(input logic [SEGS_PER_WEDGE-1:0] b);
    logic [3:0] lo, hi;
    lo = '0;
    hi = '0;
    for (int s = SEGS_PER_WEDGE - 1; s >= 0; s--) if (b[s]) lo = 4'(s);
    for (int s = 0; s < SEGS_PER_WEDGE; s++)      if (b[s]) hi = 4'(s);
    return {hi, lo};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_code <= '0;
      lo_seg   <= '0;
      hi_seg   <= '0;
      lo_trk   <= '0;
      hi_trk   <= '0;
    end else if (ce && bits_phase == 2'd0) begin
      for (int w = 0; w < 2; w++) begin
        logic [7:0] a;
        a = addr_prom(trk_bit[w]);
        hit_code[w] <= code_prom(trk_bit[w]);
        lo_seg[w]   <= a[3:0];
        hi_seg[w]   <= a[7:4];
        lo_trk[w]   <= trk_in[w][a[3:0]];
        hi_trk[w]   <= trk_in[w][a[7:4]];
      end
    end
  end

  function automatic logic [2:0] slot_of(input logic [1:0] c, input int l);
    return {c, 1'b0} + 3'(l);
  endfunction

  // bus drive: slot cycle 0,1,2 in phases 3,0,1
  logic       cyc_ok;
  logic [1:0] cyc;
  always_comb begin
    cyc_ok = 1'b1;
    case (phase)
      2'd3:    cyc = 2'd0;
      2'd0:    cyc = 2'd1;
      2'd1:    cyc = 2'd2;
      default: begin cyc = 2'd0; cyc_ok = 1'b0; end
    endcase

    lane = '0;
    for (int w = 0; w < 2; w++) begin
      if (cyc_ok && slot_code[w] != TT_NO_SLOT && hit_code[w] != 2'd0) begin
        for (int l = 0; l < 2; l++) begin
          if (slot_of(cyc, l) == slot_code[w]) begin
            lane[l].valid = 1'b1;
            lane[l].seg   = lo_seg[w];
            lane[l].trk   = lo_trk[w];
          end else if (hit_code[w] == 2'd2 && slot_of(cyc, l) == slot_code[w] + 3'd1
                       && slot_of(cyc, l) < 3'(TT_MAX_TRACKS)) begin
            lane[l].valid = 1'b1;
            lane[l].seg   = hi_seg[w];
            lane[l].trk   = hi_trk[w];
          end
        end
      end
    end
  end
endmodule
