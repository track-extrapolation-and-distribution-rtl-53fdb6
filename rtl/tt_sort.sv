// tt_sort -- one "Sort" FPGA of the Track Trigger.
//
// The Track Trigger receives at most six tracks per crossing and evaluates all
// 15 pairs (6 pick 2) with lookup RAMs addressed by two 9-bit track fields. Six
// Sort FPGAs prepare those addresses: three extract the pT field of each track
// (7-bit pT bin, isolation bit, short-track bit) and three the 9-bit global phi,
// the track's segment number 0..287 formed from its wedge and segment (the XFT
// local phi is dropped). Each Sort FPGA serves five of the fifteen pairs.
//
// KIND = 0 makes a pT sorter, KIND = 1 a phi sorter; GROUP (0..2) selects pairs
// 5*GROUP .. 5*GROUP+4 of the list (0,1),(0,2),..,(0,5),(1,2),..,(4,5).
// An empty slot reads as pT code 124 (the XFT's "no track") with the other pT
// bits zero, and as phi 511 (no segment has that number), so the pair RAMs can
// hold single-track criteria as (track, empty) pairs.
// pair_addr[k] = {field(first track), field(second track)}, 18 bits.
//
// From the paper: six Sort FPGAs, pT half and phi half, 9-bit fields, the 9-bit
// global phi and five pairs each. Own choices: the pair order, the field bit
// order {short, iso, pT} and the codes for an empty slot.
//
// Timing: one register, loaded on a clock edge with ce && load.
module tt_sort
  import xtrp_pkg::*;
#(
  parameter bit          KIND  = 1'b0,
  parameter int unsigned GROUP = 0
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ce,
  input  logic                      load,
  input  logic   [5:0]              valid,
  input  track_t [5:0]              trk,
  input  logic   [5:0][8:0]         gphi,
  output logic   [4:0][17:0]        pair_addr
);
  logic [5:0][8:0] fld;

  always_comb begin
    for (int t = 0; t < 6; t++) begin
      if (KIND == 1'b0)
        fld[t] = valid[t] ? {trk[t].short_trk, trk[t].iso, trk[t].pt}
                          : {2'b00, PT_NO_TRACK};
      else
        fld[t] = valid[t] ? gphi[t] : GPHI_NONE;
    end
  end

  // pair k -> (first, second)
  function automatic logic [5:0] pair_of(input int k);
    int n;
    n = 0;
    for (int i = 0; i < 6; i++)
      for (int j = i + 1; j < 6; j++) begin
        if (n == k) return {3'(i), 3'(j)};
        n++;
      end
    return '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pair_addr <= '0;
    else if (ce && load) begin
      for (int p = 0; p < 5; p++) begin
        logic [5:0] ij;
        ij = pair_of(5 * GROUP + p);
        pair_addr[p] <= {fld[ij[5:3]], fld[ij[2:0]]};
      end
    end
  end
endmodule
