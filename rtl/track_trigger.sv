// track_trigger -- the Track Trigger board: Level-1 decisions from XFT tracks only.
//
// Per 132 ns crossing:
//  1. Slot codes (phase 2). Every wedge reports 0, 1 or 2 eligible tracks (hit
//     code from its Data Board). The board adds them up in wedge order and
//     returns to each wedge a 3-bit code: the first of the six track slots the
//     wedge may fill, or 7 for none. A total above six sets the auto-accept bit.
//  2. Track bus (phases 3, 0, 1). The Data Boards place the tracks on the
//     time-multiplexed bus, two slots per 33 ns cycle; the board stores each
//     with the wedge it assigned to that slot.
//  3. Sort (phase 2). Six tt_sort units form, for each of the 15 track pairs, a
//     9+9-bit pT address and a 9+9-bit global-phi address.
//  4. Pair RAMs (phases 3 and 1). Fifteen pT RAMs and fifteen phi RAMs, 512K x 8,
//     are read twice, with the 19th address bit ("phase") 0 and then 1, 66 ns
//     apart. For every pair the pT and phi outputs are ANDed, and all pairs ORed:
//     8 decision bits per read, 16 in all.
//  5. Trigger word (end of the following phase 2): the 16 bits, with bit 15
//     replaced by the auto-accept bit, so 15 programmable triggers remain. The
//     word is written into a Level-1 pipeline with four Level-2 buffers.
// From the last track on the bus to the trigger word takes 6 cycles (198 ns).
//
// From the paper: 0/1/2 tracks per wedge, 3-bit codes from the Track Trigger,
// at most six tracks, 15 pairs, six Sort FPGAs, 15 + 15 RAMs of 512K x 8 with a
// phase bit, AND per pair and OR over pairs, 8 bits every 66 ns, a 16-bit word
// with one bit reserved for auto-accept above six tracks, and the Level-2
// buffer. Own choices: the codes are computed by an adder chain instead of
// lookup RAMs, the bus schedule, the choice of bit 15 for auto-accept, and that
// with more than six tracks the pair bits of the first six are still reported.
//
// Configuration (unit cfg_addr[31:28] = 1): local[18:0] RAM address,
// local[22:19] pair 0..14, local[23] 0 = pT RAM, 1 = phi RAM, data [7:0];
// pair field 15 selects registers: 0x00 Level-1 pipeline depth (write),
// 0x01 trigger word (read).
module track_trigger
  import xtrp_pkg::*;
#(
  parameter int unsigned MAX_DEPTH = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ce,
  input  logic [1:0]                phase,
  input  logic [N_WEDGES-1:0][1:0]  hit_code,
  output logic [N_WEDGES-1:0][2:0]  slot_code,
  input  tt_lane_t [1:0]            lane,
  output logic [15:0]               trig_word,
  output logic [2:0]                n_tracks,     // tracks used by the last decision
  input  logic                      l1_accept,
  input  logic [1:0]                l1_buf,
  output logic [3:0][15:0]          l2_trig,
  input  logic                      cfg_we,
  input  logic [31:0]               cfg_addr,
  input  logic [63:0]               cfg_wdata,
  output logic [63:0]               cfg_rdata
);
  // ---------------------------------------------------------------- slot codes
  logic [N_WEDGES-1:0][2:0] code_nxt;
  logic [5:0][4:0]          slot_wedge_nxt, slot_wedge;
  logic                     auto_nxt, auto_c, auto_s;
  logic [5:0]               total_nxt;

  always_comb begin
    logic [5:0] run;
    run            = '0;
    slot_wedge_nxt = '0;
    for (int w = 0; w < N_WEDGES; w++) begin
      code_nxt[w] = TT_NO_SLOT;
      if (hit_code[w] != 2'd0 && run < 6'(TT_MAX_TRACKS)) begin
        code_nxt[w] = 3'(run);
        for (int t = 0; t < 2; t++)
          if (t < int'(hit_code[w]) && run + 6'(t) < 6'(TT_MAX_TRACKS))
            slot_wedge_nxt[run + 6'(t)] = 5'(w);
      end
      run += 6'(hit_code[w] > 2'd2 ? 2'd2 : hit_code[w]);
    end
    total_nxt = run;
    auto_nxt  = (run > 6'(TT_MAX_TRACKS));
  end

  logic auto_q;
  logic [5:0] total_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_code  <= {N_WEDGES{TT_NO_SLOT}};
      slot_wedge <= '0;
      auto_q     <= 1'b0;
      total_q    <= '0;
    end else if (ce && phase == 2'd2) begin
      slot_code  <= code_nxt;
      slot_wedge <= slot_wedge_nxt;
      auto_q     <= auto_nxt;
      total_q    <= total_nxt;
    end
  end

  // ---------------------------------------------------------------- track bus
  logic   [5:0]      t_valid;
  track_t [5:0]      t_trk;
  logic   [5:0][8:0] t_gphi;
  logic   [2:0]      n_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= '0;
      t_trk   <= '0;
      t_gphi  <= '0;
      auto_c  <= 1'b0;
      n_c     <= '0;
    end else if (ce) begin
      logic [1:0] cyc;
      logic       take;
      take = 1'b1;
      case (phase)
        2'd3:    cyc = 2'd0;
        2'd0:    cyc = 2'd1;
        2'd1:    cyc = 2'd2;
        default: begin cyc = 2'd0; take = 1'b0; end
      endcase
      if (take) begin
        for (int l = 0; l < 2; l++) begin
          logic [2:0] s;
          s = {cyc, 1'b0} + 3'(l);
          t_valid[s] <= lane[l].valid;
          t_trk[s]   <= lane[l].trk;
          t_gphi[s]  <= gseg_of(slot_wedge[s], lane[l].seg);
        end
      end
      if (phase == 2'd1) begin
        auto_c <= auto_q;
        n_c    <= (total_q > 6'd6) ? 3'd6 : 3'(total_q);
      end
    end
  end

  // ---------------------------------------------------------------- sort FPGAs
  logic [14:0][17:0] pt_addr, phi_addr;
  logic              sort_load;
  assign sort_load = (phase == 2'd2);

  for (genvar g = 0; g < 3; g++) begin : g_sort
    tt_sort #(.KIND(1'b0), .GROUP(g)) u_pt (
      .clk, .rst_n, .ce, .load (sort_load), .valid (t_valid), .trk (t_trk),
      .gphi (t_gphi), .pair_addr (pt_addr[5*g +: 5])
    );
    tt_sort #(.KIND(1'b1), .GROUP(g)) u_phi (
      .clk, .rst_n, .ce, .load (sort_load), .valid (t_valid), .trk (t_trk),
      .gphi (t_gphi), .pair_addr (phi_addr[5*g +: 5])
    );
  end

  logic [2:0] n_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      auto_s <= 1'b0;
      n_s    <= '0;
    end else if (ce && sort_load) begin
      auto_s <= auto_c;
      n_s    <= n_c;
    end
  end

  // ---------------------------------------------------------------- pair RAMs
  logic        sel;
  logic [23:0] loc;
  assign loc = cfg_addr[23:0];
  assign sel = cfg_we && cfg_addr[31:28] == 4'd1;

  logic        rd_hi;                       // 19th address bit
  assign rd_hi = (phase == 2'd1);

  logic [14:0][7:0] pt_q, phi_q;
  logic [7:0]       dec;
  for (genvar k = 0; k < TT_PAIRS; k++) begin : g_pair
    lut_ram #(.AW(19), .DW(8)) u_pt_ram (
      .clk, .ce,
      .raddr ({rd_hi, pt_addr[k]}), .rdata (pt_q[k]),
      .we    (sel && loc[22:19] == 4'(k) && !loc[23]),
      .waddr (loc[18:0]), .wdata (cfg_wdata[7:0])
    );
    lut_ram #(.AW(19), .DW(8)) u_phi_ram (
      .clk, .ce,
      .raddr ({rd_hi, phi_addr[k]}), .rdata (phi_q[k]),
      .we    (sel && loc[22:19] == 4'(k) && loc[23]),
      .waddr (loc[18:0]), .wdata (cfg_wdata[7:0])
    );
  end

  always_comb begin
    dec = '0;
    for (int k = 0; k < TT_PAIRS; k++) dec |= pt_q[k] & phi_q[k];
  end

  // ---------------------------------------------------------------- trigger word
  logic [7:0] dec_lo;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_lo    <= '0;
      trig_word <= '0;
      n_tracks  <= '0;
    end else if (ce) begin
      if (phase == 2'd0) dec_lo <= dec;
      if (phase == 2'd2) begin
        trig_word <= {auto_s, dec[6:0], dec_lo};
        n_tracks  <= n_s;
      end
    end
  end

  logic [$clog2(MAX_DEPTH):0] depth;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) depth <= ($clog2(MAX_DEPTH)+1)'(MAX_DEPTH);
    else if (sel && loc[22:19] == 4'd15 && loc[7:0] == 8'h00)
      depth <= cfg_wdata[$clog2(MAX_DEPTH):0];
  end

  l1_pipeline #(.W(16), .MAX_DEPTH(MAX_DEPTH), .N_L2(4)) u_l2 (
    .clk, .rst_n, .ce, .ev_stb (phase == 2'd3), .din (trig_word), .depth,
    .l1_accept, .l1_buf, .l2_q (l2_trig)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_rdata <= '0;
    else begin
      cfg_rdata <= '0;
      if (cfg_addr[31:28] == 4'd1 && loc[22:19] == 4'd15) begin
        case (loc[7:0])
          8'h00: cfg_rdata <= 64'(depth);
          8'h01: cfg_rdata <= 64'(trig_word);
          default: ;
        endcase
      end
    end
  end
endmodule
