// data_board -- one XTRP Data Board: 30 degrees of azimuth, two 15-degree wedges,
// 24 XFT segments.
//
// Data path for each 132 ns crossing (phase = 33 ns step inside the crossing):
//   crossing N     the two XFT cables deliver four 48-bit words each; the eight
//                  Pipe FPGAs (four per wedge) demultiplex them (xtrp_pipe);
//   crossing N+1   the 24 segment RAMs (lut_ram, 32K x 36) are read four times,
//                  address {phase, 13-bit track}, one lookup per phase;
//                  stage 0 (seg_or) ORs the 12 RAMs of each wedge, stages 1 and
//                  2 (wedge_or) OR across wedges and boards, one step each;
//   end of N+2     extrap_out presents the L1 MUON and L1 CAL words, held
//                  through crossing N+3.
// The last cable word of crossing N therefore reaches the outputs 9 cycles
// (297 ns) later, and the first 12 cycles (396 ns) later.
// In parallel track_fpga turns the phase-0 Track Trigger bits into hit codes and
// drives up to two tracks per wedge on the Track Trigger bus, and the Pipes keep
// every crossing in their Level-1 pipelines for the token-ring read-out.
//
// Configuration bus (stands in for the board's VME interface; it is not gated
// by ce, as the board's VME logic runs from its own oscillator clock):
//   unit cfg_addr[31:28] = 2, board cfg_addr[27:24] = board_id or 15 (all boards),
//   local = cfg_addr[23:0]:
//   local[23] = 1   lookup RAM write: local[18:15] segment 0..11, local[14:0] RAM
//                   address, local[19] wedge, local[22] = 1 writes both wedges,
//                   data cfg_wdata[35:0]. With board 15 and local[22] one write
//                   loads the same map into the 24 RAMs of a segment position.
//   local[23] = 0, register local[7:0]:
//     0x00 Level-1 pipeline depth (1..32)      0x01 bit 0: VME test input mode
//     0x02 read: sync error per Pipe; write: clear
//     0x08+p test tracks of Pipe p ([38:0])
//     0x20+12w+s RAM bypass data, wedge w segment s     0x38 bypass enable mask
//     read only: 0x40+w stage 0, 0x42+w stage 1, 0x44+w stage 2,
//                0x46+w L1 MUON word, 0x48+w L1 CAL word.
// Reads return data on cfg_rdata one cycle after the address, zero when the
// board is not addressed, so boards can be ORed.
//
// From the paper: board organisation, 8 Pipes, 24 RAMs of 32K x 36, the staged
// OR compression with VME bypass and readback, the outputs, the Track FPGA, the
// broadcast table download. Own choices: the register map, the exact cycle
// schedule and the use of one clock with a clock enable.
//
// The reset also disables the assertion at the end while it is active; lint
// reports that as a synchronous use of the asynchronous reset. It builds no
// logic, so the warning stands.
module data_board
  import xtrp_pkg::*;
#(
  parameter int unsigned MAX_DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ce,
  input  logic [1:0]           phase,
  input  logic [3:0]           board_id,
  // XFT cables, one per wedge
  input  xft_word_t [1:0]      xft,
  // Level-1 decision
  input  logic                 l1_accept,
  input  logic [1:0]           l1_buf,
  // token-ring read-out
  input  logic                 tok_in,
  input  logic [1:0]           rd_buf,
  input  logic                 hold,
  output logic                 tok_out,
  output logic                 ro_valid,
  output l2_word_t             ro_word,
  // compression links to the neighbouring boards
  output wedge_bits_t          to_below,
  output wedge_bits_t          to_above,
  input  wedge_bits_t          from_below,
  input  wedge_bits_t          from_above,
  // Level-1 outputs
  output muon_word_t [1:0]     muon,
  output logic [1:0][CAL_BITS-1:0] cal,
  // Track Trigger interface
  output logic [1:0][1:0]      hit_code,
  input  logic [1:0][2:0]      slot_code,
  output tt_lane_t [1:0]       lane,
  // configuration bus
  input  logic                 cfg_we,
  input  logic [31:0]          cfg_addr,
  input  logic [63:0]          cfg_wdata,
  output logic [63:0]          cfg_rdata
);
  // ---------------------------------------------------------------- config
  logic        sel;
  logic [23:0] loc;
  assign loc = cfg_addr[23:0];
  assign sel = (cfg_addr[31:28] == 4'd2) &&
               (cfg_addr[27:24] == board_id || cfg_addr[27:24] == 4'hF);

  logic [$clog2(MAX_DEPTH):0]                 depth;
  logic                                        test_mode;
  track_t [PIPES_PER_BRD-1:0][2:0]             test_trk;
  logic [1:0][SEGS_PER_WEDGE-1:0][LUT_DW-1:0]  byp_data;
  logic [1:0][SEGS_PER_WEDGE-1:0]              byp_en;
  logic                                        sync_clr;
  logic [PIPES_PER_BRD-1:0]                    sync_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      depth     <= ($clog2(MAX_DEPTH)+1)'(MAX_DEPTH);
      test_mode <= 1'b0;
      test_trk  <= {(PIPES_PER_BRD*3){NO_TRACK}};
      byp_data  <= '0;
      byp_en    <= '0;
      sync_clr  <= 1'b0;
    end else begin
      sync_clr <= 1'b0;
      if (cfg_we && sel && !loc[23]) begin
        case (loc[7:0]) inside
          8'h00: depth     <= cfg_wdata[$clog2(MAX_DEPTH):0];
          8'h01: test_mode <= cfg_wdata[0];
          8'h02: sync_clr  <= 1'b1;
          [8'h08:8'h0F]: test_trk[loc[2:0]] <= cfg_wdata[3*$bits(track_t)-1:0];
          [8'h20:8'h37]: begin
            if (loc[7:0] < 8'h2C) byp_data[0][loc[3:0]] <= cfg_wdata[LUT_DW-1:0];
            else                  byp_data[1][4'(loc[7:0] - 8'h2C)] <= cfg_wdata[LUT_DW-1:0];
          end
          8'h38: byp_en <= cfg_wdata[2*SEGS_PER_WEDGE-1:0];
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- Pipes
  track_t [PIPES_PER_BRD-1:0][2:0] pipe_trk;
  logic   [PIPES_PER_BRD:0]        tok;
  logic   [PIPES_PER_BRD-1:0]      p_valid;
  l2_word_t [PIPES_PER_BRD-1:0]    p_word;

  assign tok[0]  = tok_in;
  assign tok_out = tok[PIPES_PER_BRD];

  for (genvar p = 0; p < PIPES_PER_BRD; p++) begin : g_pipe
    xtrp_pipe #(.MAX_DEPTH(MAX_DEPTH)) u_pipe (
      .clk, .rst_n, .ce, .phase,
      .pipe_idx  (2'(p % PIPES_PER_WEDGE)),
      .gseg_base (9'(board_id * 24 + p * 3)),
      .xft       (xft[p / PIPES_PER_WEDGE]),
      .test_mode,
      .test_trk  (test_trk[p]),
      .trk_out   (pipe_trk[p]),
      .sync_err  (sync_err[p]),
      .sync_clr,
      .depth, .l1_accept, .l1_buf,
      .tok_in    (tok[p]),
      .rd_buf, .hold,
      .tok_out   (tok[p+1]),
      .ro_valid  (p_valid[p]),
      .ro_word   (p_word[p])
    );
  end

  always_comb begin
    ro_valid = |p_valid;
    ro_word  = '0;
    for (int p = 0; p < PIPES_PER_BRD; p++) ro_word |= p_word[p];
  end

  // ---------------------------------------------------------------- RAMs
  logic [1:0][SEGS_PER_WEDGE-1:0][LUT_DW-1:0] ram_q;
  track_t [1:0][SEGS_PER_WEDGE-1:0]           seg_trk;
  logic [1:0] ram_phase;                       // lookup phase of ram_q
  assign ram_phase = phase - 2'd1;

  for (genvar w = 0; w < 2; w++) begin : g_w
    for (genvar s = 0; s < SEGS_PER_WEDGE; s++) begin : g_s
      logic we;
      assign seg_trk[w][s] = pipe_trk[w * PIPES_PER_WEDGE + s / 3][s % 3];
      assign we = cfg_we && sel && loc[23] && loc[18:15] == 4'(s) &&
                  (loc[22] || loc[19] == 1'(w));
      lut_ram #(.AW(LUT_AW), .DW(LUT_DW)) u_ram (
        .clk, .ce,
        .raddr ({phase, seg_trk[w][s]}),
        .rdata (ram_q[w][s]),
        .we,
        .waddr (loc[LUT_AW-1:0]),
        .wdata (cfg_wdata[LUT_DW-1:0])
      );
    end
  end

  // ---------------------------------------------------------------- compression
  stage0_t [1:0]     s0;
  logic [1:0][1:0]   s0_phase;
  wedge_bits_t [1:0] s1, s2;
  logic [1:0]        s2_phase;

  for (genvar w = 0; w < 2; w++) begin : g_or
    seg_or u_seg_or (
      .clk, .rst_n, .ce,
      .lphase      (ram_phase),
      .ram_data    (ram_q[w]),
      .bypass_en   (byp_en[w]),
      .bypass_data (byp_data[w]),
      .q           (s0[w]),
      .q_phase     (s0_phase[w])
    );
  end

  wedge_or u_wedge_or (
    .clk, .rst_n, .ce,
    .s0, .s0_phase (s0_phase[0]),
    .to_below, .to_above, .from_below, .from_above,
    .s1, .s2, .s2_phase
  );

  extrap_out #(.NW(2)) u_out (
    .clk, .rst_n, .ce, .s2, .s2_phase, .muon, .cal
  );

  // ---------------------------------------------------------------- Track FPGA
  logic [1:0][SEGS_PER_WEDGE-1:0] trk_bit;
  always_comb
    for (int w = 0; w < 2; w++)
      for (int s = 0; s < SEGS_PER_WEDGE; s++)
        trk_bit[w][s] = ram_q[w][s][SIDE_W + TRK_BIT];

  track_fpga u_track (
    .clk, .rst_n, .ce, .phase,
    .bits_phase (ram_phase),
    .trk_bit, .trk_in (seg_trk),
    .hit_code, .slot_code, .lane
  );

  // ---------------------------------------------------------------- readback
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_rdata <= '0;
    else begin
      cfg_rdata <= '0;
      if (sel && !loc[23]) begin
        case (loc[7:0])
          8'h00: cfg_rdata <= 64'(depth);
          8'h01: cfg_rdata <= 64'(test_mode);
          8'h02: cfg_rdata <= 64'(sync_err);
          8'h38: cfg_rdata <= 64'(byp_en);
          8'h40: cfg_rdata <= 64'(s0[0]);
          8'h41: cfg_rdata <= 64'(s0[1]);
          8'h42: cfg_rdata <= 64'(s1[0]);
          8'h43: cfg_rdata <= 64'(s1[1]);
          8'h44: cfg_rdata <= 64'(s2[0]);
          8'h45: cfg_rdata <= 64'(s2[1]);
          8'h46: cfg_rdata <= 64'(muon[0]);
          8'h47: cfg_rdata <= 64'(muon[1]);
          8'h48: cfg_rdata <= 64'(cal[0]);
          8'h49: cfg_rdata <= 64'(cal[1]);
          default: ;
        endcase
      end
    end
  end

  // only the token holder may drive the read-out bus
  a_one_driver: assert property (@(posedge clk) disable iff (!rst_n) (p_valid & (p_valid - 1'b1)) == '0);
endmodule
