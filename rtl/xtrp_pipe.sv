// xtrp_pipe -- one "Pipe" FPGA of a Data Board: input demultiplexer, Level-1
// pipeline, Level-2 buffers and token-ring read-out for three XFT segments.
//
// Input: the XFT sends a wedge's twelve 13-bit track words as four 48-bit words,
// one per 33 ns phase of the 132 ns crossing; all four Pipes of a wedge see the
// same cable bus and Pipe k keeps the word of phase k (segments 3k..3k+2). At the
// end of the crossing (ev_stb) the three tracks move to trk_out, where the lookup
// RAMs read them during the whole next crossing. In VME test mode the tracks come
// from the test_trk register instead of the cable.
//
// Synchronisation check: each cable word carries a bunch0 bit and an 8-bit bunch
// number. The Pipe flags sync_err (sticky, cleared by sync_clr) if bunch0 comes
// with a non-zero number or the number does not step by one from crossing to
// crossing. sync_clr (and the test mode) also forget the last number, so the
// check starts again from the next crossing.
//
// Level 1: the three tracks and the bunch number are written into l1_pipeline
// every crossing; an accept copies the crossing `depth` back into one of four
// Level-2 buffers.
//
// Read-out: when the Clock/Control board's token arrives (tok_in, with rd_buf
// naming the Level-2 buffer), the Pipe puts each of its non-trivial tracks
// (pT code not 124) on the read-out bus, one per cycle, as an l2_word_t with its
// global segment number, then passes the token on (tok_out, one cycle). The
// bus is wired-OR across Pipes: ro_word is zero whenever ro_valid is low. hold
// pauses the scan (the Clock/Control FIFOs are nearly full).
//
// From the paper: 1-to-4 multiplexing at 33 ns, 3 segments per Pipe, four Pipes
// per wedge, bunch0 and bunch number on every cable, the pipeline up to 32 deep,
// the token ring and the VME test input. Own choices: which phase carries which
// segments, the check rule, the word formats and the one-track-per-cycle scan.
module xtrp_pipe
  import xtrp_pkg::*;
#(
  parameter int unsigned MAX_DEPTH = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        ce,
  input  logic [1:0]                  phase,      // 33 ns phase, 3 = end of crossing
  input  logic [1:0]                  pipe_idx,   // position in the wedge, 0..3
  input  logic [8:0]                  gseg_base,  // global segment of trk_out[0]
  // cable and test input
  input  xft_word_t                   xft,
  input  logic                        test_mode,
  input  track_t [2:0]                test_trk,
  output track_t [2:0]                trk_out,
  output logic                        sync_err,
  input  logic                        sync_clr,
  // Level 1
  input  logic [$clog2(MAX_DEPTH):0]  depth,
  input  logic                        l1_accept,
  input  logic [1:0]                  l1_buf,
  // token-ring read-out
  input  logic                        tok_in,
  input  logic [1:0]                  rd_buf,
  input  logic                        hold,
  output logic                        tok_out,
  output logic                        ro_valid,
  output l2_word_t                    ro_word
);
  logic ev_stb;
  assign ev_stb = (phase == 2'd3);

  // ---- demultiplex -----------------------------------------------------------
  track_t [2:0] staged;
  logic [7:0]   bunch_st, bunch_q, bunch_prev;
  logic         bunch0_st, have_prev;
  logic         my_phase;
  assign my_phase = (phase == pipe_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      staged    <= {3{NO_TRACK}};
      trk_out   <= {3{NO_TRACK}};
      bunch_st  <= '0;
      bunch0_st <= 1'b0;
      bunch_q   <= '0;
    end else if (ce) begin
      if (my_phase) begin
        staged    <= xft.trk;
        bunch_st  <= xft.bunch;
        bunch0_st <= xft.bunch0;
      end
      if (ev_stb) begin
        if (test_mode)     trk_out <= test_trk;
        else if (my_phase) trk_out <= xft.trk;   // Pipe 3 takes its word now
        else               trk_out <= staged;
        bunch_q <= my_phase ? xft.bunch : bunch_st;
      end
    end
  end

  // ---- bunch number check, once per crossing ------------------------------------
  logic [7:0] b_now;
  logic       b0_now, bad;
  always_comb begin
    b_now  = my_phase ? xft.bunch  : bunch_st;
    b0_now = my_phase ? xft.bunch0 : bunch0_st;
    bad    = b0_now ? (b_now != 8'd0) : (have_prev && b_now != bunch_prev + 8'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_err   <= 1'b0;
      have_prev  <= 1'b0;
      bunch_prev <= '0;
    end else begin
      if (sync_clr) begin                      // clear and resynchronise
        sync_err  <= 1'b0;
        have_prev <= 1'b0;
      end
      if (ce && ev_stb) begin
        if (test_mode) begin
          have_prev <= 1'b0;
        end else begin
          if (bad) sync_err <= 1'b1;
          have_prev  <= 1'b1;
          bunch_prev <= b_now;
        end
      end
    end
  end

  // ---- Level-1 pipeline and Level-2 buffers ----------------------------------------
  localparam int unsigned PW = 8 + 3 * $bits(track_t);
  logic [3:0][PW-1:0] l2_q;

  l1_pipeline #(.W(PW), .MAX_DEPTH(MAX_DEPTH), .N_L2(4)) u_l1 (
    .clk, .rst_n, .ce, .ev_stb,
    .din       ({bunch_q, trk_out}),
    .depth, .l1_accept, .l1_buf,
    .l2_q
  );

  // ---- token read-out ------------------------------------------------------------------
  logic         busy;
  logic [1:0]   cursor;
  logic [1:0]   buf_sel;
  track_t [2:0] l2_trk;
  logic         found;
  logic [1:0]   fidx;

  assign l2_trk = l2_q[buf_sel][3*$bits(track_t)-1:0];

  always_comb begin
    found = 1'b0;
    fidx  = 2'd0;
    for (int i = 2; i >= 0; i--) begin
      if (2'(i) >= cursor && l2_trk[i].pt != PT_NO_TRACK) begin
        found = 1'b1;
        fidx  = 2'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cursor   <= '0;
      buf_sel  <= '0;
      tok_out  <= 1'b0;
      ro_valid <= 1'b0;
      ro_word  <= '0;
    end else if (ce) begin
      tok_out  <= 1'b0;
      ro_valid <= 1'b0;
      ro_word  <= '0;
      if (!busy) begin
        if (tok_in) begin
          busy    <= 1'b1;
          cursor  <= '0;
          buf_sel <= rd_buf;
        end
      end else if (!hold) begin
        if (found) begin
          ro_valid     <= 1'b1;
          ro_word.eoe  <= 1'b0;
          ro_word.gseg <= gseg_base + 9'(fidx);
          ro_word.trk  <= l2_trk[fidx];
          cursor       <= fidx + 2'd1;
          if (fidx == 2'd2) begin     // last segment: pass the token now
            busy    <= 1'b0;
            tok_out <= 1'b1;
          end
        end else begin
          busy    <= 1'b0;
          tok_out <= 1'b1;
        end
      end
    end
  end
endmodule
