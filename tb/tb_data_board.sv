// tb_data_board -- self-checking test of one Data Board (board 3) at full size.
// The 24 segment RAMs are loaded through the configuration bus (broadcast to
// both wedges) with random words for a pool of eight track codes; random
// crossings built from that pool then come in on the two cables. From its own
// copy of the table and the bit map the testbench predicts, crossing by crossing:
//   * the L1 MUON and L1 CAL words of both wedges, exactly 9 cycles after the last
//     cable word (with fixed per-phase words from the neighbour boards), and the
//     words sent to the neighbours;
//   * the hit codes and the tracks on the Track Trigger bus (the slot codes are
//     handed out as the Track Trigger would for this board alone);
//   * the track list read out by the token after random Level-1 accepts.
// It also exercises the RAM bypass, the VME test input, the sync-error register
// and the stage readback.
module tb_data_board;
  import xtrp_pkg::*;
  localparam logic [3:0] BID = 4'd3;
  localparam int NX = 400;            // crossings
  logic clk = 0, rst_n = 1, ce = 1;
  logic [1:0] phase = 2'd0, l1_buf = '0, rd_buf = '0;
  xft_word_t [1:0] xft = '0;
  logic l1_accept = 0, tok_in = 0, hold = 0, tok_out, ro_valid;
  l2_word_t ro_word;
  wedge_bits_t to_below, to_above, from_below, from_above;
  muon_word_t [1:0] muon;
  logic [1:0][7:0] cal;
  logic [1:0][1:0] hit_code;
  logic [1:0][2:0] slot_code;
  tt_lane_t [1:0] lane;
  logic cfg_we = 0;
  logic [31:0] cfg_addr = '0;
  logic [63:0] cfg_wdata = '0, cfg_rdata;
  int checks = 0, failures = 0, n_words = 0, n_bus = 0, n_acc = 0;

  data_board #(.MAX_DEPTH(32)) dut (.clk, .rst_n, .ce, .phase, .board_id (BID), .xft,
    .l1_accept, .l1_buf, .tok_in, .rd_buf, .hold, .tok_out, .ro_valid, .ro_word,
    .to_below, .to_above, .from_below, .from_above, .muon, .cal, .hit_code, .slot_code,
    .lane, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fail(input string m); failures++; if (failures < 20) $display("FAIL %s", m); endtask

  // ---------------------------------------------------------------- table model
  track_t      pool [8];
  logic [35:0] C [12][4][8];              // segment, phase, pool index
  wedge_bits_t FB [4], FA [4];            // neighbour words per lookup phase
  logic [1:0][11:0]       byp_en = '0;
  logic [1:0][11:0][35:0] byp = '0;

  assign from_below = FB[phase + 2'd1];
  assign from_above = FA[phase + 2'd1];
  // slot codes as the Track Trigger gives them when only this board has tracks
  assign slot_code[0] = hit_code[0] != 0 ? 3'd0 : 3'd7;
  assign slot_code[1] = hit_code[1] != 0 ? {1'b0, hit_code[0]} : 3'd7;

  function automatic stage0_t s0m(input logic [1:0] ph, input logic [11:0][35:0] r);
    stage0_t m;
    m = '0;
    for (int s = 0; s < 12; s++) begin
      logic [35:0] w;
      w = r[s];
      for (int k = 0; k < 6; k++) begin
        m.cm.below[k] |= w[k]; m.cm.own[k] |= w[6+k]; m.cm.above[k] |= w[12+k];
      end
      case (ph)
        2'd0: begin
          m.im.own |= w[25:18];
          if (s < 6) m.im.below |= w[33:26]; else m.im.above |= w[33:26];
        end
        2'd1: begin
          m.im.below[1:0] |= w[19:18]; m.im.below[3:2] |= w[25:24];
          m.im.own[1:0]   |= w[21:20]; m.im.own[3:2]   |= w[27:26];
          m.im.above[1:0] |= w[23:22]; m.im.above[3:2] |= w[29:28];
        end
        default: for (int k = 0; k < 6; k++) begin
          m.im.below[k] |= w[18+k]; m.im.own[k] |= w[24+k]; m.im.above[k] |= w[30+k];
        end
      endcase
    end
    return m;
  endfunction

  // per crossing: pool index of every segment, and predictions
  int               tid  [NX][2][12];
  muon_word_t [1:0] e_mu [NX];
  logic [1:0][7:0]  e_cal [NX];
  wedge_bits_t      e_tb [NX][4], e_ta [NX][4];
  tt_lane_t [5:0]   e_slot [NX];
  logic [1:0][1:0]  e_hc [NX];
  bit               valid_x [NX];           // prediction trustworthy for that crossing

  function automatic void predict(input int n);
    muon_word_t [1:0] mu;
    logic [1:0][7:0] cl;
    tt_lane_t [5:0] sl;
    logic [1:0][1:0] hc;
    int c;
    for (int p = 0; p < 4; p++) begin
      stage0_t s0 [2];
      wedge_bits_t s2 [2];
      for (int w = 0; w < 2; w++) begin
        logic [11:0][35:0] r;
        for (int s = 0; s < 12; s++) r[s] = byp_en[w][s] ? byp[w][s] : C[s][p][tid[n][w][s]];
        s0[w] = s0m(2'(p), r);
      end
      s2[0].cm = s0[0].cm.own | s0[1].cm.below | FB[p].cm;
      s2[0].im = s0[0].im.own | s0[1].im.below | FB[p].im;
      s2[1].cm = s0[1].cm.own | s0[0].cm.above | FA[p].cm;
      s2[1].im = s0[1].im.own | s0[0].im.above | FA[p].im;
      e_tb[n][p] = {s0[0].im.below, s0[0].cm.below};
      e_ta[n][p] = {s0[1].im.above, s0[1].cm.above};
      for (int w = 0; w < 2; w++)
        case (p)
          0: begin mu[w].cmu_hi = s2[w].cm[5:0]; cl[w] = s2[w].im; end
          1: begin mu[w].cmu_lo = s2[w].cm[5:0]; mu[w].gap = s2[w].im[1:0]; mu[w].tof = s2[w].im[3:2]; end
          2: begin mu[w].cmx_hi = s2[w].cm[5:0]; mu[w].imu_hi = s2[w].im[5:0]; end
          default: begin mu[w].cmx_lo = s2[w].cm[5:0]; mu[w].imu_lo = s2[w].im[5:0]; end
        endcase
    end
    // Track Trigger: bit 34 of the phase-0 word (the RAM, never the bypass)
    sl = '0; c = 0;
    for (int w = 0; w < 2; w++) begin
      int n1, lo, hi;
      n1 = 0; lo = 0; hi = 0;
      for (int s = 11; s >= 0; s--) if (C[s][0][tid[n][w][s]][34]) begin n1++; lo = s; end
      for (int s = 0; s < 12; s++)  if (C[s][0][tid[n][w][s]][34]) hi = s;
      hc[w] = n1 > 2 ? 2'd2 : 2'(n1);
      if (n1 > 0) begin sl[c] = '{1'b1, 4'(lo), pool[tid[n][w][lo]]}; c++; end
      if (n1 > 1) begin sl[c] = '{1'b1, 4'(hi), pool[tid[n][w][hi]]}; c++; end
    end
    e_mu[n] = mu; e_cal[n] = cl; e_slot[n] = sl; e_hc[n] = hc;
  endfunction

  task automatic cfg_write(input logic [23:0] loc, input logic [63:0] d, input logic [3:0] brd = BID);
    @(negedge clk); ce = 0; cfg_we = 1; cfg_addr = {4'd2, brd, loc}; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;   // ce stays low until the next crossing
  endtask
  task automatic cfg_read(input logic [7:0] a, output logic [63:0] d);
    @(negedge clk); ce = 0; cfg_addr = {4'd2, BID, 16'd0, a};
    @(negedge clk); d = cfg_rdata;
  endtask

  // ---------------------------------------------------------------- read-out
  track_t [7:0][2:0] eff [NX];              // tracks the Pipes held, per crossing
  int    pend_x [$];
  logic [1:0] pend_b [$];
  l2_word_t got [$];
  always @(posedge clk) if (ce && ro_valid) got.push_back(ro_word);
  initial begin
    forever begin
      @(negedge clk);
      if (pend_x.size() != 0) begin
        int x, cyc;
        logic [1:0] b;
        l2_word_t e [$];
        x = pend_x.pop_front(); b = pend_b.pop_front();
        e.delete();
        for (int p = 0; p < 8; p++)
          for (int i = 0; i < 3; i++)
            if (eff[x][p][i].pt != PT_NO_TRACK)
              e.push_back('{eoe: 1'b0, gseg: 9'(BID * 24 + p * 3 + i), trk: eff[x][p][i]});
        got.delete();
        tok_in = 1; rd_buf = b;
        do @(posedge clk); while (!ce);          // the token must meet an enabled edge
        @(negedge clk); tok_in = 0;
        cyc = 0;
        while (!tok_out && cyc < 400) begin hold = ($urandom % 5) == 0; @(negedge clk); cyc++; end
        hold = 0;
        @(posedge clk); #1;                        // the last word comes with the token
        checks++;
        if (got.size() != e.size()) fail($sformatf("read-out of crossing %0d: %0d words, exp %0d", x, got.size(), e.size()));
        else foreach (e[k]) if (got[k] !== e[k]) fail($sformatf("read-out word %0d %h exp %h", k, got[k], e[k]));
        n_words += got.size();
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    logic [7:0] bunch;
    logic [63:0] rd;
    track_t [7:0][2:0] test_trk;
    bit tmode;
    int tt_id [8][3];
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    pool[0] = NO_TRACK;
    for (int v = 1; v < 8; v++) begin pool[v] = 13'($urandom); pool[v].pt = 7'($urandom % 96); end
    for (int p = 0; p < 4; p++) begin FB[p] = 16'($urandom) & 16'h0101 << ($urandom % 7); FA[p] = 16'($urandom) & 16'h0303; end
    // RAM tables, the same for both wedges (local[22] = 1)
    for (int s = 0; s < 12; s++)
      for (int p = 0; p < 4; p++)
        for (int v = 0; v < 8; v++) begin
          logic [35:0] w;
          w = '0;
          if (v != 0) for (int k = 0; k < 3; k++) w[$urandom % 36] = 1'b1;
          if (p == 0) w[34] = (v != 0) && ($urandom % 4 == 0);
          C[s][p][v] = w;
          cfg_write({1'b1, 1'b1, 3'd0, 4'(s), 2'(p), pool[v]}, 64'(w));
        end
    cfg_write(24'h000000, 64'd4);                  // Level-1 depth 4
    bunch = 0; tmode = 0;
    for (int n = 0; n < NX; n++) begin
      bit bad, acc;
      // configuration changes between crossings (predictions skip a few crossings)
      if (n == 150) begin                          // bypass two segments
        byp[0][4] = 36'h0_0004_0041; byp[1][9] = 36'h3_0000_1000;
        cfg_write(24'h000024, 64'(byp[0][4]));
        cfg_write(24'h000035, 64'(byp[1][9]));
        byp_en[0][4] = 1; byp_en[1][9] = 1;
        cfg_write(24'h000038, 64'(byp_en));
      end
      if (n == 220) begin byp_en = '0; cfg_write(24'h000038, 64'd0); end
      if (n == 250) begin                          // VME test input
        for (int p = 0; p < 8; p++) for (int i = 0; i < 3; i++) begin tt_id[p][i] = $urandom % 8; test_trk[p][i] = pool[tt_id[p][i]]; end
        for (int p = 0; p < 8; p++) cfg_write(24'h000008 + 24'(p), 64'(test_trk[p]));
        cfg_write(24'h000001, 64'd1); tmode = 1;
      end
      if (n == 270) begin cfg_write(24'h000001, 64'd0); tmode = 0; end
      for (int w = 0; w < 2; w++) for (int s = 0; s < 12; s++)
        tid[n][w][s] = ($urandom % 3 == 0) ? 1 + $urandom % 7 : 0;
      if (tmode) for (int w = 0; w < 2; w++) for (int s = 0; s < 12; s++)
        tid[n][w][s] = tt_id[4*w + s/3][s%3];
      predict(n);
      valid_x[n] = (!(n >= 148 && n < 154) && !(n >= 218 && n < 224) &&
                        !(n >= 248 && n < 254) && !(n >= 268 && n < 274));
      for (int p = 0; p < 8; p++) for (int i = 0; i < 3; i++) eff[n][p][i] = pool[tid[n][p/4][3*(p%4)+i]];
      bad = (n == 100);
      acc = (n > 40) && ($urandom % 6 == 0) && pend_x.size() == 0 && valid_x[n];
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        phase = 2'(p); ce = 1;
        for (int w = 0; w < 2; w++) begin
          for (int i = 0; i < 3; i++) xft[w].trk[i] = pool[tid[n][w][3*p+i]];
          xft[w].bunch  = bad ? 8'hAA : bunch;
          xft[w].bunch0 = (bunch == 0);
        end
        l1_accept = acc && p == 3; l1_buf = 2'(n_acc);   // buffers in turn
        if (acc && p == 3) begin pend_x.push_back(n - 5); pend_b.push_back(l1_buf); n_acc++; end
        #1;
        // the outputs of crossing x change at the start of crossing x+3: 12 cycles
        // after its first cable word went on, 9 after its last; they show crossing
        // n-3 from phase 0 to phase 3 of crossing n
        if (n >= 5 && (p == 0 || p == 3)) begin
          int x;
          x = n - 3;
          if (valid_x[x]) begin
            checks++;
            if (muon !== e_mu[x] || cal !== e_cal[x])
              fail($sformatf("x%0d p%0d muon %h exp %h cal %h exp %h", x, p, muon, e_mu[x], cal, e_cal[x]));
          end
        end
        // Track Trigger bus: crossing n-1 in phase 3, n-2 in phases 0 and 1
        if (n >= 3 && p != 2) begin
          int x, c;
          x = (p == 3) ? n - 1 : n - 2;
          c = (p == 3) ? 0 : p + 1;
          if (valid_x[x]) begin
            checks++;
            if (lane[0] !== e_slot[x][2*c] || lane[1] !== e_slot[x][2*c+1])
              fail($sformatf("x%0d bus cycle %0d %h %h exp %h %h", x, c, lane[0], lane[1], e_slot[x][2*c], e_slot[x][2*c+1]));
            n_bus += int'(lane[0].valid) + int'(lane[1].valid);
          end
        end
        if (n >= 3 && p == 2 && valid_x[n-1]) begin
          checks++;
          if (hit_code !== e_hc[n-1]) fail($sformatf("x%0d hit code %b exp %b", n-1, hit_code, e_hc[n-1]));
        end
        // words to the neighbours: stage 1 shows lookup phase p+1 in phase p,
        // phase 0 of crossing n-1 in phase 3, the others of crossing n-2
        if (n >= 3) begin
          int q, x;
          q = (p + 1) % 4;
          x = (p == 3) ? n - 1 : n - 2;
          if (valid_x[x]) begin
            checks++;
            if (to_below !== e_tb[x][q] || to_above !== e_ta[x][q])
              fail($sformatf("x%0d p%0d to_below %h exp %h to_above %h exp %h", x, p, to_below, e_tb[x][q], to_above, e_ta[x][q]));
          end
        end
      end
      bunch = (bunch == 8'd158) ? 8'd0 : bunch + 8'd1;
      if (n == 100 || n == 50) begin
        cfg_read(8'h02, rd);
        checks++;
        if (rd[7:0] !== (n == 100 ? 8'hFF : 8'h00)) fail($sformatf("sync error register %h at %0d", rd, n));
        if (n == 100) begin
          cfg_write(24'h000002, 64'd0);
          cfg_read(8'h02, rd);
          checks++; if (rd[7:0] !== 8'h00) fail("sync error not cleared");
        end
      end
      if (n == 300) begin                          // stage readback is live and not zero
        cfg_read(8'h46, rd);
        checks++; if (rd[39:0] !== muon[0]) fail("readback of the MUON word");
        cfg_read(8'h00, rd);
        checks++; if (rd !== 64'd4) fail("readback of the depth");
      end
    end
    repeat (300) @(negedge clk);
    checks++;
    if (n_acc == 0 || n_words == 0 || n_bus == 0) fail($sformatf("coverage acc %0d words %0d bus %0d", n_acc, n_words, n_bus));
    $display("accepts %0d, read-out words %0d, bus tracks %0d", n_acc, n_words, n_bus);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
