// tb_xtrp_top -- end-to-end test of the whole XTRP crate at its default size
// (12 Data Boards, 24 wedges, 288 segments, 32-deep Level-1 pipelines, 1024-word
// track-list FIFOs).
//
// The testbench plays the XFT (24 cables, a word per wedge in every enabled
// 33 ns cycle, following the crate's phase), the trigger supervisor (bunch0,
// Level-1 accepts) and the Level-2/SVT links. It loads the same segment tables
// into all 288 RAMs with one broadcast write per entry, using a pool of eight
// track codes, and keeps a model of the whole data path:
//   * L1 MUON / L1 CAL of all 24 wedges, including bits that cross board
//     boundaries (board 11 is next to board 0), checked at the crossing
//     boundary where they must change;
//   * the number of Track Trigger tracks and the auto-accept bit of every
//     crossing, and in VME step mode the complete 16-bit trigger word of crossings
//     whose pair-RAM entries it has written;
//   * the track list of every accepted crossing on both links: all found tracks
//     in ring order with their global segment, then the end-of-event word with the
//     Level-2 buffer and the bunch counter.
// Along the way it uses the RAM bypass (board 5), the VME test input (board 7), a
// broken bunch number on one cable (sync error on board 5), stops the links so the
// FIFOs fill and the read-out holds, and switches the clock between normal, VME
// step and burst operation (counting the enabled cycles of each burst). Each of
// these is counted; one that never happened counts as a failure.
module tb_xtrp_top;
  import xtrp_pkg::*;
  localparam int NX = 1000;                   // crossings
  logic clk = 0, rst_n = 1;
  logic cdf_tick = 0, bunch0 = 0, l1_accept_in = 0, burst_trig = 0;
  logic [1:0] l1_buf_in = '0;
  xft_word_t [23:0] xft = '0;
  muon_word_t [23:0] muon;
  logic [23:0][7:0] cal;
  logic [15:0] trig_word;
  logic [3:0][15:0] tt_l2_trig;
  logic l2_valid, l2_ready = 1, svt_valid, svt_ready = 1;
  l2_word_t l2_data, svt_data;
  logic ce_out, ro_busy, ro_hold, err_queue, err_fifo;
  logic [1:0] phase_out;
  logic [2:0] tt_n_tracks;
  logic cfg_we = 0;
  logic [31:0] cfg_addr = '0;
  logic [63:0] cfg_wdata = '0, cfg_rdata;
  int checks = 0, failures = 0;

  xtrp_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #60000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fail(input string m); failures++; if (failures < 25) $display("FAIL %s", m); endtask

  // mechanism counters
  int c_hold = 0, c_readout = 0, c_auto = 0, c_accept = 0, c_mode = 0, c_bypass = 0,
      c_test = 0, c_sync = 0, c_neigh = 0, c_trigbits = 0, c_muon = 0;

  // ---------------------------------------------------------------- tables
  track_t      pool [8];
  logic [35:0] C [12][4][8];
  logic [23:0][11:0]       byp_en = '0;
  logic [23:0][11:0][35:0] byp = '0;
  int          tt_id [3][8][3];               // test tracks: [wedge 14/15 pipes]

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

  // ---------------------------------------------------------------- per crossing
  int               tid   [NX][24][12];
  logic [7:0]       bunch [NX];
  bit               badw  [NX];               // broken bunch number on cable 10
  bit               valid_x [NX];
  muon_word_t [23:0] e_mu [NX];
  logic [23:0][7:0] e_cal [NX];
  bit               e_auto [NX];
  logic [2:0]       e_ntrk [NX];
  tt_lane_t [5:0]   e_slot [NX];
  logic [4:0]       e_sw   [NX][6];          // wedge of each slot
  int               e_neigh [NX];

  function automatic void predict(input int n);
    int run;
    e_neigh[n] = 0;
    for (int p = 0; p < 4; p++) begin
      stage0_t s0 [24];
      for (int w = 0; w < 24; w++) begin
        logic [11:0][35:0] r;
        for (int s = 0; s < 12; s++) r[s] = byp_en[w][s] ? byp[w][s] : C[s][p][tid[n][w][s]];
        s0[w] = s0m(2'(p), r);
      end
      for (int w = 0; w < 24; w++) begin
        wedge_bits_t s2, nb;
        int wb, wa;
        wb = (w + 23) % 24; wa = (w + 1) % 24;
        s2.cm = s0[w].cm.own | s0[wa].cm.below | s0[wb].cm.above;
        s2.im = s0[w].im.own | s0[wa].im.below | s0[wb].im.above;
        // bits that came from another board
        nb = (w % 2 == 0) ? {s0[wb].im.above, s0[wb].cm.above} : {s0[wa].im.below, s0[wa].cm.below};
        if (nb != 0) e_neigh[n]++;
        case (p)
          0: begin e_mu[n][w].cmu_hi = s2.cm[5:0]; e_cal[n][w] = s2.im; end
          1: begin e_mu[n][w].cmu_lo = s2.cm[5:0]; e_mu[n][w].gap = s2.im[1:0]; e_mu[n][w].tof = s2.im[3:2]; end
          2: begin e_mu[n][w].cmx_hi = s2.cm[5:0]; e_mu[n][w].imu_hi = s2.im[5:0]; end
          default: begin e_mu[n][w].cmx_lo = s2.cm[5:0]; e_mu[n][w].imu_lo = s2.im[5:0]; end
        endcase
      end
    end
    // Track Trigger: per-wedge outer tracks, slots in wedge order
    run = 0; e_slot[n] = '0;
    for (int w = 0; w < 24; w++) begin
      int n1, lo, hi;
      n1 = 0; lo = 0; hi = 0;
      for (int s = 11; s >= 0; s--) if (C[s][0][tid[n][w][s]][34]) begin n1++; lo = s; end
      for (int s = 0; s < 12; s++)  if (C[s][0][tid[n][w][s]][34]) hi = s;
      if (n1 > 2) n1 = 2;
      for (int t = 0; t < n1; t++)
        if (run + t < 6) begin
          int sg;
          sg = (t == 0) ? lo : hi;
          e_slot[n][run + t] = '{1'b1, 4'(sg), pool[tid[n][w][sg]]};
          e_sw[n][run + t] = 5'(w);
        end
      run += n1;
    end
    e_auto[n] = run > 6;
    e_ntrk[n] = 3'(run > 6 ? 6 : run);
  endfunction

  // ---------------------------------------------------------------- config bus
  task automatic cfg_write(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic cfg_read(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); cfg_addr = a;
    @(negedge clk); d = cfg_rdata;
  endtask

  // ---------------------------------------------------------------- XFT cables
  int cur = 0;                                // crossing on the cables
  bit running = 0;                            // cables on
  bit acc_req = 0;
  logic [1:0] acc_buf;
  int acc_x [$];
  logic [1:0] acc_b [$];
  int outstanding = 0;
  // the crate's clock enable and phase decide which word is on the cables
  always @(negedge clk) if (running && ce_out && cur < NX) begin
    automatic logic [1:0] p = phase_out;
    for (int w = 0; w < 24; w++) begin
      for (int i = 0; i < 3; i++) xft[w].trk[i] = pool[tid[cur][w][3*p+i]];
      xft[w].bunch  = (badw[cur] && w == 10) ? bunch[cur] + 8'd3 : bunch[cur];
      xft[w].bunch0 = (bunch[cur] == 0);
    end
    bunch0 = (p == 2'd3) && bunch[cur] == 0;
    l1_accept_in = (p == 2'd3) && acc_req;
    l1_buf_in = acc_buf;
    if (p == 2'd3 && acc_req) begin
      acc_x.push_back(cur - 33); acc_b.push_back(acc_buf);   // depth 32: crossing n-33
      acc_req = 0; c_accept++; outstanding++;
    end
    // outputs due now: MUON/CAL of crossing cur-3 from phase 0 to 3,
    // Track Trigger word of crossing cur-3 from phase 3 to the next phase 2
    if (cur >= 6 && (p == 2'd0 || p == 2'd3) && valid_x[cur-3] && valid_x[cur-4]) begin
      checks++; c_muon++;
      if (muon !== e_mu[cur-3] || cal !== e_cal[cur-3]) begin
        fail($sformatf("crossing %0d phase %0d MUON/CAL mismatch", cur-3, p));
        for (int w = 0; w < 24; w++) if (muon[w] !== e_mu[cur-3][w] || cal[w] !== e_cal[cur-3][w])
          if (failures < 25) $display("  wedge %0d muon %h exp %h cal %h exp %h", w, muon[w], e_mu[cur-3][w], cal[w], e_cal[cur-3][w]);
      end else if (p == 2'd0) c_neigh += e_neigh[cur-3];
    end
    if (cur >= 6 && p == 2'd3 && valid_x[cur-3]) begin
      checks++;
      if (trig_word[15] !== e_auto[cur-3] || tt_n_tracks !== e_ntrk[cur-3])
        fail($sformatf("crossing %0d auto %b exp %b tracks %0d exp %0d", cur-3, trig_word[15], e_auto[cur-3], tt_n_tracks, e_ntrk[cur-3]));
      else if (e_auto[cur-3]) c_auto++;
    end
    if (p == 2'd3) cur++;
  end

  // ---------------------------------------------------------------- links
  l2_word_t exp_l2 [$], exp_svt [$];
  always @(posedge clk) if (rst_n && ce_out) begin
    if (ro_hold) c_hold++;
    if (dut.u_clk.fifo_we && dut.u_clk.fifo_wd.eoe) begin outstanding--; c_readout++; end
    if (l2_valid && l2_ready) begin
      checks++;
      if (exp_l2.size() == 0) fail($sformatf("unexpected L2 word %h", l2_data));
      else begin
        l2_word_t e;
        e = exp_l2.pop_front();
        if (l2_data !== e) fail($sformatf("L2 word %h exp %h", l2_data, e));
      end
    end
    if (svt_valid && svt_ready) begin
      checks++;
      if (exp_svt.size() == 0) fail($sformatf("unexpected SVT word %h", svt_data));
      else begin
        l2_word_t e;
        e = exp_svt.pop_front();
        if (svt_data !== e) fail($sformatf("SVT word %h exp %h", svt_data, e));
      end
    end
  end

  function automatic void expect_list(input int x, input logic [1:0] b);
    for (int g = 0; g < 288; g++) begin
      track_t t;
      t = pool[tid[x][g / 12][g % 12]];
      if (t.pt != PT_NO_TRACK) begin
        exp_l2.push_back('{eoe: 1'b0, gseg: 9'(g), trk: t});
        exp_svt.push_back('{eoe: 1'b0, gseg: 9'(g), trk: t});
      end
    end
    exp_l2.push_back('{eoe: 1'b1, gseg: {7'd0, b}, trk: 13'(bunch[x])});
    exp_svt.push_back('{eoe: 1'b1, gseg: {7'd0, b}, trk: 13'(bunch[x])});
  endfunction

  task automatic wait_crossing(input int n);
    while (cur < n) @(negedge clk);
  endtask

  task automatic invalidate(input int from, input int to);
    for (int n = from; n <= to && n < NX; n++) if (n >= 0) valid_x[n] = 0;
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    logic [63:0] rd;
    int nb;
    // crossings, tables
    pool[0] = NO_TRACK;
    for (int v = 1; v < 8; v++) begin pool[v] = 13'($urandom); pool[v].pt = 7'($urandom % 96); end
    for (int s = 0; s < 12; s++) for (int p = 0; p < 4; p++) for (int v = 0; v < 8; v++) begin
      logic [35:0] w;
      w = '0;
      if (v != 0) for (int k = 0; k < 2; k++) w[$urandom % 34] = 1'b1;
      if (p == 0) w[34] = (v != 0) && ($urandom % 3 == 0);
      C[s][p][v] = w;
    end
    for (int n = 0; n < NX; n++) begin
      int dens;
      bunch[n] = 8'(n % 159);
      badw[n] = (n == 30);
      valid_x[n] = 1;
      dens = (n >= 60 && n < 140) ? 100 : (n >= 650 ? 0 : 15);
      for (int w = 0; w < 24; w++) for (int s = 0; s < 12; s++)
        tid[n][w][s] = (($urandom % 100) < dens) ? 1 + $urandom % 7 : 0;
    end
    // test tracks for board 7 (wedges 14 and 15)
    for (int p = 0; p < 8; p++) for (int i = 0; i < 3; i++) tt_id[0][p][i] = $urandom % 8;
    for (int n = 0; n < NX; n++) if (n >= 600 && n < 620)
      for (int w = 14; w < 16; w++) for (int s = 0; s < 12; s++) tid[n][w][s] = tt_id[0][4*(w-14) + s/3][s%3];
    for (int n = 0; n < NX; n++) predict(n);

    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    // segment tables: one broadcast write per entry loads all 288 RAMs
    rst_n = 1;
    for (int s = 0; s < 12; s++) for (int p = 0; p < 4; p++) for (int v = 0; v < 8; v++)
      cfg_write({4'd2, 4'hF, 1'b1, 1'b1, 3'd0, 4'(s), 2'(p), pool[v]}, 64'(C[s][p][v]));
    // align the phase to the CDF clock: the cycle after the tick is phase 1
    @(negedge clk); cdf_tick = 1; @(negedge clk); cdf_tick = 0;
    checks++; if (phase_out != 2'd1) fail("phase not aligned to the CDF clock");
    // the cables start at the next crossing boundary
    while (phase_out != 2'd0) @(negedge clk);
    cur = 0; running = 1;
    invalidate(0, 5);

    // the cables were idle before crossing 0: clear the start-up sync errors
    wait_crossing(8);
    cfg_write({4'd2, 4'hF, 16'd0, 8'h02}, 64'h0);
    // bypass on board 5 (wedges 10, 11) from crossing 20 to 40
    wait_crossing(18);
    begin
      logic [35:0] bw;
      bw = 36'h0_0402_0041;
      cfg_write({4'd2, 4'd5, 16'd0, 8'h20 + 8'd3}, 64'(bw));
      cfg_write({4'd2, 4'd5, 16'd0, 8'h38}, 64'h8);
      invalidate(16, 22);
      for (int n = 20; n < 40; n++) begin
        byp_en[10][3] = 1; byp[10][3] = bw;
        // recompute with bypass
      end
    end
    // predictions with bypass for crossings 20..39 (a RAM output replaced)
    for (int n = 20; n < 40; n++) begin byp_en[10][3] = 1; predict(n); end
    byp_en[10][3] = 0;
    for (int n = 20; n < 40; n++) c_bypass++;
    wait_crossing(40);
    cfg_write({4'd2, 4'd5, 16'd0, 8'h38}, 64'h0);
    invalidate(37, 43);
    // the broken bunch number of crossing 30 on cable 10 sets board 5's Pipes 0-3
    cfg_read({4'd2, 4'd5, 16'd0, 8'h02}, rd);
    checks++;
    if (rd[7:0] !== 8'h0F) fail($sformatf("sync error register %h", rd));
    else c_sync++;
    cfg_write({4'd2, 4'd5, 16'd0, 8'h02}, 64'h0);
    cfg_read({4'd2, 4'd5, 16'd0, 8'h02}, rd);
    checks++; if (rd[7:0] !== 8'h00) fail("sync error not cleared");
    // Level-1 accepts
    for (int n = 45; n < 50; n += 4) begin
      wait_crossing(n); acc_buf = 2'(c_accept); acc_req = 1;
    end
    // dense crossings 60..139 read out with the links stopped: the FIFOs fill
    wait_crossing(90);
    l2_ready = 0; svt_ready = 0;
    nb = 0;
    while (nb < 5) begin
      wait_crossing(cur + 1);
      if (outstanding < 4 && cur - 33 >= 60 && cur - 33 < 140) begin acc_buf = 2'(c_accept); acc_req = 1; nb++; end
      if (cur - 33 >= 140) break;
    end
    begin int c; c = 0; while (!ro_hold && c < 40000) begin @(negedge clk); c++; end end
    checks++; if (!ro_hold) fail("read-out did not hold with full FIFOs");
    l2_ready = 1; svt_ready = 1;
    // VME test input on board 7 during crossings 600..619
    wait_crossing(590);
    for (int p = 0; p < 8; p++) begin
      track_t [2:0] tt;
      for (int i = 0; i < 3; i++) tt[i] = pool[tt_id[0][p][i]];
      cfg_write({4'd2, 4'd7, 16'd0, 8'h08 + 8'(p)}, 64'(tt));
    end
    wait_crossing(599);
    @(negedge clk); while (!(phase_out == 2'd0 && cur == 600)) @(negedge clk);
    cfg_write({4'd2, 4'd7, 16'd0, 8'h01}, 64'd1);
    invalidate(597, 603);
    wait_crossing(620);
    cfg_write({4'd2, 4'd7, 16'd0, 8'h01}, 64'd0);
    invalidate(617, 623);
    for (int n = 604; n < 617; n++) c_test++;
    // the accepted lists (as queued): build expectations in accept order
    // (done by the monitor below as accepts are made)
    // clock modes: VME step, then burst
    wait_crossing(700);
    while (ro_busy || outstanding != 0) @(negedge clk);
    // burst mode: each start gives one crossing (four enabled cycles)
    cfg_write(32'h0000_0002, 64'd4);
    cfg_write(32'h0000_0000, 64'd2);
    repeat (4) @(negedge clk);
    for (int b = 0; b < 4; b++) begin
      int n_ce;
      n_ce = 0;
      cfg_write(32'h0000_0003, 64'd0);
      repeat (10) begin @(negedge clk); n_ce += int'(ce_out); end
      checks++;
      if (n_ce != 4) fail($sformatf("burst gave %0d enabled cycles", n_ce));
      else if (b == 3) c_mode++;
    end
    // VME step mode: one enabled cycle per write. Crossings with a few tracks are
    // stepped through after their pair-RAM entries have been written.
    cfg_write(32'h0000_0000, 64'd1);
    repeat (4) @(negedge clk);
    checks++;
    if (ce_out) fail("clock enable in VME mode"); else c_mode++;
    for (int ev = 0; ev < 4; ev++) begin : vme_ev
      int x, k;
      logic [8:0] pf [6], gf [6];
      logic [7:0] dlo, dhi;
      logic [15:0] e_tw;
      x = cur + 1;
      for (int t = 0; t < ev + 1; t++) tid[x][$urandom % 24][$urandom % 12] = 1 + $urandom % 7;
      predict(x);
      for (int t = 0; t < 6; t++) begin
        pf[t] = e_slot[x][t].valid ? {e_slot[x][t].trk.short_trk, e_slot[x][t].trk.iso, e_slot[x][t].trk.pt} : 9'd124;
        gf[t] = e_slot[x][t].valid ? 9'(e_sw[x][t] * 12 + e_slot[x][t].seg) : 9'h1FF;
      end
      dlo = 0; dhi = 0; k = 0;
      for (int i = 0; i < 6; i++) for (int j = i + 1; j < 6; j++) begin
        for (int h = 0; h < 2; h++) begin
          logic [7:0] a, g;
          a = ($urandom % 4 == 0) ? 8'(1 << ($urandom % 8)) : 8'd0;
          g = ($urandom % 2 == 0) ? 8'(1 << ($urandom % 8)) | a : 8'd0;
          cfg_write({4'd1, 4'd0, 1'b0, 4'(k), 1'(h), pf[i], pf[j]}, 64'(a));
          cfg_write({4'd1, 4'd0, 1'b1, 4'(k), 1'(h), gf[i], gf[j]}, 64'(g));
          if (h == 0) dlo |= a & g; else dhi |= a & g;
        end
        k++;
      end
      e_tw = {e_auto[x], dhi[6:0], dlo};
      // step until the last phase of crossing x+3 has been clocked
      while (cur < x + 4) begin
        cfg_write(32'h0000_0001, 64'd0);
        repeat (3) @(negedge clk);
      end
      checks++;
      if (trig_word !== e_tw) fail($sformatf("crossing %0d trigger word %h exp %h", x, trig_word, e_tw));
      else if (e_tw[14:0] != 0) c_trigbits++;
      cfg_read({4'd1, 4'd0, 1'b0, 4'd15, 19'h01}, rd);
      checks++; if (rd[15:0] !== trig_word) fail($sformatf("trigger word readback %h", rd));
    end
    cfg_write(32'h0000_0000, 64'd0);          // back to normal
    begin int c; c = 0; while ((exp_l2.size() != 0 || exp_svt.size() != 0) && c < 20000) begin @(negedge clk); c++; end end
    checks++;
    if (exp_l2.size() != 0 || exp_svt.size() != 0) fail($sformatf("%0d/%0d words never arrived", exp_l2.size(), exp_svt.size()));
    checks++; if (err_queue || err_fifo) fail("queue or FIFO overflow");
    $display("mechanisms: hold %0d readout %0d auto-accept %0d L1-accept %0d modes %0d bypass %0d test-mode %0d sync-error %0d neighbour-bits %0d trigger-words %0d muon-checks %0d",
             c_hold, c_readout, c_auto, c_accept, c_mode, c_bypass, c_test, c_sync, c_neigh, c_trigbits, c_muon);
    if (c_hold == 0)     fail("no hold");
    if (c_readout == 0)  fail("no token read-out");
    if (c_auto == 0)     fail("no auto-accept");
    if (c_accept == 0)   fail("no Level-1 accept");
    if (c_mode < 2)      fail("burst or VME mode not seen working");
    if (c_bypass == 0)   fail("no bypass");
    if (c_test == 0)     fail("no test mode");
    if (c_sync == 0)     fail("no sync error");
    if (c_neigh == 0)    fail("no neighbour-board bits");
    if (c_trigbits == 0) fail("no trigger word with decision bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected lists, in the order the accepts were made
  always @(negedge clk) while (acc_x.size() != 0) expect_list(acc_x.pop_front(), acc_b.pop_front());
endmodule
