// tb_track_trigger -- self-checking test of the Track Trigger board. The testbench
// plays the 24 wedges: it sends random hit codes (0, 1 or 2 tracks, sometimes more
// than six in all), checks the slot codes it gets back against its own running
// sum, and drives the tracks on the bus in the slots it was given. Before each
// event it writes random decision bits into the pair RAMs at exactly the
// addresses the event will use (while the clock enable is low), forms the 15 pT
// and phi pair addresses itself and predicts the 16-bit trigger word (auto-accept
// on bit 15 when more than six tracks), the track count and the Level-2 copy.
// It also checks the number of enabled cycles from the last bus slot to the
// trigger word.
module tb_track_trigger;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 0;
  logic [1:0] phase = 2'd2, l1_buf = '0;
  logic [23:0][1:0] hit_code = '0;
  logic [23:0][2:0] slot_code;
  tt_lane_t [1:0] lane = '0;
  logic [15:0] trig_word;
  logic [2:0] n_tracks;
  logic l1_accept = 0;
  logic [3:0][15:0] l2_trig;
  logic cfg_we = 0;
  logic [31:0] cfg_addr = '0;
  logic [63:0] cfg_wdata = '0, cfg_rdata;
  int checks = 0, failures = 0, n_auto = 0, n_fire = 0;

  track_trigger #(.MAX_DEPTH(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fail(input string m); failures++; if (failures < 15) $display("FAIL %s", m); endtask

  task automatic cfg_write(input logic [23:0] loc, input logic [7:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = {4'd1, 4'd0, loc}; cfg_wdata = 64'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  // one enabled cycle at the given phase
  task automatic tick(input logic [1:0] p);
    @(negedge clk); ce = 1; phase = p;
  endtask

  function automatic logic [7:0] sparse8();
    return ($urandom % 3 == 0) ? 8'd0 : 8'(1 << ($urandom % 8)) | 8'(1 << ($urandom % 8));
  endfunction

  initial begin
    logic [15:0] prev_trig;
    logic [1:0]  prev_buf;
    bit          have_prev;
    #1 rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cfg_write({1'b0, 4'd15, 19'h00}, 8'd1);     // Level-1 depth 1
    have_prev = 0;
    for (int ev = 0; ev < 300; ev++) begin
      logic [2:0] e_code [24];
      int run, total;
      tt_lane_t [5:0] slot;
      logic [4:0] s_wedge [6];
      logic [8:0] pf [6], gf [6];
      logic [17:0] pa [15], ga [15];
      logic [7:0] ptv [2][15], phv [2][15];
      logic [7:0] dlo, dhi;
      logic [15:0] e_trig;
      // ---- the event
      for (int w = 0; w < 24; w++) hit_code[w] = ($urandom % 100) < 6 + (ev % 5) * 4 ? 2'($urandom % 2 + 1) : 2'd0;
      run = 0; slot = '0;
      for (int w = 0; w < 24; w++) begin
        e_code[w] = 3'd7;
        if (hit_code[w] != 0 && run < 6) begin
          e_code[w] = 3'(run);
          for (int t = 0; t < int'(hit_code[w]); t++)
            if (run + t < 6) begin
              slot[run + t].valid = 1;
              slot[run + t].seg   = 4'($urandom % 12);
              slot[run + t].trk   = 13'($urandom);
              s_wedge[run + t]    = 5'(w);
            end
        end
        run += hit_code[w];
      end
      total = run;
      for (int t = 0; t < 6; t++) begin
        pf[t] = slot[t].valid ? {slot[t].trk.short_trk, slot[t].trk.iso, slot[t].trk.pt} : 9'd124;
        gf[t] = slot[t].valid ? 9'(s_wedge[t] * 12 + slot[t].seg) : 9'h1FF;
      end
      begin
        int k;
        k = 0;
        for (int i = 0; i < 6; i++)
          for (int j = i + 1; j < 6; j++) begin
            pa[k] = {pf[i], pf[j]}; ga[k] = {gf[i], gf[j]}; k++;
          end
      end
      // ---- RAM contents for the addresses this event uses (clock stopped)
      @(negedge clk); ce = 0;
      dlo = 0; dhi = 0;
      for (int k = 0; k < 15; k++)
        for (int h = 0; h < 2; h++) begin
          ptv[h][k] = sparse8(); phv[h][k] = sparse8();
          cfg_write({1'b0, 4'(k), 1'(h), pa[k]}, ptv[h][k]);
          cfg_write({1'b1, 4'(k), 1'(h), ga[k]}, phv[h][k]);
          if (h == 0) dlo |= ptv[h][k] & phv[h][k];
          else        dhi |= ptv[h][k] & phv[h][k];
        end
      e_trig = {total > 6, dhi[6:0], dlo};
      if (total > 6) n_auto++;
      if (e_trig[14:0] != 0) n_fire++;
      // ---- the crossing: hit codes in phase 2
      tick(2'd2);
      tick(2'd3); hit_code = '0;
      for (int w = 0; w < 24; w++) begin
        checks++;
        if (slot_code[w] !== e_code[w]) fail($sformatf("ev %0d slot code w%0d %0d exp %0d", ev, w, slot_code[w], e_code[w]));
      end
      // Level-2 copy of the previous event's word
      l1_accept = have_prev; prev_buf = 2'($urandom); l1_buf = prev_buf;
      lane[0] = slot[0]; lane[1] = slot[1];
      tick(2'd0); l1_accept = 0; lane[0] = slot[2]; lane[1] = slot[3];
      if (have_prev) begin
        checks++;
        if (l2_trig[prev_buf] !== prev_trig) fail($sformatf("L2 copy %h exp %h", l2_trig[prev_buf], prev_trig));
      end
      tick(2'd1); lane[0] = slot[4]; lane[1] = slot[5];
      // latency: count enabled cycles from the last bus slot to the word
      begin
        int n;
        n = 0;
        tick(2'd2); lane = '0; n++;
        while (n < 10) begin
          tick(phase + 2'd1); n++;
          @(posedge clk); #1;
          if (trig_word == e_trig && phase == 2'd2) break;
        end
        checks++;
        if (n != 5) fail($sformatf("ev %0d latency %0d", ev, n));
      end
      checks++;
      if (trig_word !== e_trig || n_tracks !== 3'(total > 6 ? 6 : total))
        fail($sformatf("ev %0d trig %h exp %h ntrk %0d exp %0d", ev, trig_word, e_trig, n_tracks, total));
      // configuration readback of the word
      @(negedge clk); ce = 0; cfg_addr = {4'd1, 4'd0, 1'b0, 4'd15, 11'd0, 8'h01};
      @(negedge clk); @(negedge clk);
      checks++; if (cfg_rdata !== 64'(e_trig)) fail("readback");
      // finish the crossing: phases 3, 0, 1
      tick(2'd3); tick(2'd0); tick(2'd1);
      prev_trig = e_trig; have_prev = 1;
      // the next event's Level-2 check reads buffer prev_buf after an accept in its phase 3
    end
    checks++; if (n_auto == 0 || n_fire == 0) fail("no auto-accept or no trigger");
    $display("auto-accept events %0d, events with trigger bits %0d", n_auto, n_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
