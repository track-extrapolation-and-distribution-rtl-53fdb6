// tb_xtrp_pipe -- self-checking test of one Pipe FPGA (pipe_idx 2, segments 6-8 of
// a wedge). Random XFT crossings come in as four 33 ns cable words; the testbench
// checks the demultiplexed tracks, the bunch-number check (a broken number sets
// sync_err, sync_clr clears it), the VME test input, the Level-1 pipeline at
// random depths, and the token read-out of the accepted crossing with random
// hold (only tracks with pT code other than 124, in segment order, then the token).
module tb_xtrp_pipe;
  import xtrp_pkg::*;
  localparam logic [1:0] IDX = 2'd2;
  localparam logic [8:0] BASE = 9'd150;
  logic clk = 0, rst_n = 1, ce = 1;
  logic [1:0] phase = 2'd0, l1_buf = '0, rd_buf = '0;
  xft_word_t xft = '0;
  logic test_mode = 0, sync_clr = 0, l1_accept = 0, tok_in = 0, hold = 0;
  track_t [2:0] test_trk = '0, trk_out;
  logic sync_err, tok_out, ro_valid;
  logic [5:0] depth = 6'd32;
  l2_word_t ro_word;
  int checks = 0, failures = 0, n_hold = 0, n_words = 0;

  xtrp_pipe #(.MAX_DEPTH(32)) dut (.clk, .rst_n, .ce, .phase, .pipe_idx (IDX),
    .gseg_base (BASE), .xft, .test_mode, .test_trk, .trk_out, .sync_err, .sync_clr,
    .depth, .l1_accept, .l1_buf, .tok_in, .rd_buf, .hold, .tok_out, .ro_valid, .ro_word);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  track_t [2:0] hist [$];       // trk_out at each crossing boundary
  logic [7:0] bunch = 8'd0;

  function automatic track_t rtrk();
    track_t t;
    t = 13'($urandom);
    t.pt = ($urandom % 2) ? PT_NO_TRACK : 7'($urandom % 96);
    return t;
  endfunction

  // one crossing: four cable words; optional accept at the last phase
  task automatic crossing(input bit bad_bunch, input bit acc, input logic [1:0] b);
    track_t [11:0] seg;
    for (int s = 0; s < 12; s++) seg[s] = rtrk();
    for (int p = 0; p < 4; p++) begin
      @(negedge clk);
      phase = 2'(p);
      xft.trk    = seg[3*p +: 3];
      xft.bunch  = bad_bunch ? bunch + 8'd5 : bunch;
      xft.bunch0 = (bunch == 8'd0);
      l1_accept  = acc && p == 3;
      l1_buf     = b;
    end
    hist.push_back(trk_out);                 // value written into the pipeline now
    @(negedge clk);
    l1_accept = 0;
    phase = 2'd0;
    checks++;
    if (trk_out !== (test_mode ? test_trk : seg[3*IDX +: 3])) begin
      failures++; $display("FAIL trk_out %h exp %h", trk_out, seg[3*IDX +: 3]);
    end
    bunch = bunch == 8'd158 ? 8'd0 : bunch + 8'd1;   // 159 crossings per turn
    // keep phase 0 for the next crossing's first word: back up one step
  endtask

  initial begin
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 40; i++) crossing(0, 0, 0);
    checks++; if (sync_err) begin failures++; $display("FAIL early sync_err"); end
    // broken bunch number
    crossing(1, 0, 0);
    checks++; if (!sync_err) begin failures++; $display("FAIL sync_err not set"); end
    @(negedge clk); sync_clr = 1; @(negedge clk); sync_clr = 0;
    checks++; if (sync_err) begin failures++; $display("FAIL sync_err not cleared"); end
    crossing(0, 0, 0); crossing(0, 0, 0);
    // test mode
    test_mode = 1; test_trk = {rtrk(), rtrk(), rtrk()};
    crossing(0, 0, 0);
    test_mode = 0;
    crossing(0, 0, 0);
    checks++; if (sync_err) begin failures++; $display("FAIL sync_err after test mode"); end
    // accepts and read-out
    for (int a = 0; a < 60; a++) begin
      int d, n;
      logic [1:0] b;
      track_t [2:0] e;
      d = 1 + $urandom % 32; b = 2'($urandom);
      depth = 6'(d);
      n = hist.size();
      crossing(0, 1, b);
      e = hist[n - d];
      // read out buffer b
      @(negedge clk); tok_in = 1; rd_buf = b;
      @(negedge clk); tok_in = 0;
      begin
        int got, cyc, i;
        got = 0; cyc = 0; i = 0;
        while (!tok_out && cyc < 40) begin
          hold = ($urandom % 4) == 0;
          if (hold) n_hold++;
          @(posedge clk); #1;
          if (ro_valid) begin
            while (i < 3 && e[i].pt == PT_NO_TRACK) i++;
            checks++; n_words++;
            if (i >= 3 || ro_word.eoe || ro_word.trk !== e[i] || ro_word.gseg !== BASE + 9'(i)) begin
              failures++; $display("FAIL ro word %h (i=%0d)", ro_word, i);
            end
            i++;
          end else if (ro_word !== '0) begin
            failures++; $display("FAIL bus not zero");
          end
          cyc++;
          @(negedge clk);
        end
        hold = 0;
        while (i < 3 && e[i].pt == PT_NO_TRACK) i++;
        checks++;
        if (!tok_out || i != 3) begin failures++; $display("FAIL token/readout incomplete i=%0d", i); end
      end
    end
    checks++; if (n_hold == 0 || n_words == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
