// tb_clock_ctrl -- self-checking test of the Clock/Control board logic with small
// FIFOs (16 words). A behavioural token ring stands in for the Pipes: when the
// token leaves, it waits a random time, puts a random number of track words on
// the read-out bus (pausing on hold) and returns the token. The testbench checks
// the normal, VME-step and burst clock modes (number of enabled cycles), phase
// alignment to the CDF clock, the Level-1 accept on the last phase, the bunch
// counter in the end-of-event word, the FIFO contents on both links (track words
// in order, then the end-of-event word), hold when the FIFOs fill, and the queue
// overflow flag.
module tb_clock_ctrl;
  import xtrp_pkg::*;
  localparam int FD = 16;
  logic clk = 0, rst_n = 1;
  logic cdf_tick = 0, bunch0 = 0, l1_accept_in = 0, burst_trig = 0;
  logic [1:0] l1_buf_in = '0;
  logic ce, l1_accept, tok_out, tok_in = 0, hold, ro_valid = 0;
  logic [1:0] phase, l1_buf, rd_buf;
  l2_word_t ro_word = '0, l2_data, svt_data;
  logic l2_valid, l2_ready = 0, svt_valid, svt_ready = 0, busy, err_queue, err_fifo;
  logic cfg_we = 0;
  logic [31:0] cfg_addr = '0;
  logic [63:0] cfg_wdata = '0, cfg_rdata;
  int checks = 0, failures = 0, n_hold = 0, n_eoe = 0;

  clock_ctrl #(.MAX_DEPTH(32), .FIFO_DEPTH(FD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fail(input string m); failures++; if (failures < 15) $display("FAIL %s", m); endtask

  task automatic cfg_write(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = {4'd0, 20'd0, a}; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // ---------------------------------------------------------------- token ring model
  l2_word_t exp_l2 [$], exp_svt [$];
  int  acc_bc [$];
  logic [1:0] acc_buf [$];
  int  rs = 0, rwait = 0, rleft = 0;
  bit  ring_dead = 0;
  logic [1:0] rbuf;
  always @(posedge clk) begin
    if (ce) begin
      tok_in   <= 0;
      ro_valid <= 0;
      ro_word  <= '0;
      case (rs)
        0: if (tok_out && !ring_dead) begin
             rs <= 1; rwait <= 2 + $urandom % 5; rleft <= $urandom % 6;
             rbuf <= rd_buf;
           end
        1: if (rwait > 0) rwait <= rwait - 1;
           else if (rleft == 0) begin tok_in <= 1; rs <= 0; end
           else if (!hold && ($urandom % 3) != 0) begin
             l2_word_t w;
             w = '0; w.gseg = 9'($urandom % 288); w.trk = 13'($urandom);
             ro_valid <= 1; ro_word <= w; rleft <= rleft - 1;
             exp_l2.push_back(w); exp_svt.push_back(w);
           end
        default: rs <= 0;
      endcase
    end
  end
  // end-of-event words expected when the token comes back
  always @(posedge clk) if (ce && dut.st == 2'd2 && !hold) begin
    l2_word_t w;
    w = '0; w.eoe = 1;
    if (acc_buf.size() == 0) fail("EOE without accept");
    else begin
      w.gseg = {7'd0, acc_buf.pop_front()}; w.trk = 13'(acc_bc.pop_front());
    end
    exp_l2.push_back(w); exp_svt.push_back(w);
    n_eoe++;
  end
  // link side
  always @(posedge clk) if (ce) begin
    if (hold) n_hold++;
    if (l2_valid && l2_ready) begin
      checks++;
      if (exp_l2.size() == 0) fail("l2 word unexpected");
      else begin l2_word_t e; e = exp_l2.pop_front(); if (l2_data !== e) fail($sformatf("l2 %h exp %h", l2_data, e)); end
    end
    if (svt_valid && svt_ready) begin
      checks++;
      if (exp_svt.size() == 0) fail("svt word unexpected");
      else begin l2_word_t e; e = exp_svt.pop_front(); if (svt_data !== e) fail($sformatf("svt %h exp %h", svt_data, e)); end
    end
  end

  // crossings counted by the testbench from the phase output
  int xing = 0;
  always @(posedge clk) if (ce && phase == 2'd3) xing <= xing + 1;

  task automatic to_phase3();
    do @(negedge clk); while (!(ce && phase == 2'd3));
  endtask

  initial begin
    int x0, ncyc;
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    checks++; if (!ce) fail("normal mode ce");
    // CDF clock alignment: the cycle after the tick is phase 1
    @(negedge clk); cdf_tick = 1; @(negedge clk); cdf_tick = 0;
    checks++; if (phase != 2'd1) fail("phase not aligned");
    cfg_write(8'h04, 64'd3);                       // Level-1 depth 3
    // fill the bunch-counter pipeline, bunch0 at one crossing
    repeat (40) to_phase3();
    bunch0 = 1; to_phase3(); x0 = xing; bunch0 = 0;
    // accepts with the links drained: ten events, one per 12 crossings
    l2_ready = 1; svt_ready = 1;
    for (int a = 0; a < 10; a++) begin
      repeat (11) to_phase3();
      l1_accept_in = 1; l1_buf_in = 2'(a);
      acc_bc.push_back((xing - x0 - 3) & 8'hFF); acc_buf.push_back(2'(a));
      @(negedge clk); l1_accept_in = 0;
    end
    repeat (200) @(negedge clk);
    checks++; if (exp_l2.size() != 0 || exp_svt.size() != 0 || n_eoe != 10) fail($sformatf("not drained %0d %0d eoe %0d", exp_l2.size(), exp_svt.size(), n_eoe));
    // links stopped: FIFOs fill, hold must stop the ring, nothing lost
    l2_ready = 0; svt_ready = 0;
    for (int a = 0; a < 12; a++) begin
      repeat (4) to_phase3();
      if (dut.q_cnt < 3) begin
        l1_accept_in = 1; l1_buf_in = 2'(a);
        acc_bc.push_back((xing - x0 - 3) & 8'hFF); acc_buf.push_back(2'(a));
        @(negedge clk); l1_accept_in = 0;
      end
    end
    checks++; if (n_hold == 0) fail("hold never seen");
    l2_ready = 1; svt_ready = 1;
    repeat (600) @(negedge clk);
    checks++; if (err_fifo) fail("FIFO overflow");
    checks++; if (exp_l2.size() != 0 || exp_svt.size() != 0) fail("not drained after hold");
    // queue overflow: five accepts in a row while the ring is stopped (VME mode)
    cfg_write(8'h00, 64'd1);                       // VME step mode
    repeat (3) @(negedge clk);
    checks++; if (ce) fail("ce in VME mode");
    ncyc = 0;
    cfg_write(8'h01, 64'd0);                       // one step
    repeat (6) begin @(negedge clk); ncyc += int'(ce); end
    checks++; if (ncyc != 1) fail($sformatf("VME step gave %0d cycles", ncyc));
    // burst mode, 7 cycles
    cfg_write(8'h00, 64'd2);
    cfg_write(8'h02, 64'd7);
    ncyc = 0;
    cfg_write(8'h03, 64'd0);
    repeat (15) begin @(negedge clk); ncyc += int'(ce); end
    checks++; if (ncyc != 7) fail($sformatf("burst gave %0d cycles", ncyc));
    ncyc = 0;
    @(negedge clk); burst_trig = 1; @(negedge clk); burst_trig = 0;
    repeat (15) begin @(negedge clk); ncyc += int'(ce); end
    checks++; if (ncyc != 7) fail($sformatf("burst_trig gave %0d cycles", ncyc));
    // register readback
    @(negedge clk); cfg_addr = 32'h0000_0002; @(negedge clk);
    checks++; if (cfg_rdata != 64'd7) fail("readback burst length");
    // back to normal; queue overflow with a ring that never answers
    cfg_write(8'h00, 64'd0);
    repeat (3) @(negedge clk);
    checks++; if (err_queue) fail("early queue error");
    ring_dead = 1;
    for (int a = 0; a < 6; a++) begin
      to_phase3(); l1_accept_in = 1; l1_buf_in = 2'(a); @(negedge clk); l1_accept_in = 0;
    end
    checks++; if (!err_queue) fail("queue overflow not flagged");
    // Level-1 accept only on the last phase
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); l1_accept_in = 1; #1;
      checks++; if (l1_accept !== (phase == 2'd3)) fail("l1_accept gating");
    end
    l1_accept_in = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
