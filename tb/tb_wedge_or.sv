// tb_wedge_or -- self-checking test of compression stages 1 and 2. A stream of
// random stage-0 words and neighbour inputs goes in every cycle; the expected
// stage-1, outgoing and stage-2 values are computed from the inputs of one and two
// cycles earlier, and the phase tag must follow with two cycles of latency.
module tb_wedge_or;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 1;
  stage0_t [1:0] s0 = '0;
  logic [1:0] s0_phase = '0, s2_phase;
  wedge_bits_t to_below, to_above, from_below = '0, from_above = '0;
  wedge_bits_t [1:0] s1, s2;
  int checks = 0, failures = 0;

  wedge_or dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [7:0] r8();
    return ($urandom % 2) ? 8'(1 << ($urandom % 8)) : 8'($urandom);
  endfunction

  stage0_t [1:0] h0 [$];
  logic [1:0] hp [$];
  wedge_bits_t hb [$], ha [$];

  initial begin
    wedge_bits_t e1 [2];
    wedge_bits_t e2 [2];
    wedge_bits_t etb, eta;
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      for (int w = 0; w < 2; w++) begin
        s0[w].cm = {r8(), r8(), r8()};
        s0[w].im = {r8(), r8(), r8()};
      end
      s0_phase   = 2'($urandom);
      from_below = {r8(), r8()};
      from_above = {r8(), r8()};
      h0.push_back(s0); hp.push_back(s0_phase);
      hb.push_back(from_below); ha.push_back(from_above);
      @(posedge clk); #1;
      if (t >= 2) begin
        // stage 1 from the inputs of this edge
        e1[0].cm = h0[t][0].cm.own | h0[t][1].cm.below;
        e1[0].im = h0[t][0].im.own | h0[t][1].im.below;
        e1[1].cm = h0[t][1].cm.own | h0[t][0].cm.above;
        e1[1].im = h0[t][1].im.own | h0[t][0].im.above;
        etb = {h0[t][0].im.below, h0[t][0].cm.below};
        eta = {h0[t][1].im.above, h0[t][1].cm.above};
        // stage 2 from stage 1 of the previous edge and the neighbours of this edge
        e2[0].cm = h0[t-1][0].cm.own | h0[t-1][1].cm.below | hb[t].cm;
        e2[0].im = h0[t-1][0].im.own | h0[t-1][1].im.below | hb[t].im;
        e2[1].cm = h0[t-1][1].cm.own | h0[t-1][0].cm.above | ha[t].cm;
        e2[1].im = h0[t-1][1].im.own | h0[t-1][0].im.above | ha[t].im;
        checks++;
        if (s1[0] !== e1[0] || s1[1] !== e1[1] || to_below !== etb || to_above !== eta) begin
          failures++; if (failures < 10) $display("FAIL s1 t=%0d", t);
        end
        checks++;
        if (s2[0] !== e2[0] || s2[1] !== e2[1] || s2_phase !== hp[t-1]) begin
          failures++; if (failures < 10) $display("FAIL s2 t=%0d got %h %h exp %h %h", t, s2[0], s2[1], e2[0], e2[1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
