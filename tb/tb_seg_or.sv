// tb_seg_or -- self-checking test of compression stage 0. Random RAM words (sparse,
// so that ORs of few inputs are exercised) and random bypass settings go in for
// each lookup phase; the testbench computes the expected below/own/above fields
// from the bit map of the lookup phases itself and compares one cycle later.
module tb_seg_or;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 1;
  logic [1:0] lphase = '0, q_phase;
  logic [SEGS_PER_WEDGE-1:0][LUT_DW-1:0] ram_data = '0, bypass_data = '0;
  logic [SEGS_PER_WEDGE-1:0] bypass_en = '0;
  stage0_t q, exp_q;
  int checks = 0, failures = 0, n_bypass = 0;

  seg_or dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic stage0_t model(input logic [1:0] ph,
      input logic [SEGS_PER_WEDGE-1:0][LUT_DW-1:0] r, b, input logic [SEGS_PER_WEDGE-1:0] en);
    stage0_t m;
    m = '0;
    for (int s = 0; s < 12; s++) begin
      logic [35:0] w;
      w = en[s] ? b[s] : r[s];
      for (int k = 0; k < 6; k++) begin
        m.cm.below[k] |= w[k];
        m.cm.own[k]   |= w[6+k];
        m.cm.above[k] |= w[12+k];
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
          m.im.below[k] |= w[18+k];
          m.im.own[k]   |= w[24+k];
          m.im.above[k] |= w[30+k];
        end
      endcase
    end
    return m;
  endfunction

  function automatic logic [35:0] sparse();
    logic [35:0] v;
    v = '0;
    for (int k = 0; k < 3; k++) v[$urandom % 36] = ($urandom % 2) == 1;
    return v;
  endfunction

  initial begin
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      lphase = 2'($urandom);
      for (int s = 0; s < 12; s++) begin
        ram_data[s]    = (t % 3 == 0) ? {4'($urandom), $urandom} : sparse();
        bypass_data[s] = sparse();
        bypass_en[s]   = ($urandom % 8) == 0;
      end
      n_bypass += $countones(bypass_en);
      exp_q = model(lphase, ram_data, bypass_data, bypass_en);
      @(negedge clk);
      checks++;
      if (q !== exp_q || q_phase !== lphase) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d ph=%0d got %h exp %h", t, lphase, q, exp_q);
      end
    end
    // clock enable low holds the register
    @(negedge clk); exp_q = q; ce = 0; ram_data = '1; @(negedge clk);
    checks++; if (q !== exp_q) failures++;
    checks++; if (n_bypass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
