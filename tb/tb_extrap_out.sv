// tb_extrap_out -- self-checking test of the L1 MUON / L1 CAL output stage.
// Four phases of random compressed bits per crossing go in, in order 0,1,2,3; the
// testbench assembles the expected words itself and checks that they appear after
// phase 3 and stay unchanged during the following three phases (outputs change
// only at the 132 ns boundary).
module tb_extrap_out;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 1;
  wedge_bits_t [1:0] s2 = '0;
  logic [1:0] s2_phase = '0;
  muon_word_t [1:0] muon, em;
  logic [1:0][7:0] cal, ec;
  int checks = 0, failures = 0;

  extrap_out #(.NW(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ev = 0; ev < 200; ev++) begin
      muon_word_t [1:0] prev_m;
      logic [1:0][7:0] prev_c;
      for (int p = 0; p < 4; p++) begin
        @(negedge clk);
        if (p > 0 && ev > 0) begin         // output must hold inside the crossing
          checks++;
          if (muon !== prev_m || cal !== prev_c) begin failures++; $display("FAIL hold ev=%0d p=%0d", ev, p); end
        end
        prev_m = muon; prev_c = cal;
        s2_phase = 2'(p);
        for (int w = 0; w < 2; w++) begin
          s2[w] = 16'($urandom);
          case (p)
            0: begin em[w].cmu_hi = s2[w].cm[5:0]; ec[w] = s2[w].im; end
            1: begin em[w].cmu_lo = s2[w].cm[5:0]; em[w].gap = s2[w].im[1:0]; em[w].tof = s2[w].im[3:2]; end
            2: begin em[w].cmx_hi = s2[w].cm[5:0]; em[w].imu_hi = s2[w].im[5:0]; end
            default: begin em[w].cmx_lo = s2[w].cm[5:0]; em[w].imu_lo = s2[w].im[5:0]; end
          endcase
        end
      end
      @(negedge clk);
      checks++;
      if (muon !== em || cal !== ec) begin
        failures++; if (failures < 10) $display("FAIL ev=%0d muon %h exp %h cal %h exp %h", ev, muon, em, cal, ec);
      end
      prev_m = muon; prev_c = cal;
      // a random idle phase 3 (no data change) keeps everything aligned
      s2_phase = 2'd0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
