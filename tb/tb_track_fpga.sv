// tb_track_fpga -- self-checking test of the Data Board's Track Trigger interface.
// Every crossing random Track Trigger bits and tracks are presented in lookup
// phase 0; the testbench counts the bits (saturating at two), finds the lowest and
// highest segment with the bit set, hands out random non-overlapping slot codes
// and checks which track appears in which lane of the bus in phases 3, 0 and 1.
module tb_track_fpga;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 1;
  logic [1:0] phase = 2'd0, bits_phase;
  logic [1:0][11:0] trk_bit = '0;
  track_t [1:0][11:0] trk_in = '0;
  logic [1:0][1:0] hit_code;
  logic [1:0][2:0] slot_code = {3'd7, 3'd7};
  tt_lane_t [1:0] lane;
  int checks = 0, failures = 0, n_two = 0, n_bus = 0;

  assign bits_phase = phase - 2'd1;
  track_fpga dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [1:0][1:0] e_code;
  track_t [1:0] e_lo, e_hi;
  logic [1:0][3:0] e_los, e_his;
  tt_lane_t [5:0] e_slot;

  task automatic step(); @(negedge clk); phase = phase + 2'd1; #1; endtask

  initial begin
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    while (phase != 2'd1) step();
    for (int ev = 0; ev < 500; ev++) begin
      // phase 1: bits of lookup phase 0
      for (int w = 0; w < 2; w++) begin
        int n;
        for (int s = 0; s < 12; s++) begin
          trk_in[w][s] = 13'($urandom);
          trk_bit[w][s] = ($urandom % 100) < (ev % 4) * 8;
        end
        n = $countones(trk_bit[w]);
        e_code[w] = n > 2 ? 2'd2 : 2'(n);
        e_los[w] = 0; e_his[w] = 0;
        for (int s = 11; s >= 0; s--) if (trk_bit[w][s]) e_los[w] = 4'(s);
        for (int s = 0; s < 12; s++)  if (trk_bit[w][s]) e_his[w] = 4'(s);
        e_lo[w] = trk_in[w][e_los[w]]; e_hi[w] = trk_in[w][e_his[w]];
        if (n >= 2) n_two++;
      end
      step();                                  // phase 2
      checks++;
      if (hit_code !== e_code) begin failures++; $display("FAIL code ev=%0d %b exp %b", ev, hit_code, e_code); end
      // slot codes, as the Track Trigger would hand them out
      begin
        bit [5:0] used;
        used = '0; e_slot = '0;
        for (int w = 0; w < 2; w++) begin
          slot_code[w] = 3'd7;
          if (e_code[w] != 0) for (int tries = 0; tries < 20; tries++) begin
            int c;
            bit ok;
            c = $urandom % 6;
            ok = !used[c] && !(e_code[w] == 2 && c < 5 && used[c+1]);
            if (ok) begin
              slot_code[w] = 3'(c);
              used[c] = 1;
              e_slot[c] = '{valid: 1'b1, seg: e_los[w], trk: e_lo[w]};
              if (e_code[w] == 2 && c < 5) begin
                used[c+1] = 1;
                e_slot[c+1] = '{valid: 1'b1, seg: e_his[w], trk: e_hi[w]};
              end
              break;
            end
          end
        end
        #1; // no lanes in phase 2
        checks++; if (lane !== '0) begin failures++; $display("FAIL lanes in phase 2"); end
      end
      for (int c = 0; c < 3; c++) begin
        step();                                // phases 3, 0, 1
        checks++;
        if (lane[0] !== e_slot[2*c] || lane[1] !== e_slot[2*c+1]) begin
          failures++;
          if (failures < 10) $display("FAIL ev=%0d cyc=%0d lanes %h %h exp %h %h", ev, c, lane[0], lane[1], e_slot[2*c], e_slot[2*c+1]);
        end
        n_bus += int'(lane[0].valid) + int'(lane[1].valid);
      end
    end
    checks++; if (n_two == 0 || n_bus == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
