// tb_tt_sort -- self-checking test of the six Sort FPGAs of the Track Trigger
// (both kinds, all three groups). Random sets of up to six tracks go in; the
// testbench forms the 15 pairs (0,1),(0,2)..(4,5) and their 9+9-bit pT and phi
// addresses itself, with the empty-slot codes, and compares.
module tb_tt_sort;
  import xtrp_pkg::*;
  logic clk = 0, rst_n = 1, ce = 1, load = 0;
  logic [5:0] valid = '0;
  track_t [5:0] trk = '0;
  logic [5:0][8:0] gphi = '0;
  logic [14:0][17:0] pt_addr, phi_addr;
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 3; g++) begin : g_s
    tt_sort #(.KIND(1'b0), .GROUP(g)) u_pt  (.clk, .rst_n, .ce, .load, .valid, .trk, .gphi,
                                             .pair_addr (pt_addr[5*g +: 5]));
    tt_sort #(.KIND(1'b1), .GROUP(g)) u_phi (.clk, .rst_n, .ce, .load, .valid, .trk, .gphi,
                                             .pair_addr (phi_addr[5*g +: 5]));
  end
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [8:0] ptf(input int t);
    return valid[t] ? {trk[t].short_trk, trk[t].iso, trk[t].pt} : 9'd124;
  endfunction
  function automatic logic [8:0] phf(input int t);
    return valid[t] ? gphi[t] : 9'h1FF;
  endfunction

  initial begin
    logic [14:0][17:0] e_pt, e_phi;
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ev = 0; ev < 500; ev++) begin
      int k;
      @(negedge clk);
      valid = 6'($urandom);
      for (int t = 0; t < 6; t++) begin trk[t] = 13'($urandom); gphi[t] = 9'($urandom % 288); end
      load = 1;
      k = 0;
      for (int i = 0; i < 6; i++)
        for (int j = i + 1; j < 6; j++) begin
          e_pt[k]  = {ptf(i), ptf(j)};
          e_phi[k] = {phf(i), phf(j)};
          k++;
        end
      @(negedge clk);
      load = 0;
      valid = 6'($urandom); trk[0] = 13'($urandom);   // must not be taken without load
      @(negedge clk);
      checks++;
      if (pt_addr !== e_pt || phi_addr !== e_phi) begin
        failures++;
        if (failures < 10) $display("FAIL ev=%0d pt %h exp %h", ev, pt_addr, e_pt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
