// tb_lut_ram -- self-checking test of the lookup RAM at the Data Board size
// (32K x 36). Loads random words at random addresses through the configuration
// port, reads them back with one cycle of latency, and checks that the output
// register holds its value while the clock enable is low.
module tb_lut_ram;
  localparam int AW = 15, DW = 36, N = 400;
  logic clk = 0, ce = 1, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [DW-1:0] rdata, wdata = '0;
  logic [AW-1:0] addrs [N];
  logic [DW-1:0] vals  [N];
  int checks = 0, failures = 0;

  lut_ram #(.AW(AW), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // distinct addresses: a stride through the space
    for (int i = 0; i < N; i++) begin
      addrs[i] = AW'(i * 81 + 5);
      vals[i]  = {4'($urandom), $urandom};
    end
    ce = 0;                                    // writes work with ce low
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = addrs[i]; wdata = vals[i];
    end
    @(negedge clk); we = 0; ce = 1;
    for (int i = 0; i < N; i++) begin
      raddr = addrs[i];
      @(negedge clk);
      checks++;
      if (rdata !== vals[i]) begin
        failures++; $display("FAIL addr %h got %h exp %h", addrs[i], rdata, vals[i]);
      end
    end
    // hold with ce low
    raddr = addrs[3]; @(negedge clk);
    ce = 0; raddr = addrs[7]; repeat (3) @(negedge clk);
    checks++; if (rdata !== vals[3]) failures++;
    ce = 1; @(negedge clk);
    checks++; if (rdata !== vals[7]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
