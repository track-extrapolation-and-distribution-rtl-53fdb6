// tb_l1_pipeline -- self-checking test of the Level-1 pipeline and Level-2 buffers.
// Writes a numbered word every crossing (4 cycles), issues accepts for random
// buffers at several programmed depths, and checks that each Level-2 buffer holds
// the word written `depth` crossings prev_q the accept.
module tb_l1_pipeline;
  localparam int W = 16, MAXD = 32;
  logic clk = 0, rst_n = 1, ce = 1, ev_stb = 0, l1a = 0;
  logic [W-1:0] din;
  logic [5:0] depth;
  logic [1:0] l1_buf;
  logic [3:0][W-1:0] l2_q;
  int checks = 0, failures = 0;
  int ev = 0;

  l1_pipeline #(.W(W), .MAX_DEPTH(MAXD), .N_L2(4)) dut (.*, .l1_accept(l1a));

  always #5 clk = ~clk;
  assign din = W'(ev * 7 + 3);

  task automatic crossing(input bit acc, input logic [1:0] b);
    repeat (3) @(posedge clk);
    ev_stb <= 1; l1a <= acc; l1_buf <= b;
    @(posedge clk);
    ev_stb <= 0; l1a <= 0;
    #1 ev++;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    depth = 6'd32; l1_buf = 0;
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40) crossing(0, 0);            // fill the ring
    for (int t = 0; t < 60; t++) begin
      int d; logic [1:0] b; int e;
      d = 1 + ($urandom % 32);
      b = 2'($urandom);
      depth = 6'(d);
      e = ev;                               // accepted at this crossing
      crossing(1, b);
      @(negedge clk);
      checks++;
      if (l2_q[b] !== W'((e - d) * 7 + 3)) begin
        failures++;
        $display("FAIL depth %0d buf %0d: got %h exp %h", d, b, l2_q[b], W'((e - d) * 7 + 3));
      end
      crossing(0, 0);
    end
    // an accept does not disturb the other buffers
    begin
      logic [3:0][W-1:0] prev_q;
      prev_q = l2_q;
      depth = 6'd5;
      crossing(1, 2'd1);
      @(negedge clk);
      for (int b = 0; b < 4; b++) if (b != 1) begin
        checks++;
        if (l2_q[b] !== prev_q[b]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
