// tb_sync_fifo -- self-checking test of the track-list FIFO: random writes and
// reads against a queue model, including runs to full (writes dropped and the
// overflow flag set) and to empty, and a stretch with the clock enable low.
module tb_sync_fifo;
  localparam int W = 23, DEPTH = 16;
  logic clk = 0, rst_n = 1, ce = 1, wr_en = 0, rd_ready = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic rd_valid, overflow;
  logic [$clog2(DEPTH):0] count;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0;
  bit saw_full = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0;                            // a real falling edge for the async reset
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int pw;
      pw = (t / 500) % 2 == 0 ? 70 : 30;       // alternate filling and draining
      @(negedge clk);
      ce       = ($urandom % 10) != 0;
      wr_en    = ($urandom % 100) < pw;
      wr_data  = W'($urandom);
      rd_ready = ($urandom % 100) < (100 - pw);
      // check the read side before the edge
      checks++;
      if (rd_valid !== (model.size() != 0)) begin failures++; $display("FAIL valid"); end
      if (model.size() != 0 && rd_data !== model[0]) begin
        failures++; $display("FAIL data got %h exp %h", rd_data, model[0]);
      end
      if (count != ($clog2(DEPTH)+1)'(model.size())) begin failures++; $display("FAIL count"); end
      @(posedge clk);
      if (ce) begin
        bit full;
        full = (model.size() == DEPTH);
        if (rd_ready && model.size() != 0) void'(model.pop_front());
        if (wr_en) begin
          if (!full) model.push_back(wr_data);
          else saw_full = 1;
        end
      end
    end
    checks++;
    if (!saw_full || !overflow) begin failures++; $display("FAIL never full / no overflow flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
