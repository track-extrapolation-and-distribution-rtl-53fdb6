// sync_fifo -- the track-list FIFO of the Clock/Control board.
//
// The Clock/Control board collects each accepted event's track list into two
// FIFOs with identical contents, one drained by the Level-2 processor link and
// one by the SVT link. This is one such FIFO: DEPTH words of W bits, first word
// on rd_data whenever rd_valid is high, a word leaving when rd_ready is high in
// an enabled cycle (valid/ready handshake on the read side). wr_en is ignored
// when the FIFO is full; the writer uses `count` to avoid that.
//
// The paper names the FIFOs (discrete parts on the board) but not their size or
// interface; the depth and the handshake are this design's choices.
//
// Timing: single clock; writes and reads take effect on the edge with ce high.
//
// The reset also disables the assertion at the end while it is active; lint
// reports that as a synchronous use of the asynchronous reset. It builds no
// logic, so the warning stands.
module sync_fifo #(
  parameter int unsigned W     = 23,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ce,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [W-1:0]             rd_data,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow      // sticky: write while full
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];
  assign do_rd    = ce && rd_valid && rd_ready;
  assign do_wr    = ce && wr_en && (count != (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (ce && wr_en && count == (AW+1)'(DEPTH)) overflow <= 1'b1;
    end
  end

  // reads only from a non-empty FIFO, writes never past full
  a_count: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
