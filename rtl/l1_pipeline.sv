// l1_pipeline -- Level-1 storage pipeline with four Level-2 decision buffers.
//
// Every event (one 132 ns crossing, marked by ev_stb) the input word is written
// into a circular buffer of MAX_DEPTH entries. When a Level-1 accept arrives on
// the same strobe, the word written `depth` strobes earlier is copied into the
// Level-2 buffer named by l1_buf, where it stays until the next accept for that
// buffer. depth counts crossings and runs 1..MAX_DEPTH; 0 is treated as 1.
//
// From the paper: a pipeline programmable up to 32 crossings deep that holds the
// data until the Level-1 decision, which names one of four Level-2 buffers.
// Own choices: the ring-buffer organisation, how depth is counted and that the
// accept is sampled on the event strobe.
//
// Timing: all updates on the rising clock edge when ce && ev_stb. l2_q is
// the register contents; a word is readable the cycle after its accept.
module l1_pipeline #(
  parameter int unsigned W         = 47,
  parameter int unsigned MAX_DEPTH = 32,
  parameter int unsigned N_L2      = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         ce,        // datapath clock enable
  input  logic                         ev_stb,    // last 33 ns phase of a crossing
  input  logic [W-1:0]                 din,
  input  logic [$clog2(MAX_DEPTH):0]   depth,     // 1..MAX_DEPTH
  input  logic                         l1_accept,
  input  logic [$clog2(N_L2)-1:0]      l1_buf,
  output logic [N_L2-1:0][W-1:0]       l2_q
);
  localparam int unsigned AW = $clog2(MAX_DEPTH);

  logic [W-1:0]  ring [MAX_DEPTH];
  logic [AW-1:0] wp;
  logic [AW-1:0] rp;
  logic [AW:0]   d_eff;

  always_comb begin
    d_eff = (depth == '0) ? (AW+1)'(1) : depth;
    if (d_eff > (AW+1)'(MAX_DEPTH)) d_eff = (AW+1)'(MAX_DEPTH);
    rp = AW'(wp - AW'(d_eff));
  end

  always_ff @(posedge clk) begin
    if (ce && ev_stb) ring[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      l2_q <= '0;
    end else if (ce && ev_stb) begin
      wp <= wp + 1'b1;
      if (l1_accept) l2_q[l1_buf] <= ring[rp];
    end
  end
endmodule
