// clock_ctrl -- logic of the XTRP Clock/Control board: clock modes, 33 ns phase,
// bunch counter, Level-1 accept distribution and the token-ring read-out that
// fills the Level-2 and SVT track-list FIFOs.
//
// Clocks. The board turns the 132 ns CDF clock into 132 ns and 33 ns clocks for
// the crate and can replace them by VME-controlled edges. In this RTL the whole
// crate runs on one 33 ns clock `clk`, and the board's clock output is the
// enable `ce` that every datapath register uses, plus the 2-bit `phase` (which
// quarter of the 132 ns crossing; 3 = last). Three modes (register 0x00):
//   0 normal  ce = 1, phase free-running and re-aligned by cdf_tick (the cycle
//             in which the CDF clock edge falls is phase 0);
//   1 VME     each write to register 0x01 gives one enabled cycle (one edge);
//   2 burst   a write to 0x03, or burst_trig, gives `burst length` (0x02)
//             enabled cycles, then the crate stops again.
// The clock conditioning and the 3 ns programmable delay are analog parts and
// are not modelled.
//
// Level 1. l1_accept/l1_buf from the trigger supervisor are sampled on the last
// phase of a crossing and passed on to the boards. The board keeps its own
// 8-bit bunch counter (cleared by bunch0) in a Level-1 pipeline of the same
// depth as the Pipes' (register 0x04), so each accepted event has its bunch
// number in a Level-2 buffer. Like the Pipes, which write a crossing's tracks
// one crossing after they arrive, it writes the count of the previous crossing.
//
// Read-out. Accepts are queued (4 deep, one per Level-2 buffer). For each, the
// board sends the token (tok_out, with rd_buf) around the ring of all Pipe
// FPGAs; every track word arriving on the read-out bus is written into both
// FIFOs; when the token returns (tok_in) an end-of-event word carrying the
// Level-2 buffer number and the bunch counter is appended. `hold` stops the
// Pipes while either FIFO has fewer than 4 free words. The FIFOs are emptied
// by the Level-2 and SVT links through valid/ready handshakes.
//
// From the paper: the modes, the token ring that starts and ends at the board,
// two FIFOs with identical contents, variable-length lists ended by an
// end-of-event word with an 8-bit bunch counter. Own choices: the register map
// (unit cfg_addr[31:28] = 0), the queue, the hold rule and the word formats.
module clock_ctrl
  import xtrp_pkg::*;
#(
  parameter int unsigned MAX_DEPTH  = 32,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // timing and trigger inputs (from the TRACER)
  input  logic                 cdf_tick,
  input  logic                 bunch0,
  input  logic                 l1_accept_in,
  input  logic [1:0]           l1_buf_in,
  input  logic                 burst_trig,
  // clock outputs to the crate
  output logic                 ce,
  output logic [1:0]           phase,
  output logic                 l1_accept,
  output logic [1:0]           l1_buf,
  // token ring and read-out bus
  output logic                 tok_out,
  output logic [1:0]           rd_buf,
  input  logic                 tok_in,
  output logic                 hold,
  input  logic                 ro_valid,
  input  l2_word_t             ro_word,
  // Level-2 and SVT links
  output logic                 l2_valid,
  input  logic                 l2_ready,
  output l2_word_t             l2_data,
  output logic                 svt_valid,
  input  logic                 svt_ready,
  output l2_word_t             svt_data,
  // status
  output logic                 busy,
  output logic                 err_queue,
  output logic                 err_fifo,
  // configuration bus
  input  logic                 cfg_we,
  input  logic [31:0]          cfg_addr,
  input  logic [63:0]          cfg_wdata,
  output logic [63:0]          cfg_rdata
);
  typedef enum logic [1:0] {M_NORMAL = 2'd0, M_VME = 2'd1, M_BURST = 2'd2} mode_e;
  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_EOE} ro_state_e;

  // ---------------------------------------------------------------- config
  logic        sel;
  logic [7:0]  reg_a;
  mode_e       mode;
  logic        step_req;
  logic [15:0] burst_len, burst_cnt;
  logic        burst_go;
  logic [$clog2(MAX_DEPTH):0] depth;

  assign sel   = cfg_we && cfg_addr[31:28] == 4'd0;
  assign reg_a = cfg_addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode      <= M_NORMAL;
      step_req  <= 1'b0;
      burst_len <= 16'd0;
      burst_go  <= 1'b0;
      depth     <= ($clog2(MAX_DEPTH)+1)'(MAX_DEPTH);
    end else begin
      step_req <= sel && reg_a == 8'h01;
      burst_go <= (sel && reg_a == 8'h03) || burst_trig;
      if (sel && reg_a == 8'h00) mode      <= mode_e'(cfg_wdata[1:0]);
      if (sel && reg_a == 8'h02) burst_len <= cfg_wdata[15:0];
      if (sel && reg_a == 8'h04) depth     <= cfg_wdata[$clog2(MAX_DEPTH):0];
    end
  end

  // ---------------------------------------------------------------- clock enable
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ce        <= 1'b0;
      burst_cnt <= '0;
    end else begin
      unique case (mode)
        M_NORMAL: ce <= 1'b1;
        M_VME:    ce <= step_req;
        M_BURST:  ce <= (burst_cnt != 16'd0);
        default:  ce <= 1'b0;
      endcase
      if (mode == M_BURST && burst_go) burst_cnt <= burst_len;
      else if (burst_cnt != 16'd0)     burst_cnt <= burst_cnt - 16'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  phase <= 2'd0;
    else if (ce) phase <= (mode == M_NORMAL && cdf_tick) ? 2'd1 : phase + 2'd1;
  end

  logic ev_stb;
  assign ev_stb    = (phase == 2'd3);
  assign l1_accept = l1_accept_in && ev_stb;
  assign l1_buf    = l1_buf_in;

  // ---------------------------------------------------------------- bunch counter
  logic [7:0] bc_q, bc_now;
  logic [3:0][7:0] bc_l2;
  assign bc_now = bunch0 ? 8'd0 : bc_q + 8'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            bc_q <= 8'hFF;
    else if (ce && ev_stb) bc_q <= bc_now;
  end

  l1_pipeline #(.W(8), .MAX_DEPTH(MAX_DEPTH), .N_L2(4)) u_bc_pipe (
    .clk, .rst_n, .ce, .ev_stb, .din (bc_q), .depth,
    .l1_accept, .l1_buf, .l2_q (bc_l2)
  );

  // ---------------------------------------------------------------- accept queue
  logic [3:0][1:0] q_buf;
  logic [2:0]      q_cnt;
  logic [1:0]      q_rd, q_wr;
  logic            q_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_buf     <= '0;
      q_cnt     <= '0;
      q_rd      <= '0;
      q_wr      <= '0;
      err_queue <= 1'b0;
    end else if (ce) begin
      logic push;
      push = l1_accept && (q_cnt != 3'd4);
      if (l1_accept && q_cnt == 3'd4) err_queue <= 1'b1;
      if (push) begin
        q_buf[q_wr] <= l1_buf;
        q_wr        <= q_wr + 2'd1;
      end
      if (q_pop) q_rd <= q_rd + 2'd1;
      q_cnt <= q_cnt + 3'(push) - 3'(q_pop);
    end
  end

  // ---------------------------------------------------------------- read-out
  ro_state_e st;
  logic      fifo_we;
  l2_word_t  fifo_wd;
  logic [$clog2(FIFO_DEPTH):0] l2_cnt, svt_cnt;
  logic      l2_ovf, svt_ovf;

  assign hold     = (l2_cnt  > ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH - 4)) ||
                    (svt_cnt > ($clog2(FIFO_DEPTH)+1)'(FIFO_DEPTH - 4));
  assign busy     = (st != R_IDLE);
  assign err_fifo = l2_ovf || svt_ovf;

  always_comb begin
    fifo_we = 1'b0;
    fifo_wd = ro_word;
    q_pop   = 1'b0;
    case (st)
      R_WAIT: fifo_we = ro_valid;
      R_EOE: if (!hold) begin
        fifo_we      = 1'b1;
        fifo_wd      = '0;
        fifo_wd.eoe  = 1'b1;
        fifo_wd.gseg = {7'd0, rd_buf};
        fifo_wd.trk  = 13'(bc_l2[rd_buf]);
        q_pop        = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= R_IDLE;
      tok_out <= 1'b0;
      rd_buf  <= '0;
    end else if (ce) begin
      tok_out <= 1'b0;
      case (st)
        R_IDLE: if (q_cnt != 3'd0) begin
          tok_out <= 1'b1;
          rd_buf  <= q_buf[q_rd];
          st      <= R_WAIT;
        end
        R_WAIT: if (tok_in) st <= R_EOE;
        R_EOE:  if (!hold) st <= R_IDLE;
        default: st <= R_IDLE;
      endcase
    end
  end

  sync_fifo #(.W($bits(l2_word_t)), .DEPTH(FIFO_DEPTH)) u_l2_fifo (
    .clk, .rst_n, .ce, .wr_en (fifo_we), .wr_data (fifo_wd),
    .rd_valid (l2_valid), .rd_ready (l2_ready), .rd_data (l2_data),
    .count (l2_cnt), .overflow (l2_ovf)
  );

  sync_fifo #(.W($bits(l2_word_t)), .DEPTH(FIFO_DEPTH)) u_svt_fifo (
    .clk, .rst_n, .ce, .wr_en (fifo_we), .wr_data (fifo_wd),
    .rd_valid (svt_valid), .rd_ready (svt_ready), .rd_data (svt_data),
    .count (svt_cnt), .overflow (svt_ovf)
  );

  // ---------------------------------------------------------------- readback
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_rdata <= '0;
    else begin
      cfg_rdata <= '0;
      if (cfg_addr[31:28] == 4'd0) begin
        case (reg_a)
          8'h00: cfg_rdata <= 64'(mode);
          8'h02: cfg_rdata <= 64'(burst_len);
          8'h04: cfg_rdata <= 64'(depth);
          8'h05: cfg_rdata <= {20'd0, 11'(l2_cnt), 11'(svt_cnt), 10'd0,
                               7'(q_cnt), busy, err_queue, err_fifo, phase};
          default: ;
        endcase
      end
    end
  end
endmodule
