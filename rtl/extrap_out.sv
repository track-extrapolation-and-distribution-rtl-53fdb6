// extrap_out -- output stage of a Data Board: assembles the four lookup phases
// of the compressed extrapolation bits into one L1 MUON word and one L1 CAL word
// per wedge, held for a whole 132 ns crossing.
//
// The compressed result of a wedge arrives as 8 CM bits and 8 IM bits per 33 ns
// phase (from wedge_or). Following the lookup map (Table 1):
//   phase 0: CM = CMU high pT (6 bits)   IM = calorimeter (8 pT bits)
//   phase 1: CM = CMU low pT             IM = phi-gap (2 bits) + TOF (2 bits)
//   phase 2: CM = CMX high pT            IM = IMU high pT
//   phase 3: CM = CMX low pT             IM = IMU low pT
// Phases 0-2 are held in a staging register; when phase 3 arrives the complete
// words are loaded into the output registers together (one register stage), so
// the L1 MUON and L1 CAL outputs change only on the 132 ns boundary.
//
// From the paper: 6 muon bits per wedge for CMU, CMX, IMU and the phi-gap, 8
// calorimeter bits per wedge, outputs synchronous to the 132 ns clock. The paper
// also says four bits per wedge go to the calorimeter trigger; this design
// carries all eight pT bits of the lookup. Where the TOF bits go is not stated;
// here they travel in the muon word.
module extrap_out
  import xtrp_pkg::*;
#(
  parameter int unsigned NW = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ce,
  input  wedge_bits_t [NW-1:0]     s2,
  input  logic [1:0]               s2_phase,
  output muon_word_t  [NW-1:0]     muon,
  output logic [NW-1:0][CAL_BITS-1:0] cal
);
  muon_word_t [NW-1:0]          mu_st;
  logic [NW-1:0][CAL_BITS-1:0]  cal_st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_st  <= '0;
      cal_st <= '0;
      muon   <= '0;
      cal    <= '0;
    end else if (ce) begin
      for (int w = 0; w < NW; w++) begin
        case (s2_phase)
          2'd0: begin
            mu_st[w].cmu_hi <= s2[w].cm[5:0];
            cal_st[w]       <= s2[w].im;
          end
          2'd1: begin
            mu_st[w].cmu_lo <= s2[w].cm[5:0];
            mu_st[w].gap    <= s2[w].im[1:0];
            mu_st[w].tof    <= s2[w].im[3:2];
          end
          2'd2: begin
            mu_st[w].cmx_hi <= s2[w].cm[5:0];
            mu_st[w].imu_hi <= s2[w].im[5:0];
          end
          default: begin
            muon[w]        <= mu_st[w];
            muon[w].cmx_lo <= s2[w].cm[5:0];
            muon[w].imu_lo <= s2[w].im[5:0];
            cal[w]         <= cal_st[w];
          end
        endcase
      end
    end
  end
endmodule
