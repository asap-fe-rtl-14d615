// stride2_realign: energy realignment of stride-2 frames, run after filtering.
//
// A stride-2 frame is filtered on half as many (low-passed) samples as a
// stride-1 frame, so its band energies sit on a different scale. The stride-1
// frames that border a run of stride-2 frames were filtered both ways (their
// Priority-1 calibration task wrote the stride-2 features to plane 1 of the
// feature memory, the normal stride-1 features to plane 0). In the log2
// domain the correction factor becomes an additive per-band offset:
//   F[f][b] += F1[r][b] - F2[r][b]
// where r is the stride-1 frame bounding f's stride-2 run on the left, or, if
// that run starts at a skipped frame or the clip start, on the right. A run
// bounded by neither gets +1.0 (energy doubled for half the samples). The
// result is clamped to the unsigned Q8.8 range. Frames that were skipped get
// all-zero features, so the feature map is complete when done rises.
//
// Feature memory layout (one 16-bit word each):
//   address = plane*NF*NUM_BANDS + frame*NUM_BANDS + band
// The memory port reads synchronously (data one cycle after m_en). A
// corrected band takes 4 cycles (three reads, one write), a skipped-frame
// band 1 cycle, a stride-1 frame 1 cycle. done holds until the next start.
//
// The paper states that stride-2 energy is boosted by a factor derived from
// adjacent stride-1 frames; the log-domain offset, the choice of neighbour
// and the zero features of skipped frames are this design's reading of it.
module stride2_realign
  import asap_fe_pkg::*;
#(
  parameter int unsigned NF        = 83,
  parameter int unsigned NUM_BANDS = 40,
  localparam int unsigned DEPTH = 2 * NF * NUM_BANDS,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [NF-1:0][1:0] strides,
  output logic               m_en,
  output logic               m_we,
  output logic [AW-1:0]      m_addr,
  output logic [FEAT_W-1:0]  m_wdata,
  input  logic [FEAT_W-1:0]  m_rdata,
  output logic               done,
  output logic [FIDX_W:0]    n_realigned
);

  typedef enum logic [2:0] {R_IDLE, R_FRAME, R_ZERO, R_RD0, R_RD1, R_RD2, R_WR, R_DONE} rstate_e;

  rstate_e          state_q;
  logic [FIDX_W:0]  f_q;
  logic [BIDX_W-1:0] b_q;
  logic [FIDX_W:0]  ref_q;
  logic             has_ref_q;
  logic [FEAT_W-1:0] feat_q, f1_q;

  function automatic logic [AW-1:0] faddr(input int unsigned plane, input int unsigned frame,
                                         input int unsigned band);
    return AW'(plane * NF * NUM_BANDS + frame * NUM_BANDS + band);
  endfunction

  // Reference frame for the current frame.
  logic [FIDX_W:0] lref, rref;
  logic            l_ok, r_ok;
  always_comb begin
    lref = '0;
    rref = '0;
    l_ok = 1'b0;
    r_ok = 1'b0;
    for (int j = 0; j < NF; j++) begin
      if (j < int'(f_q) && strides[j] != STRIDE_2) begin
        lref = (FIDX_W+1)'(j);
        l_ok = (strides[j] == STRIDE_1);
      end
    end
    for (int j = NF - 1; j >= 0; j--) begin
      if (j > int'(f_q) && strides[j] != STRIDE_2) begin
        rref = (FIDX_W+1)'(j);
        r_ok = (strides[j] == STRIDE_1);
      end
    end
  end

  // Corrected value.
  logic [FEAT_W-1:0] corrected;
  always_comb begin
    logic signed [FEAT_W+2:0] v;
    if (has_ref_q) v = $signed({3'b0, feat_q}) + $signed({3'b0, f1_q}) - $signed({3'b0, m_rdata});
    else           v = $signed({3'b0, feat_q}) + (FEAT_W+3)'(1 << FEAT_FRAC);
    if (v < 0)                                    corrected = '0;
    else if (v > (FEAT_W+3)'((1 << FEAT_W) - 1))  corrected = '1;
    else                                          corrected = FEAT_W'(v);
  end

  logic last_band;
  assign last_band = (b_q == BIDX_W'(NUM_BANDS - 1));

  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_addr  = '0;
    m_wdata = '0;
    unique case (state_q)
      R_ZERO: begin m_en = 1'b1; m_we = 1'b1; m_addr = faddr(0, int'(f_q), int'(b_q)); end
      R_RD0:  begin m_en = 1'b1; m_addr = faddr(0, int'(f_q), int'(b_q)); end
      R_RD1:  begin m_en = 1'b1; m_addr = faddr(0, int'(ref_q), int'(b_q)); end
      R_RD2:  begin m_en = 1'b1; m_addr = faddr(1, int'(ref_q), int'(b_q)); end
      R_WR:   begin m_en = 1'b1; m_we = 1'b1; m_addr = faddr(0, int'(f_q), int'(b_q)); m_wdata = corrected; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= R_IDLE;
      f_q         <= '0;
      b_q         <= '0;
      ref_q       <= '0;
      has_ref_q   <= 1'b0;
      feat_q      <= '0;
      f1_q        <= '0;
      n_realigned <= '0;
    end else if (start) begin
      state_q     <= R_FRAME;
      f_q         <= '0;
      b_q         <= '0;
      n_realigned <= '0;
    end else begin
      unique case (state_q)
        R_FRAME: begin
          b_q <= '0;
          unique case (strides[f_q[$clog2(NF)-1:0]])
            STRIDE_SKIP: state_q <= R_ZERO;
            STRIDE_2: begin
              state_q     <= R_RD0;
              ref_q       <= l_ok ? lref : rref;
              has_ref_q   <= l_ok || r_ok;
              n_realigned <= n_realigned + 1'b1;
            end
            default: begin
              if (int'(f_q) == NF - 1) state_q <= R_DONE;
              f_q <= f_q + 1'b1;
            end
          endcase
        end
        R_ZERO: begin
          b_q <= b_q + 1'b1;
          if (last_band) begin
            f_q     <= f_q + 1'b1;
            state_q <= (int'(f_q) == NF - 1) ? R_DONE : R_FRAME;
          end
        end
        R_RD0: state_q <= R_RD1;
        R_RD1: begin feat_q <= m_rdata; state_q <= R_RD2; end
        R_RD2: begin f1_q   <= m_rdata; state_q <= R_WR;  end
        R_WR: begin
          b_q <= b_q + 1'b1;
          if (last_band) begin
            f_q     <= f_q + 1'b1;
            state_q <= (int'(f_q) == NF - 1) ? R_DONE : R_FRAME;
          end else begin
            state_q <= R_RD0;
          end
        end
        default: ;
      endcase
    end
  end

  assign done = (state_q == R_DONE);

endmodule
