// stride_calculator: the Sparsity-aware Stride Calculator of ASAP-FE.
//
// It watches the pre-emphasized samples as filter 0 produces them (one clip,
// in order, s_valid marking each sample) and measures every half-overlapped
// frame: frame f covers samples f*HOP .. f*HOP+FRAME_LEN-1. With the default
// 256-sample frames and 192-sample hop, a 16000-sample clip holds 83 frames
// and a sample belongs to at most two of them, so two accumulator sets,
// selected by frame parity, suffice. Per frame it computes
//   STE    = sum x[n]^2                                   (short-time energy)
//   ZCC    = number of n>0 with x[n] and x[n-1] of opposite sign
//   A_diff = max x[n] - min x[n]
//   2*S    = 2*ZCC + A_diff      (S_frame = 1*ZCC + 0.5*A_diff, kept exact)
// When the last frame closes it walks the frames once (one per cycle) and sets
//   stride 0 (skip)  if STE * 2^TH1_SHIFT < max(STE)   (STE < 0.5^6 max STE)
//   stride 2         else if S * 2^TH2_SHIFT < max(S)   (S < 0.5 max S)
//   stride 1         otherwise
// then raises done (held until the next start) with the strides and the
// number of frames of each kind. start clears everything for a new clip.
//
// The formulas, thresholds and stride codes are the paper's. Taking the maxima
// over all frames of the clip (skipped frames included) and the two-bank
// accumulation are this design's choices.
module stride_calculator
  import asap_fe_pkg::*;
#(
  parameter int unsigned FRAME_LEN   = 256,
  parameter int unsigned HOP         = 192,
  parameter int unsigned NUM_SAMPLES = 16000,
  parameter int unsigned TH1_SHIFT   = 6,
  parameter int unsigned TH2_SHIFT   = 1,
  localparam int unsigned NF = (NUM_SAMPLES - FRAME_LEN) / HOP + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     s_valid,
  input  logic signed [DATA_W-1:0] s_data,
  output logic                     done,
  output logic [NF-1:0][1:0]       strides,
  output logic [FIDX_W:0]          n_skip,
  output logic [FIDX_W:0]          n_s1,
  output logic [FIDX_W:0]          n_s2
);

  localparam int unsigned CW  = $clog2(FRAME_LEN) + 1;  // ZCC width
  localparam int unsigned SW  = DATA_W + CW + 2;        // 2*S width
  localparam int unsigned HW  = $clog2(HOP) + 1;

  typedef enum logic [1:0] {C_ACC, C_DECIDE, C_DONE} cstate_e;

  cstate_e            state_q;
  logic [HW-1:0]      cnt_q;     // n mod HOP
  logic [FIDX_W:0]    fnew_q;    // n div HOP
  logic signed [DATA_W-1:0] prev_q;

  logic [E_W-1:0]           ste_q  [2];
  logic [CW-1:0]            zcc_q  [2];
  logic signed [DATA_W-1:0] amax_q [2];
  logic signed [DATA_W-1:0] amin_q [2];

  logic [E_W-1:0] ste_arr [NF];
  logic [SW-1:0]  s2_arr  [NF];
  logic [E_W-1:0] max_ste_q;
  logic [SW-1:0]  max_s2_q;
  logic [FIDX_W:0] di_q;

  // --------------------------------------------------------- per-sample math
  logic [E_W-1:0] sq;
  logic           zc;
  logic signed [2*DATA_W-1:0] xw;
  assign xw = (2*DATA_W)'(s_data);
  assign sq = E_W'(unsigned'(xw * xw));
  assign zc = (s_data > 0 && prev_q < 0) || (s_data < 0 && prev_q > 0);

  // Membership of the current sample: frame A = fnew at offset cnt, frame B =
  // fnew-1 at offset cnt+HOP.
  logic        a_in, b_in;
  logic [31:0] a_off, b_off;
  assign a_in  = (int'(fnew_q) < NF);
  assign a_off = 32'(cnt_q);
  assign b_in  = (fnew_q != '0) && (int'(cnt_q) + HOP < FRAME_LEN);
  assign b_off = 32'(cnt_q) + HOP;

  // Accumulator values after this sample, per bank.
  logic [E_W-1:0]           ste_n  [2];
  logic [CW-1:0]            zcc_n  [2];
  logic signed [DATA_W-1:0] amax_n [2];
  logic signed [DATA_W-1:0] amin_n [2];
  logic                     upd    [2];
  logic                     fin;
  logic [FIDX_W:0]          fin_f;
  logic                     fin_p;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      logic        in_f;
      logic [31:0] off;
      in_f = 1'b0;
      off  = '0;
      if (a_in && fnew_q[0] == p[0]) begin in_f = 1'b1; off = a_off; end
      if (b_in && fnew_q[0] != p[0]) begin in_f = 1'b1; off = b_off; end
      upd[p] = s_valid && in_f;
      if (off == 0) begin
        ste_n[p]  = sq;
        zcc_n[p]  = '0;
        amax_n[p] = s_data;
        amin_n[p] = s_data;
      end else begin
        ste_n[p]  = ste_q[p] + sq;
        zcc_n[p]  = zcc_q[p] + CW'(zc);
        amax_n[p] = (s_data > amax_q[p]) ? s_data : amax_q[p];
        amin_n[p] = (s_data < amin_q[p]) ? s_data : amin_q[p];
      end
    end
    // A frame closes on its last sample: frame B normally, frame A only when
    // HOP == FRAME_LEN (no overlap).
    fin   = 1'b0;
    fin_f = '0;
    fin_p = 1'b0;
    if (s_valid && b_in && b_off == FRAME_LEN - 1) begin
      fin = 1'b1; fin_f = fnew_q - 1'b1; fin_p = ~fnew_q[0];
    end else if (s_valid && a_in && a_off == FRAME_LEN - 1) begin
      fin = 1'b1; fin_f = fnew_q; fin_p = fnew_q[0];
    end
  end

  logic [SW-1:0] fin_s2;
  assign fin_s2 = (SW'(zcc_n[fin_p]) << 1)
                + SW'(unsigned'(DATA_W'(amax_n[fin_p] - amin_n[fin_p])));

  // --------------------------------------------------------- decision
  logic [1:0] dec;
  always_comb begin
    logic [E_W+TH1_SHIFT-1:0] ste_sc;
    logic [SW+TH2_SHIFT-1:0]  s2_sc;
    ste_sc = (E_W+TH1_SHIFT)'(ste_arr[di_q[$clog2(NF)-1:0]]) << TH1_SHIFT;
    s2_sc  = (SW+TH2_SHIFT)'(s2_arr[di_q[$clog2(NF)-1:0]]) << TH2_SHIFT;
    if (ste_sc < (E_W+TH1_SHIFT)'(max_ste_q))    dec = STRIDE_SKIP;
    else if (s2_sc < (SW+TH2_SHIFT)'(max_s2_q))  dec = STRIDE_2;
    else                                         dec = STRIDE_1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= C_ACC;
      cnt_q     <= '0;
      fnew_q    <= '0;
      prev_q    <= '0;
      max_ste_q <= '0;
      max_s2_q  <= '0;
      di_q      <= '0;
      strides   <= '0;
      n_skip    <= '0;
      n_s1      <= '0;
      n_s2      <= '0;
      for (int p = 0; p < 2; p++) begin
        ste_q[p] <= '0; zcc_q[p] <= '0; amax_q[p] <= '0; amin_q[p] <= '0;
      end
    end else if (start) begin
      state_q   <= C_ACC;
      cnt_q     <= '0;
      fnew_q    <= '0;
      prev_q    <= '0;
      max_ste_q <= '0;
      max_s2_q  <= '0;
      di_q      <= '0;
      n_skip    <= '0;
      n_s1      <= '0;
      n_s2      <= '0;
    end else begin
      unique case (state_q)
        C_ACC: if (s_valid) begin
          prev_q <= s_data;
          if (int'(cnt_q) == HOP - 1) begin
            cnt_q  <= '0;
            fnew_q <= fnew_q + 1'b1;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
          for (int p = 0; p < 2; p++) if (upd[p]) begin
            ste_q[p]  <= ste_n[p];
            zcc_q[p]  <= zcc_n[p];
            amax_q[p] <= amax_n[p];
            amin_q[p] <= amin_n[p];
          end
          if (fin) begin
            ste_arr[fin_f[$clog2(NF)-1:0]] <= ste_n[fin_p];
            s2_arr[fin_f[$clog2(NF)-1:0]]  <= fin_s2;
            if (ste_n[fin_p] > max_ste_q) max_ste_q <= ste_n[fin_p];
            if (fin_s2 > max_s2_q)        max_s2_q  <= fin_s2;
            if (int'(fin_f) == NF - 1) begin
              state_q <= C_DECIDE;
              di_q    <= '0;
            end
          end
        end
        C_DECIDE: begin
          strides[di_q[$clog2(NF)-1:0]] <= dec;
          unique case (dec)
            STRIDE_SKIP: n_skip <= n_skip + 1'b1;
            STRIDE_2:    n_s2   <= n_s2 + 1'b1;
            default:     n_s1   <= n_s1 + 1'b1;
          endcase
          di_q <= di_q + 1'b1;
          if (int'(di_q) == NF - 1) state_q <= C_DONE;
        end
        default: ;
      endcase
    end
  end

  assign done = (state_q == C_DONE);

  initial assert (2 * HOP >= FRAME_LEN && HOP <= FRAME_LEN && NF <= (1 << FIDX_W) && NF >= 2)
    else $error("stride_calculator: unsupported frame geometry");

endmodule
