// filter_module: one filter of the ASAP-FE filter cluster.
//
// A filter module takes one task at a time from the filter scheduler and runs
// a 4th-order IIR filter (y[n] = sum b_k x[n-k] - sum a_k y[n-k], k <= 4) over
// it in a five-stage pipeline, one sample per clock:
//   Load      sample read from the local frame buffer (or the SPM for
//             pre-emphasis), one-cycle read latency
//   LShift    integer sample shifted left by ALPHA into fixed point
//   Filtering one full 4th-order direct-form-I step (single cycle, so the
//             recursion closes within the stage)
//   RShift    shifted back right by ALPHA and saturated to a 16-bit integer
//   Store     squared and accumulated into the band energy, written back to
//             the frame buffer (LPF) or streamed out (pre-emphasis)
// The IIR state is cleared on the first sample of every band of every frame,
// so frames are independent and can run on different modules.
//
// Tasks:
//   TASK_PRE    streams the whole raw waveform through the pre-emphasis
//               coefficient set and sends each output on so_* (the top writes
//               it to the SPM and the stride calculator watches it). State is
//               kept across the whole clip.
//   TASK_S1     copies the pre-emphasized frame (FRAME_LEN samples starting
//               at frame*HOP) into the local buffer, then runs the NUM_BANDS
//               stride-1 band-pass sets over it.
//   TASK_S2(/S2CAL) copies the raw frame, low-pass filters it and keeps the
//               even-indexed outputs in place (buf[n/2]), then runs the
//               stride-2 band-pass sets over the FRAME_LEN/2 kept samples.
// At the end of each band the energy (sum of squared outputs) is offered on
// res_valid/res and held until res_ack. The cluster's round-robin result
// arbiter serves a module well within the shortest band (FRAME_LEN/2 cycles),
// which the assertion below checks.
//
// Timing: a stride-1 task takes FRAME_LEN load cycles (plus SPM arbitration)
// and NUM_BANDS*FRAME_LEN filter cycles; a stride-2 task FRAME_LEN load,
// FRAME_LEN LPF and NUM_BANDS*FRAME_LEN/2 filter cycles; results leave 5
// cycles after the last sample is issued. The module is available for the
// next task as soon as its last sample is issued.
//
// From the paper: the pipeline stage names and order, the 4th-order IIR,
// the fixed-point LShift/RShift around the filter, the task kinds, LPF before
// stride-2 on the raw waveform, stride-1 on the pre-emphasized waveform. This
// design's choices: the local frame buffer, the widths, floor shifting with
// saturation, energy as the sum of squares, band-after-band processing.
module filter_module
  import asap_fe_pkg::*;
#(
  parameter int unsigned FRAME_LEN   = 256,
  parameter int unsigned HOP         = 192,
  parameter int unsigned NUM_BANDS   = 40,
  parameter int unsigned NUM_SAMPLES = 16000
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // task dispatch
  input  logic                      task_valid,
  input  task_t                     task_in,
  output logic                      available,
  output logic                      busy,
  // SPM read (bank 0 = raw waveform, 1 = pre-emphasized waveform)
  output logic                      rd_req,
  output logic                      rd_bank,
  input  logic                      rd_gnt,
  output logic [SIDX_W-1:0]         rd_addr,
  input  logic signed [DATA_W-1:0]  rd_data,
  // coefficient lookup (combinational)
  output logic [SET_W-1:0]          coef_sel,
  input  coef_set_t                 coef,
  // pre-emphasis output stream
  output logic                      so_valid,
  output logic [SIDX_W-1:0]         so_idx,
  output logic signed [DATA_W-1:0]  so_data,
  // band energy result
  output logic                      res_valid,
  output res_t                      res,
  input  logic                      res_ack
);

  localparam int unsigned LW = $clog2(FRAME_LEN);
  localparam int unsigned PW = COEF_W + Y_W + 4;

  typedef enum logic [2:0] {F_IDLE, F_PRE, F_LOAD, F_LPF, F_BANDS} fstate_e;
  typedef enum logic [1:0] {M_ENERGY, M_DEC, M_STREAM} smode_e;

  typedef struct packed {
    logic              valid;
    logic              src_bank;  // sample comes from rd_data, not the buffer
    logic              first;
    logic              last;
    smode_e            mode;
    logic [SET_W-1:0]  set;
    logic [SIDX_W-1:0] idx;
    logic [BIDX_W-1:0] band;
    logic [FIDX_W-1:0] frame;
    logic              plane;
  } tag_t;

  fstate_e           state_q;
  task_t             task_q;
  logic [SIDX_W-1:0] n_q;
  logic [BIDX_W-1:0] band_q;

  logic signed [DATA_W-1:0] fbuf [FRAME_LEN];
  logic signed [DATA_W-1:0] buf_q;

  tag_t iss, t1, t2, t3, t4;
  logic [LW-1:0] buf_raddr;

  // ---------------------------------------------------------------- issue
  logic [SIDX_W-1:0] band_len;
  assign band_len = (task_q.kind == TASK_S1) ? SIDX_W'(FRAME_LEN) : SIDX_W'(FRAME_LEN / 2);

  assign available = (state_q == F_IDLE);
  assign rd_req    = (state_q == F_PRE) || (state_q == F_LOAD);
  assign rd_bank   = (state_q == F_LOAD) && (task_q.kind == TASK_S1);
  assign rd_addr   = (state_q == F_PRE) ? n_q
                   : SIDX_W'(int'(task_q.frame) * HOP + int'(n_q));

  always_comb begin
    iss       = '0;
    buf_raddr = LW'(n_q);
    unique case (state_q)
      F_PRE: begin
        iss.valid    = rd_gnt;
        iss.src_bank = 1'b1;
        iss.first    = (n_q == '0);
        iss.mode     = M_STREAM;
        iss.set      = set_pre(NUM_BANDS);
        iss.idx      = n_q;
      end
      F_LPF: begin
        iss.valid = 1'b1;
        iss.first = (n_q == '0);
        iss.mode  = M_DEC;
        iss.set   = set_lpf(NUM_BANDS);
        iss.idx   = n_q;
      end
      F_BANDS: begin
        iss.valid = 1'b1;
        iss.first = (n_q == '0);
        iss.last  = (n_q == band_len - 1'b1);
        iss.mode  = M_ENERGY;
        iss.set   = (task_q.kind == TASK_S1) ? set_bpf1(int'(band_q))
                                             : set_bpf2(NUM_BANDS, int'(band_q));
        iss.idx   = n_q;
        iss.band  = band_q;
        iss.frame = task_q.frame;
        iss.plane = (task_q.kind == TASK_S2CAL);
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- control
  logic              ld_pend_q;
  logic [LW-1:0]     ld_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= F_IDLE;
      task_q    <= '0;
      n_q       <= '0;
      band_q    <= '0;
      ld_pend_q <= 1'b0;
      ld_idx_q  <= '0;
    end else begin
      ld_pend_q <= (state_q == F_LOAD) && rd_gnt;
      ld_idx_q  <= LW'(n_q);
      unique case (state_q)
        F_IDLE: if (task_valid) begin
          task_q  <= task_in;
          n_q     <= '0;
          band_q  <= '0;
          state_q <= (task_in.kind == TASK_PRE) ? F_PRE : F_LOAD;
        end
        F_PRE: if (rd_gnt) begin
          n_q <= n_q + 1'b1;
          if (n_q == SIDX_W'(NUM_SAMPLES - 1)) state_q <= F_IDLE;
        end
        F_LOAD: if (rd_gnt) begin
          n_q <= n_q + 1'b1;
          if (n_q == SIDX_W'(FRAME_LEN - 1)) begin
            n_q     <= '0;
            state_q <= (task_q.kind == TASK_S1) ? F_BANDS : F_LPF;
          end
        end
        F_LPF: begin
          n_q <= n_q + 1'b1;
          if (n_q == SIDX_W'(FRAME_LEN - 1)) begin
            n_q     <= '0;
            state_q <= F_BANDS;
          end
        end
        F_BANDS: begin
          n_q <= n_q + 1'b1;
          if (n_q == band_len - 1'b1) begin
            n_q    <= '0;
            band_q <= band_q + 1'b1;
            if (band_q == BIDX_W'(NUM_BANDS - 1)) state_q <= F_IDLE;
          end
        end
        default: state_q <= F_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- pipeline
  // Stage 1: Load
  always_ff @(posedge clk) buf_q <= fbuf[buf_raddr];

  logic signed [DATA_W-1:0] x1;
  assign x1 = t1.src_bank ? rd_data : buf_q;

  // Stage 2: LShift
  logic signed [Y_W-1:0] s2_x;

  // Stage 3: Filtering
  logic signed [Y_W-1:0] xh [4];
  logic signed [Y_W-1:0] yh [4];
  logic signed [Y_W-1:0] s3_y;
  logic signed [Y_W-1:0] y_new;
  logic signed [PW-1:0]  facc;

  assign coef_sel = t2.set;

  always_comb begin
    logic signed [Y_W-1:0] xv [4];
    logic signed [Y_W-1:0] yv [4];
    for (int k = 0; k < 4; k++) begin
      xv[k] = t2.first ? '0 : xh[k];
      yv[k] = t2.first ? '0 : yh[k];
    end
    facc = PW'($signed(coef.b[0])) * PW'(s2_x);
    for (int k = 0; k < 4; k++) begin
      facc = facc + PW'($signed(coef.b[k+1])) * PW'(xv[k]) - PW'($signed(coef.a[k])) * PW'(yv[k]);
    end
    y_new = Y_W'(sat_signed(128'(facc >>> CFRAC), Y_W));
  end

  // Stage 4: RShift
  logic signed [DATA_W-1:0] s4_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1 <= '0; t2 <= '0; t3 <= '0; t4 <= '0;
      s2_x <= '0; s3_y <= '0; s4_y <= '0;
      for (int k = 0; k < 4; k++) begin
        xh[k] <= '0;
        yh[k] <= '0;
      end
    end else begin
      t1 <= iss;
      t2 <= t1;
      t3 <= t2;
      t4 <= t3;
      s2_x <= Y_W'(x1) <<< ALPHA;
      if (t2.valid) begin
        s3_y  <= y_new;
        xh[0] <= s2_x;
        yh[0] <= y_new;
        for (int k = 1; k < 4; k++) begin
          xh[k] <= t2.first ? '0 : xh[k-1];
          yh[k] <= t2.first ? '0 : yh[k-1];
        end
      end
      s4_y <= DATA_W'(sat_signed(128'(s3_y >>> ALPHA), DATA_W));
    end
  end

  // Stage 5: Store
  logic [E_W-1:0] eacc_q, eacc_next, sq;
  logic           res_set;

  logic signed [2*DATA_W-1:0] y_wide;
  assign y_wide    = (2*DATA_W)'(s4_y);
  assign sq        = E_W'(unsigned'(y_wide * y_wide));
  assign eacc_next = t4.first ? sq : eacc_q + sq;
  assign res_set   = t4.valid && (t4.mode == M_ENERGY) && t4.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eacc_q    <= '0;
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      if (t4.valid && t4.mode == M_ENERGY) eacc_q <= eacc_next;
      if (res_ack) res_valid <= 1'b0;
      if (res_set) begin
        res_valid <= 1'b1;
        res       <= '{plane: t4.plane, frame: t4.frame, band: t4.band, energy: eacc_next};
      end
    end
  end

  assign so_valid = t4.valid && (t4.mode == M_STREAM);
  assign so_idx   = t4.idx;
  assign so_data  = s4_y;

  // Frame buffer write: SPM load capture, or in-place decimated LPF output.
  always_ff @(posedge clk) begin
    if (ld_pend_q)
      fbuf[ld_idx_q] <= rd_data;
    else if (t4.valid && t4.mode == M_DEC && !t4.idx[0])
      fbuf[LW'(t4.idx >> 1)] <= s4_y;
  end

  assign busy = (state_q != F_IDLE) || t1.valid || t2.valid || t3.valid || t4.valid || res_valid;

  // A finished band must not overwrite a result that was never taken.
  assert property (@(posedge clk) disable iff (!rst_n) res_set |-> (!res_valid || res_ack))
    else $error("filter_module: band result overrun");
  assert property (@(posedge clk) disable iff (!rst_n) task_valid |-> available);

endmodule
