// asap_fe: top of the ASAP-FE feature extractor (Agile Sparsity-Aware
// Parallelized Feature Extractor) for multi-channel keyword spotting.
//
// One pass turns a 1 s, 16 kHz clip held in the scratchpad into a
// NF x NUM_BANDS map of log2 band energies (83 frames x 40 bands by default):
//   1. Pre-emphasis: filter 0 streams the raw waveform through the
//      pre-emphasis coefficient set into the pre-emphasized bank; the stride
//      calculator watches the same stream and, at its end, gives every
//      half-overlapped frame (256 samples, hop 192) a stride: 0 skip,
//      1 full rate, 2 half rate.
//   2. Scheduled filtering: the filter scheduler builds the priority queue
//      from the strides and hands tasks to the M filter modules as they free
//      up. Each task filters one frame through all 40 band-pass filters and
//      returns one energy per band; the log2 operator turns each energy into
//      a Q8.8 feature and writes it to the feature bank.
//   3. Realignment: stride-2 features are shifted onto the stride-1 scale
//      using their calibrated neighbours; skipped frames are zeroed.
// The host loads the clip and reads the features over the AXI4-Lite port,
// programs coefficients and starts a pass over APB (see apb_ctrl for the
// register map, axi_spm_port for the address map). irq (= STATUS.done) rises
// when the feature map is complete; CYCLES reports the pass latency.
//
// Feature bank layout: word plane*NF*NUM_BANDS + frame*NUM_BANDS + band;
// plane 0 holds the features, plane 1 the stride-2 calibration features of
// Priority-1 frames.
//
// The block structure (SPM with three regions, Filter Cluster, Filter
// Scheduler, Sparsity-aware Stride Calculator, Log2 Operator, AXI and APB
// ports) and all algorithmic rules follow the paper. The phase sequencing,
// the register and address maps and the realignment unit's exact form are
// this design's choices. The host processor and its interconnect are outside
// this module.
module asap_fe
  import asap_fe_pkg::*;
#(
  parameter int unsigned M           = 15,
  parameter int unsigned NUM_BANDS   = 40,
  parameter int unsigned FRAME_LEN   = 256,
  parameter int unsigned HOP         = 192,
  parameter int unsigned NUM_SAMPLES = 16000,
  localparam int unsigned NF         = (NUM_SAMPLES - FRAME_LEN) / HOP + 1,
  localparam int unsigned FEAT_DEPTH = 2 * NF * NUM_BANDS,
  localparam int unsigned SAW        = $clog2(NUM_SAMPLES),
  localparam int unsigned FAW        = $clog2(FEAT_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave: scratchpad access
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [17:0] s_axi_awaddr,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  output logic [1:0]  s_axi_bresp,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  input  logic [17:0] s_axi_araddr,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  // APB slave: configuration and control
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [13:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  output logic        irq
);

  typedef enum logic [2:0] {Q_IDLE, Q_PRE, Q_RUN, Q_ALIGN, Q_DONE} qstate_e;
  qstate_e state_q;

  // ------------------------------------------------------------ host ports
  logic        h_en, h_we;
  logic [1:0]  h_bank, h_bank_q;
  logic [13:0] h_idx;
  logic [15:0] h_wdata, h_rdata;
  logic [15:0] raw_a_rdata, pre_a_rdata, feat_a_rdata;

  axi_spm_port #(.ADDR_W(18)) u_axi (
    .clk, .rst_n,
    .s_awvalid(s_axi_awvalid), .s_awready(s_axi_awready), .s_awaddr(s_axi_awaddr),
    .s_wvalid(s_axi_wvalid), .s_wready(s_axi_wready), .s_wdata(s_axi_wdata), .s_wstrb(s_axi_wstrb),
    .s_bvalid(s_axi_bvalid), .s_bready(s_axi_bready), .s_bresp(s_axi_bresp),
    .s_arvalid(s_axi_arvalid), .s_arready(s_axi_arready), .s_araddr(s_axi_araddr),
    .s_rvalid(s_axi_rvalid), .s_rready(s_axi_rready), .s_rdata(s_axi_rdata), .s_rresp(s_axi_rresp),
    .m_en(h_en), .m_we(h_we), .m_bank(h_bank), .m_idx(h_idx), .m_wdata(h_wdata), .m_rdata(h_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    h_bank_q <= '0;
    else if (h_en) h_bank_q <= h_bank;
  end
  assign h_rdata = (h_bank_q == 2'd0) ? raw_a_rdata
                 : (h_bank_q == 2'd1) ? pre_a_rdata : feat_a_rdata;

  logic              start, busy, done;
  logic [31:0]       cycles_q;
  logic [FIDX_W:0]   n_skip, n_s1, n_s2, n_realigned;
  logic [$clog2(2*NF+1)-1:0] n_tasks;
  logic              coef_we;
  logic [SET_W-1:0]  coef_set;
  logic [3:0]        coef_k;
  coef_t             coef_wdata;

  apb_ctrl #(.M(M), .NUM_BANDS(NUM_BANDS), .NF(NF)) u_apb (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .start, .busy, .done, .cycles(cycles_q), .n_skip, .n_s1, .n_s2,
    .n_tasks((FIDX_W+2)'(n_tasks)), .n_realigned, .irq,
    .coef_we, .coef_set, .coef_k, .coef_wdata
  );

  // ------------------------------------------------------------ scratchpad
  logic                     raw_rd_en, pre_rd_en;
  logic [SIDX_W-1:0]        raw_rd_addr, pre_rd_addr;
  logic [DATA_W-1:0]        raw_b_rdata, pre_b_rdata, feat_b_rdata;
  logic                     so_valid;
  logic [SIDX_W-1:0]        so_idx;
  logic signed [DATA_W-1:0] so_data;

  logic                     feat_b_en, feat_b_we;
  logic [FAW-1:0]           feat_b_addr;
  logic [FEAT_W-1:0]        feat_b_wdata;

  spm_bank #(.DEPTH(NUM_SAMPLES), .WIDTH(DATA_W)) u_spm_raw (
    .clk,
    .a_en(h_en && h_bank == 2'd0), .a_we(h_we), .a_addr(SAW'(h_idx)), .a_wdata(h_wdata),
    .a_rdata(raw_a_rdata),
    .b_en(raw_rd_en), .b_we(1'b0), .b_addr(SAW'(raw_rd_addr)), .b_wdata('0), .b_rdata(raw_b_rdata)
  );

  // Pre-emphasized bank: written by the pre-emphasis stream, read by
  // stride-1 frame loads.
  spm_bank #(.DEPTH(NUM_SAMPLES), .WIDTH(DATA_W)) u_spm_pre (
    .clk,
    .a_en(h_en && h_bank == 2'd1), .a_we(h_we), .a_addr(SAW'(h_idx)), .a_wdata(h_wdata),
    .a_rdata(pre_a_rdata),
    .b_en(so_valid || pre_rd_en), .b_we(so_valid),
    .b_addr(so_valid ? SAW'(so_idx) : SAW'(pre_rd_addr)), .b_wdata(so_data), .b_rdata(pre_b_rdata)
  );

  spm_bank #(.DEPTH(FEAT_DEPTH), .WIDTH(FEAT_W)) u_spm_feat (
    .clk,
    .a_en(h_en && h_bank == 2'd2), .a_we(h_we), .a_addr(FAW'(h_idx)), .a_wdata(h_wdata),
    .a_rdata(feat_a_rdata),
    .b_en(feat_b_en), .b_we(feat_b_we), .b_addr(feat_b_addr), .b_wdata(feat_b_wdata),
    .b_rdata(feat_b_rdata)
  );

  // ------------------------------------------------------------ datapath
  logic [M-1:0]  cl_task_valid, cl_available, sch_task_valid;
  task_t         cl_task, sch_task;
  logic          cl_busy;
  logic          res_valid;
  res_t          res;
  logic          pre_kick;

  assign pre_kick      = start;
  assign cl_task_valid = pre_kick ? M'(1) : sch_task_valid;
  assign cl_task       = pre_kick ? '{kind: TASK_PRE, frame: '0} : sch_task;

  filter_cluster #(
    .M(M), .FRAME_LEN(FRAME_LEN), .HOP(HOP), .NUM_BANDS(NUM_BANDS), .NUM_SAMPLES(NUM_SAMPLES)
  ) u_cluster (
    .clk, .rst_n,
    .task_valid(cl_task_valid), .task_in(cl_task), .available(cl_available), .busy(cl_busy),
    .raw_rd_en, .raw_rd_addr, .raw_rd_data(raw_b_rdata),
    .pre_rd_en, .pre_rd_addr, .pre_rd_data(pre_b_rdata),
    .coef_we, .coef_set, .coef_k, .coef_wdata,
    .so_valid, .so_idx, .so_data,
    .res_valid, .res, .res_ready(1'b1)
  );

  logic              stride_done;
  logic [NF-1:0][1:0] strides;

  stride_calculator #(.FRAME_LEN(FRAME_LEN), .HOP(HOP), .NUM_SAMPLES(NUM_SAMPLES)) u_stride (
    .clk, .rst_n, .start, .s_valid(so_valid), .s_data(so_data),
    .done(stride_done), .strides, .n_skip, .n_s1, .n_s2
  );

  logic sched_start, sched_done;
  logic [FIDX_W:0] n_p1, n_p2, n_p3;

  filter_scheduler #(.NF(NF), .M(M)) u_sched (
    .clk, .rst_n, .start(sched_start), .strides, .available(cl_available),
    .task_valid(sch_task_valid), .task_out(sch_task), .done(sched_done),
    .n_tasks, .n_p1, .n_p2, .n_p3
  );

  logic              lg_valid, lg_plane;
  logic [FIDX_W-1:0] lg_frame;
  logic [BIDX_W-1:0] lg_band;
  logic [FEAT_W-1:0] lg_feat;

  log2_operator u_log2 (
    .clk, .rst_n, .in_valid(res_valid), .in_res(res),
    .out_valid(lg_valid), .out_plane(lg_plane), .out_frame(lg_frame), .out_band(lg_band),
    .out_feat(lg_feat)
  );

  logic              al_start, al_done;
  logic              al_en, al_we;
  logic [FAW-1:0]    al_addr;
  logic [FEAT_W-1:0] al_wdata;

  stride2_realign #(.NF(NF), .NUM_BANDS(NUM_BANDS)) u_realign (
    .clk, .rst_n, .start(al_start), .strides,
    .m_en(al_en), .m_we(al_we), .m_addr(al_addr), .m_wdata(al_wdata), .m_rdata(feat_b_rdata),
    .done(al_done), .n_realigned
  );

  // Feature bank datapath port: log2 writes while filtering, realignment after.
  always_comb begin
    if (state_q == Q_ALIGN) begin
      feat_b_en    = al_en;
      feat_b_we    = al_we;
      feat_b_addr  = al_addr;
      feat_b_wdata = al_wdata;
    end else begin
      feat_b_en    = lg_valid;
      feat_b_we    = lg_valid;
      feat_b_addr  = FAW'(int'(lg_plane) * NF * NUM_BANDS + int'(lg_frame) * NUM_BANDS
                          + int'(lg_band));
      feat_b_wdata = lg_feat;
    end
  end

  // ------------------------------------------------------------ sequencer
  logic run_idle;
  assign run_idle    = sched_done && !cl_busy && !lg_valid;
  assign sched_start = (state_q == Q_PRE) && stride_done;
  assign al_start    = (state_q == Q_RUN) && run_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= Q_IDLE;
      cycles_q <= '0;
    end else begin
      unique case (state_q)
        Q_IDLE, Q_DONE: if (start) begin
          state_q  <= Q_PRE;
          cycles_q <= 32'd1;
        end
        Q_PRE: begin
          cycles_q <= cycles_q + 1'b1;
          if (stride_done) state_q <= Q_RUN;
        end
        Q_RUN: begin
          cycles_q <= cycles_q + 1'b1;
          if (run_idle) state_q <= Q_ALIGN;
        end
        Q_ALIGN: begin
          cycles_q <= cycles_q + 1'b1;
          if (al_done) state_q <= Q_DONE;
        end
        default: state_q <= Q_IDLE;
      endcase
    end
  end

  assign busy = (state_q != Q_IDLE) && (state_q != Q_DONE);
  assign done = (state_q == Q_DONE);

  initial assert (NUM_SAMPLES <= (1 << 14) && FEAT_DEPTH <= (1 << 14))
    else $error("asap_fe: SPM bank larger than the 14-bit AXI word index");

  // The pre-emphasis stream and stride-1 loads never share the bank port.
  assert property (@(posedge clk) disable iff (!rst_n) !(so_valid && pre_rd_en));
  assert property (@(posedge clk) disable iff (!rst_n) pre_kick |-> cl_available[0]);

endmodule
