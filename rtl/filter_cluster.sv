// filter_cluster: the parameterizable Filter Cluster of ASAP-FE.
//
// M identical filter modules work in parallel, each on the task the filter
// scheduler last handed it. The cluster adds what they share:
//   * coefficient store: one coef_bank with a read port per filter;
//   * scratchpad reads: the raw-waveform bank and the pre-emphasized bank
//     each have one datapath read port, given to one filter at a time by a
//     round-robin arbiter that holds the grant for a whole frame load;
//   * results: a round-robin arbiter passes one band energy per cycle to the
//     log2 operator (res_valid/res, accepted when res_ready).
// Pre-emphasis is always handed to filter 0, whose output stream leaves on
// so_*. task_valid is one-hot and must only select an available filter.
// SPM read data is expected one cycle after *_rd_en.
//
// The number of filters M is the paper's design parameter (15 at the energy
// optimum). The arbitration and the shared coefficient store are this
// design's choices; the paper does not describe them.
module filter_cluster
  import asap_fe_pkg::*;
#(
  parameter int unsigned M           = 15,
  parameter int unsigned FRAME_LEN   = 256,
  parameter int unsigned HOP         = 192,
  parameter int unsigned NUM_BANDS   = 40,
  parameter int unsigned NUM_SAMPLES = 16000,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // dispatch
  input  logic [M-1:0]              task_valid,
  input  task_t                     task_in,
  output logic [M-1:0]              available,
  output logic                      busy,
  // raw waveform bank read port
  output logic                      raw_rd_en,
  output logic [SIDX_W-1:0]         raw_rd_addr,
  input  logic signed [DATA_W-1:0]  raw_rd_data,
  // pre-emphasized bank read port
  output logic                      pre_rd_en,
  output logic [SIDX_W-1:0]         pre_rd_addr,
  input  logic signed [DATA_W-1:0]  pre_rd_data,
  // coefficient write
  input  logic                      coef_we,
  input  logic [SET_W-1:0]          coef_set,
  input  logic [3:0]                coef_k,
  input  coef_t                     coef_wdata,
  // pre-emphasis stream (filter 0)
  output logic                      so_valid,
  output logic [SIDX_W-1:0]         so_idx,
  output logic signed [DATA_W-1:0]  so_data,
  // band energies toward the log2 operator
  output logic                      res_valid,
  output res_t                      res,
  input  logic                      res_ready
);

  logic [M-1:0]                      f_rd_req, f_rd_bank, f_rd_gnt, f_busy;
  logic [M-1:0]                      bank_q;
  logic [M-1:0][SIDX_W-1:0]          f_rd_addr;
  logic [M-1:0][SET_W-1:0]           f_coef_sel;
  coef_set_t [M-1:0]                 f_coef;
  logic [M-1:0]                      f_so_valid;
  logic [M-1:0][SIDX_W-1:0]          f_so_idx;
  logic [M-1:0][DATA_W-1:0]          f_so_data;
  logic [M-1:0]                      f_res_valid, f_res_ack;
  res_t [M-1:0]                      f_res;

  logic [M-1:0]  raw_gnt, pre_gnt, res_gnt;
  logic [IW-1:0] raw_idx, pre_idx, res_idx;
  logic          raw_any, pre_any, res_any;

  coef_bank #(.NUM_SETS(2 * NUM_BANDS + 2), .NPORTS(M)) u_coef (
    .clk, .rst_n, .we(coef_we), .wset(coef_set), .wk(coef_k), .wdata(coef_wdata),
    .rsel(f_coef_sel), .rdata(f_coef)
  );

  rr_arbiter #(.N(M)) u_raw_arb (
    .clk, .rst_n, .req(f_rd_req & ~f_rd_bank), .gnt(raw_gnt), .gnt_idx(raw_idx), .gnt_valid(raw_any)
  );
  rr_arbiter #(.N(M)) u_pre_arb (
    .clk, .rst_n, .req(f_rd_req & f_rd_bank), .gnt(pre_gnt), .gnt_idx(pre_idx), .gnt_valid(pre_any)
  );
  rr_arbiter #(.N(M)) u_res_arb (
    .clk, .rst_n, .req(f_res_valid), .gnt(res_gnt), .gnt_idx(res_idx), .gnt_valid(res_any)
  );

  assign f_rd_gnt    = raw_gnt | pre_gnt;
  assign raw_rd_en   = raw_any;
  assign raw_rd_addr = f_rd_addr[raw_idx];
  assign pre_rd_en   = pre_any;
  assign pre_rd_addr = f_rd_addr[pre_idx];

  // Read data returns a cycle later; remember which bank each filter read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bank_q <= '0;
    else        bank_q <= f_rd_bank;
  end

  for (genvar i = 0; i < M; i++) begin : g_filter
    filter_module #(
      .FRAME_LEN(FRAME_LEN), .HOP(HOP), .NUM_BANDS(NUM_BANDS), .NUM_SAMPLES(NUM_SAMPLES)
    ) u_filter (
      .clk, .rst_n,
      .task_valid(task_valid[i]), .task_in(task_in), .available(available[i]), .busy(f_busy[i]),
      .rd_req(f_rd_req[i]), .rd_bank(f_rd_bank[i]), .rd_gnt(f_rd_gnt[i]), .rd_addr(f_rd_addr[i]),
      .rd_data(bank_q[i] ? pre_rd_data : raw_rd_data),
      .coef_sel(f_coef_sel[i]), .coef(f_coef[i]),
      .so_valid(f_so_valid[i]), .so_idx(f_so_idx[i]), .so_data(f_so_data[i]),
      .res_valid(f_res_valid[i]), .res(f_res[i]), .res_ack(f_res_ack[i])
    );
  end

  assign f_res_ack = res_gnt & {M{res_ready}};
  assign res_valid = res_any;
  assign res       = f_res[res_idx];
  assign busy      = |f_busy;

  assign so_valid = f_so_valid[0];
  assign so_idx   = f_so_idx[0];
  assign so_data  = f_so_data[0];

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(task_valid));
  assert property (@(posedge clk) disable iff (!rst_n) (task_valid & ~available) == '0);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (task_valid != '0 && task_in.kind == TASK_PRE) |-> task_valid[0]);

endmodule
