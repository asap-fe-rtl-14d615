// filter_scheduler: the Filter Scheduler of ASAP-FE (priority queue plus
// round-robin dispatch).
//
// ASSIGN_PRIORITIES: after start, the scheduler scans the STRIDES array three
// times, one frame per cycle, appending tasks to a single Priority_Queue so
// that every Priority-1 task precedes every Priority-2 task, which precede
// every Priority-3 task:
//   pass 1 (Priority 1): a stride-1 frame with a stride-2 neighbour gets two
//          tasks, its stride-2 pass (TASK_S2CAL, which calibrates the
//          neighbouring stride-2 frames) and then its stride-1 pass;
//   pass 2 (Priority 2): each stride-2 frame gets a stride-2 task;
//   pass 3 (Priority 3): every other stride-1 frame gets a stride-1 task.
// Stride-0 frames get no task (frame skipping). Within a priority, frames are
// in index order.
// SCHEDULING: every cycle in which the queue holds a task and some filter is
// available, the head task goes to the first available filter at or after a
// rotating pointer (one-hot task_valid), and the pointer moves past it.
// Dispatch starts while later passes are still being appended; the order is
// unchanged because the passes run in priority order. done rises once every
// task has been handed out and stays until the next start.
//
// The priority rules and their order follow the paper's Algorithm 2 and its
// Fig. 8 example; the one-dispatch-per-cycle timing, the overlap of building
// and dispatching, and the separate calibration task kind are this design's.
module filter_scheduler
  import asap_fe_pkg::*;
#(
  parameter int unsigned NF = 83,
  parameter int unsigned M  = 15,
  localparam int unsigned QD = 2 * NF,
  localparam int unsigned QW = $clog2(QD + 1),
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [NF-1:0][1:0] strides,
  input  logic [M-1:0]       available,
  output logic [M-1:0]       task_valid,
  output task_t              task_out,
  output logic               done,
  output logic [QW-1:0]      n_tasks,
  output logic [FIDX_W:0]    n_p1,
  output logic [FIDX_W:0]    n_p2,
  output logic [FIDX_W:0]    n_p3
);

  typedef enum logic [1:0] {S_IDLE, S_BUILD, S_DRAIN, S_DONE} sstate_e;

  sstate_e          state_q;
  logic [1:0]       pass_q;        // 1, 2, 3
  logic [FIDX_W:0]  f_q;
  task_t            q_mem [QD];
  logic [QW-1:0]    wptr_q, rptr_q;
  logic [IW-1:0]    rr_q;

  // ------------------------------------------------------------ priorities
  logic [1:0] s_cur, s_prev, s_next;
  logic       nb2;
  always_comb begin
    s_cur  = strides[f_q[$clog2(NF)-1:0]];
    s_prev = (f_q != '0) ? strides[f_q[$clog2(NF)-1:0] - 1'b1] : 2'd0;
    s_next = (int'(f_q) < NF - 1) ? strides[f_q[$clog2(NF)-1:0] + 1'b1] : 2'd0;
    nb2    = (s_prev == STRIDE_2) || (s_next == STRIDE_2);
  end

  // ------------------------------------------------------------ dispatch
  logic          can_issue;
  logic          found;
  logic [IW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned k = 0; k < M; k++) begin
      if (!found && available[(int'(rr_q) + k) % M]) begin
        found = 1'b1;
        pick  = IW'((int'(rr_q) + k) % M);
      end
    end
    can_issue  = (state_q == S_BUILD || state_q == S_DRAIN) && (rptr_q != wptr_q) && found;
    task_valid = '0;
    if (can_issue) task_valid[pick] = 1'b1;
    task_out   = q_mem[rptr_q[$clog2(QD)-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pass_q  <= 2'd1;
      f_q     <= '0;
      wptr_q  <= '0;
      rptr_q  <= '0;
      rr_q    <= '0;
      n_p1    <= '0;
      n_p2    <= '0;
      n_p3    <= '0;
    end else if (start) begin
      state_q <= S_BUILD;
      pass_q  <= 2'd1;
      f_q     <= '0;
      wptr_q  <= '0;
      rptr_q  <= '0;
      n_p1    <= '0;
      n_p2    <= '0;
      n_p3    <= '0;
    end else begin
      if (state_q == S_BUILD) begin
        unique case (pass_q)
          2'd1: if (s_cur == STRIDE_1 && nb2) begin
            q_mem[wptr_q[$clog2(QD)-1:0]]        <= '{kind: TASK_S2CAL, frame: FIDX_W'(f_q)};
            q_mem[wptr_q[$clog2(QD)-1:0] + 1'b1] <= '{kind: TASK_S1,    frame: FIDX_W'(f_q)};
            wptr_q <= wptr_q + QW'(2);
            n_p1   <= n_p1 + 1'b1;
          end
          2'd2: if (s_cur == STRIDE_2) begin
            q_mem[wptr_q[$clog2(QD)-1:0]] <= '{kind: TASK_S2, frame: FIDX_W'(f_q)};
            wptr_q <= wptr_q + 1'b1;
            n_p2   <= n_p2 + 1'b1;
          end
          default: if (s_cur == STRIDE_1 && !nb2) begin
            q_mem[wptr_q[$clog2(QD)-1:0]] <= '{kind: TASK_S1, frame: FIDX_W'(f_q)};
            wptr_q <= wptr_q + 1'b1;
            n_p3   <= n_p3 + 1'b1;
          end
        endcase
        if (int'(f_q) == NF - 1) begin
          f_q <= '0;
          if (pass_q == 2'd3) state_q <= S_DRAIN;
          else                pass_q  <= pass_q + 1'b1;
        end else begin
          f_q <= f_q + 1'b1;
        end
      end
      if (can_issue) begin
        rptr_q <= rptr_q + 1'b1;
        rr_q   <= (int'(pick) == M - 1) ? '0 : pick + 1'b1;
      end
      if (state_q == S_DRAIN && rptr_q == wptr_q) state_q <= S_DONE;
    end
  end

  assign done    = (state_q == S_DONE);
  assign n_tasks = wptr_q;

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(task_valid));
  assert property (@(posedge clk) disable iff (!rst_n) rptr_q <= wptr_q);

endmodule
