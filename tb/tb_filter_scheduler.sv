// tb_filter_scheduler: self-checking test of the priority queue and dispatch.
//
// 12 frames, 3 filters. The first case is the 12-frame example of the
// priority queue (strides 0 0 0 1 1 2 2 2 1 1 0 0), whose task order is
// (S2CAL,4) (S1,4) (S2CAL,8) (S1,8) (S2,5) (S2,6) (S2,7) (S1,3) (S1,9); the
// others are random stride patterns checked against an independent model of
// the three priority levels. The filters are modelled as busy for a random
// number of cycles after each task. Checks: the dispatched order, that each
// task goes to a filter that was available, to the first available one at or
// after the round-robin pointer, at most one per cycle, that a task is issued
// in every cycle where the queue holds one and a filter is free, and the task
// and per-priority counts.
module tb_filter_scheduler;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int NF = 12, M = 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done;
  logic [NF-1:0][1:0] strides;
  logic [M-1:0] available, task_valid;
  task_t task_out;
  logic [$clog2(2*NF+1)-1:0] n_tasks;
  logic [FIDX_W:0] n_p1, n_p2, n_p3;

  filter_scheduler #(.NF(NF), .M(M)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int busy_left[M];
  always_comb for (int i = 0; i < M; i++) available[i] = (busy_left[i] == 0);

  int got_k[$], got_f[$], rr = 0, stalls = 0;
  bit running = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < M; i++) if (busy_left[i] > 0) busy_left[i]--;
    if (running && dut.rptr_q != dut.wptr_q && available != '0)
      check(task_valid != '0, "queued task not issued to a free filter");
    if (task_valid != '0) begin
      int k;
      k = -1;
      for (int j = 0; j < M; j++) if (k < 0 && available[(rr + j) % M]) k = (rr + j) % M;
      check($onehot(task_valid), "one task per cycle");
      check(task_valid[k], $sformatf("task to filter %b, expected %0d", task_valid, k));
      got_k.push_back(task_out.kind == TASK_S1 ? 1 : task_out.kind == TASK_S2 ? 2 : 3);
      got_f.push_back(int'(task_out.frame));
      for (int i = 0; i < M; i++) if (task_valid[i]) begin
        busy_left[i] = $urandom_range(1, 12);
        rr = (i + 1) % M;
      end
    end else if (running && available == '0) stalls++;
  end

  task automatic trial(input int st[$]);
    int kinds[$], frames[$], c1, c2, c3, t;
    priority_queue(st, kinds, frames);
    c1 = 0; c2 = 0; c3 = 0;
    foreach (kinds[i]) if (kinds[i] == 3) c1++; else if (kinds[i] == 2) c2++;
    c3 = kinds.size() - 2 * c1 - c2;
    for (int f = 0; f < NF; f++) strides[f] = 2'(st[f]);
    got_k = {}; got_f = {};
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    running = 1;
    t = 0;
    while (!done && t < 2000) begin
      @(negedge clk);
      t++;
    end
    running = 0;
    check(done, "done");
    check(got_k.size() == kinds.size(), $sformatf("%0d tasks, expected %0d", got_k.size(), kinds.size()));
    for (int i = 0; i < kinds.size() && i < got_k.size(); i++)
      check(got_k[i] == kinds[i] && got_f[i] == frames[i],
            $sformatf("task %0d is (%0d,%0d), expected (%0d,%0d)", i, got_k[i], got_f[i],
                      kinds[i], frames[i]));
    check(int'(n_tasks) == kinds.size(), "n_tasks");
    check(int'(n_p1) == c1 && int'(n_p2) == c2 && int'(n_p3) == c3, "per-priority counts");
    repeat (15) @(negedge clk);
  endtask

  initial begin
    int st[$];
    int fig_k[9] = '{3, 1, 3, 1, 2, 2, 2, 1, 1};
    int fig_f[9] = '{4, 4, 8, 8, 5, 6, 7, 3, 9};
    start = 0; strides = '0;
    foreach (busy_left[i]) busy_left[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    st = '{0, 0, 0, 1, 1, 2, 2, 2, 1, 1, 0, 0};
    trial(st);
    for (int i = 0; i < 9; i++)
      check(got_k[i] == fig_k[i] && got_f[i] == fig_f[i], $sformatf("example task %0d", i));
    for (int t = 0; t < 40; t++) begin
      st = {};
      for (int f = 0; f < NF; f++) st.push_back($urandom_range(0, 2));
      trial(st);
    end
    check(stalls > 0, "no dispatch stall with every filter busy was exercised");
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
