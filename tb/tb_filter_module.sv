// tb_filter_module: self-checking test of one filter module.
//
// A small geometry (32-sample frames, hop 24, 3 bands, 104-sample clip) keeps
// the run short. The testbench models the two SPM banks (one-cycle read) and
// the coefficient store, then runs:
//   * TASK_PRE over the clip, comparing every streamed sample with the
//     reference pre-emphasis;
//   * TASK_S1, TASK_S2 and TASK_S2CAL on different frames with the SPM grant
//     always given, comparing each band energy (and its frame, band and
//     plane) with the reference and checking the busy time: FRAME_LEN*(1+NB)
//     cycles for stride-1 and 2*FRAME_LEN + NB*FRAME_LEN/2 for stride-2;
//   * the same tasks again with a randomly withheld grant and a slow result
//     acknowledge, comparing the energies once more.
module tb_filter_module;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int FL = 32, HP = 24, NB = 3, NS = 104;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic task_valid, available, busy, rd_req, rd_bank, rd_gnt, so_valid, res_valid, res_ack;
  task_t task_in;
  logic [SIDX_W-1:0] rd_addr, so_idx;
  logic signed [DATA_W-1:0] rd_data, so_data;
  logic [SET_W-1:0] coef_sel;
  coef_set_t coef;
  res_t res;

  filter_module #(.FRAME_LEN(FL), .HOP(HP), .NUM_BANDS(NB), .NUM_SAMPLES(NS)) dut (.*);

  int checks = 0, failures = 0;
  int raw[$], pre[$], st[$], feat[$];
  coefs_t sets[2*NB+2];
  bit random_grant = 0;
  int ack_delay = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Coefficient store model.
  always_comb begin
    coef = '0;
    for (int k = 0; k < 5; k++) coef.b[k] = coef_t'(sets[coef_sel][k]);
    for (int k = 0; k < 4; k++) coef.a[k] = coef_t'(sets[coef_sel][5+k]);
  end

  // SPM model: one-cycle read latency.
  always_comb rd_gnt = rd_req && (!random_grant || ($urandom_range(0, 3) != 0));
  always_ff @(posedge clk)
    if (rd_req && rd_gnt) rd_data <= DATA_W'(rd_bank ? pre[rd_addr] : raw[rd_addr]);

  // Result acknowledge after ack_delay cycles.
  int wait_cnt = 0;
  always_ff @(posedge clk) begin
    if (res_valid && !res_ack) wait_cnt <= wait_cnt + 1;
    else                       wait_cnt <= 0;
  end
  assign res_ack = res_valid && (wait_cnt >= ack_delay);

  // Collected results.
  longint got_e[$];
  int got_f[$], got_b[$], got_p[$];
  always @(posedge clk) if (rst_n && res_valid && res_ack) begin
    got_e.push_back(longint'(res.energy));
    got_f.push_back(int'(res.frame));
    got_b.push_back(int'(res.band));
    got_p.push_back(int'(res.plane));
  end

  int pre_seen = 0;
  always @(posedge clk) if (rst_n && so_valid) begin
    check(int'(so_data) == pre[so_idx], $sformatf("pre-emphasis sample %0d: %0d vs %0d",
                                                  so_idx, so_data, pre[so_idx]));
    check(int'(so_idx) == pre_seen, "pre-emphasis stream order");
    pre_seen++;
  end

  task automatic run_task(input task_kind_e k, input int frame, output int busy_cycles);
    @(negedge clk);
    task_valid = 1;
    task_in = '{kind: k, frame: FIDX_W'(frame)};
    @(negedge clk);
    task_valid = 0;
    busy_cycles = 0;
    while (!available) begin
      busy_cycles++;
      @(negedge clk);
    end
    while (busy) @(negedge clk);
  endtask

  task automatic expect_energies(input task_kind_e k, input int frame);
    int fr[$], lp[$], dec[$], y[$];
    fr = {};
    for (int i = 0; i < FL; i++) fr.push_back(k == TASK_S1 ? pre[frame*HP+i] : raw[frame*HP+i]);
    if (k != TASK_S1) begin
      run_iir(sets[2*NB], fr, lp);
      dec = {};
      for (int i = 0; i < FL; i += 2) dec.push_back(lp[i]);
      fr = dec;
    end
    check(got_e.size() == NB, $sformatf("%0d results for task %s", got_e.size(), k.name()));
    for (int b = 0; b < NB && b < got_e.size(); b++) begin
      run_iir(sets[(k == TASK_S1) ? b : NB + b], fr, y);
      check(got_e[b] == energy(y), $sformatf("%s frame %0d band %0d energy %0d vs %0d",
                                             k.name(), frame, b, got_e[b], energy(y)));
      check(got_f[b] == frame && got_b[b] == b && got_p[b] == int'(k == TASK_S2CAL),
            "result tag");
    end
    got_e = {}; got_f = {}; got_b = {}; got_p = {};
  endtask

  initial begin
    int cyc;
    make_clip(NS, 7, raw);
    extract(raw, FL, HP, NB, pre, st, feat);
    for (int s = 0; s < 2 * NB + 2; s++) sets[s] = coef_set(s, NB);
    task_valid = 0;
    task_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    run_task(TASK_PRE, 0, cyc);
    check(pre_seen == NS, $sformatf("pre-emphasis produced %0d samples", pre_seen));
    check(cyc == NS, $sformatf("pre-emphasis busy %0d cycles, expected %0d", cyc, NS));

    run_task(TASK_S1, 1, cyc);
    check(cyc == FL * (1 + NB), $sformatf("stride-1 task took %0d cycles", cyc));
    expect_energies(TASK_S1, 1);

    run_task(TASK_S2, 2, cyc);
    check(cyc == 2 * FL + NB * FL / 2, $sformatf("stride-2 task took %0d cycles", cyc));
    expect_energies(TASK_S2, 2);

    run_task(TASK_S2CAL, 3, cyc);
    expect_energies(TASK_S2CAL, 3);

    random_grant = 1;
    ack_delay = 6;
    run_task(TASK_S1, 3, cyc);
    check(cyc > FL * (1 + NB), "withheld grant lengthens the load");
    expect_energies(TASK_S1, 3);
    run_task(TASK_S2, 0, cyc);
    expect_energies(TASK_S2, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
