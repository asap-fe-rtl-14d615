// tb_filter_cluster: self-checking test of a 3-filter cluster.
//
// Small geometry: 32-sample frames, hop 24, 3 bands, 104-sample clip
// (4 frames). The testbench models the raw and pre-emphasized scratchpad
// banks (one-cycle read) and writes every coefficient set through the
// cluster's coefficient write port. It then
//   * dispatches pre-emphasis to filter 0 and compares the streamed samples
//     with the reference (the pre-emphasized bank model is filled from the
//     stream);
//   * over several rounds, hands random frame tasks (stride-1 or stride-2,
//     plus a calibration task) to random available filters, with res_ready
//     withheld at random, and compares every band energy that comes out with
//     the bit-exact reference, checking that each expected result arrives
//     exactly once.
// It counts cycles where two filters wanted the same bank (arbitration wait)
// and where several results were pending at once, and fails if either never
// happened. It also checks that a task is only accepted by an available
// filter and that busy falls once all work is done.
module tb_filter_cluster;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int M = 3, FL = 32, HP = 24, NB = 3, NS = 104, NFR = (NS - FL) / HP + 1;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic [M-1:0] task_valid, available;
  task_t task_in;
  logic busy, raw_rd_en, pre_rd_en, coef_we, so_valid, res_valid, res_ready;
  logic [SIDX_W-1:0] raw_rd_addr, pre_rd_addr, so_idx;
  logic signed [DATA_W-1:0] raw_rd_data, pre_rd_data, so_data;
  logic [SET_W-1:0] coef_set;
  logic [3:0] coef_k;
  coef_t coef_wdata;
  res_t res;

  filter_cluster #(.M(M), .FRAME_LEN(FL), .HOP(HP), .NUM_BANDS(NB), .NUM_SAMPLES(NS)) dut (.*);

  int checks = 0, failures = 0;
  int raw[$], pre[$], st[$], feat[$];
  coefs_t sets[2*NB+2];
  int pre_mem[NS];
  bit ready_random = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always_ff @(posedge clk) begin
    if (raw_rd_en) raw_rd_data <= DATA_W'(raw[raw_rd_addr]);
    if (pre_rd_en) pre_rd_data <= DATA_W'(pre_mem[pre_rd_addr]);
  end
  always_ff @(posedge clk) res_ready <= !ready_random || ($urandom_range(0, 2) != 0);

  // Expected results: key = plane*1000 + frame*10 + band.
  longint exp_e[int];
  int n_arb = 0, n_resc = 0, pre_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.f_rd_req & dut.f_rd_bank) > 1 ||
        $countones(dut.f_rd_req & ~dut.f_rd_bank) > 1) n_arb++;
    if ($countones(dut.f_res_valid) > 1) n_resc++;
    if (so_valid) begin
      check(int'(so_data) == pre[so_idx], $sformatf("pre-emphasis sample %0d", so_idx));
      pre_mem[so_idx] = int'(so_data);
      pre_seen++;
    end
    if (res_valid && res_ready) begin
      int key;
      key = int'(res.plane) * 1000 + int'(res.frame) * 10 + int'(res.band);
      check(exp_e.exists(key), $sformatf("unexpected result plane %0d frame %0d band %0d",
                                         res.plane, res.frame, res.band));
      if (exp_e.exists(key)) begin
        check(longint'(res.energy) == exp_e[key], $sformatf("energy frame %0d band %0d: %0d vs %0d",
              res.frame, res.band, res.energy, exp_e[key]));
        exp_e.delete(key);
      end
    end
  end

  function automatic void expect_task(input task_kind_e k, input int frame);
    int fr[$], lp[$], dec[$], y[$];
    for (int i = 0; i < FL; i++) fr.push_back(k == TASK_S1 ? pre[frame*HP+i] : raw[frame*HP+i]);
    if (k != TASK_S1) begin
      run_iir(sets[2*NB], fr, lp);
      for (int i = 0; i < FL; i += 2) dec.push_back(lp[i]);
      fr = dec;
    end
    for (int b = 0; b < NB; b++) begin
      run_iir(sets[(k == TASK_S1) ? b : NB + b], fr, y);
      exp_e[int'(k == TASK_S2CAL) * 1000 + frame * 10 + b] = energy(y);
    end
  endfunction

  task automatic dispatch(input int filt, input task_kind_e k, input int frame);
    while (!available[filt]) @(negedge clk);
    task_valid = '0;
    task_valid[filt] = 1'b1;
    task_in = '{kind: k, frame: FIDX_W'(frame)};
    @(negedge clk);
    task_valid = '0;
  endtask

  initial begin
    make_clip(NS, 5, raw);
    extract(raw, FL, HP, NB, pre, st, feat);
    for (int s = 0; s < 2 * NB + 2; s++) sets[s] = fe_ref_pkg::coef_set(s, NB);
    foreach (pre_mem[i]) pre_mem[i] = 0;
    task_valid = '0; task_in = '0; coef_we = 0; coef_set = '0; coef_k = '0; coef_wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2 * NB + 2; s++)
      for (int k = 0; k < 9; k++) begin
        coef_we = 1; coef_set = SET_W'(s); coef_k = 4'(k); coef_wdata = coef_t'(sets[s][k]);
        @(negedge clk);
      end
    coef_we = 0;

    dispatch(0, TASK_PRE, 0);
    while (busy) @(negedge clk);
    check(pre_seen == NS, $sformatf("%0d pre-emphasized samples", pre_seen));

    for (int round = 0; round < 6; round++) begin
      ready_random = (round >= 2);
      for (int f = 0; f < NFR; f++) begin
        task_kind_e k;
        k = $urandom_range(0, 1) ? TASK_S1 : TASK_S2;
        expect_task(k, f);
        dispatch($urandom_range(0, M - 1), k, f);
        if (k == TASK_S1) begin
          expect_task(TASK_S2CAL, f);
          dispatch($urandom_range(0, M - 1), TASK_S2CAL, f);
        end
      end
      while (busy || exp_e.size() != 0) begin
        @(negedge clk);
        if (!busy && exp_e.size() != 0) begin
          repeat (20) @(negedge clk);
          break;
        end
      end
      check(exp_e.size() == 0, $sformatf("round %0d: %0d results missing", round, exp_e.size()));
      exp_e.delete();
    end
    $display("arbitration waits=%0d result conflicts=%0d", n_arb, n_resc);
    check(n_arb > 0, "no read arbitration wait happened");
    check(n_resc > 0, "no result conflict happened");
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
