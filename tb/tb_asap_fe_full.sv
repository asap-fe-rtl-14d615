// tb_asap_fe_full: one complete pass of the ASAP-FE top at its default size.
//
// 15 filters, 40 bands, 256-sample frames with a 192-sample hop and a
// 16000-sample (one second at 16 kHz) clip giving 83 frames; the top is
// instantiated with no parameter overrides. The clip is built block by block
// (one block = one hop) by repeating a 20-block pattern of silence, a loud
// 1 kHz tone and a quieter 1 kHz tone, so the pass holds skipped, stride-1 and
// stride-2 frames, calibration tasks and all three realignment cases. The
// testbench writes the coefficients over APB and the clip over AXI, starts the
// pass, waits for irq, and compares status, stride and task counts, CYCLES,
// the pre-emphasized waveform and all 83x40 features with the reference
// model. It prints the pass latency in milliseconds at a 50 MHz clock and
// counts a failure for any mechanism that never happened.
module tb_asap_fe_full;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int M = 15, NB = 40, FL = 256, HP = 192, NS = 16000;
  localparam int NFR = (NS - FL) / HP + 1;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic [17:0] s_axi_awaddr, s_axi_araddr;
  logic [31:0] s_axi_wdata, s_axi_rdata;
  logic [3:0]  s_axi_wstrb;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic        psel, penable, pwrite, pready, pslverr, irq;
  logic [13:0] paddr;
  logic [31:0] pwdata, prdata;

  asap_fe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- bus tasks
  task automatic apb_write(input int addr, input int data);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 1; paddr = 14'(addr); pwdata = data;
    @(negedge clk);
    penable = 1;
    @(negedge clk);
    psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(input int addr, output int data);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 0; paddr = 14'(addr);
    @(negedge clk);
    penable = 1;
    #1 data = prdata;
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic axi_write(input int addr, input int data);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = 18'(addr);
    s_axi_wvalid = 1; s_axi_wdata = data; s_axi_wstrb = 4'hF;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    s_axi_bready = 1;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input int addr, output int data);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = 18'(addr);
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    s_axi_rready = 1;
    while (!s_axi_rvalid) @(negedge clk);
    data = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  // ---------------------------------------------------------------- mechanisms
  int n_arb_wait = 0, n_disp_stall = 0, n_res_conflict = 0, n_cal = 0;
  int n_al_left = 0, n_al_right = 0, n_al_none = 0;
  int tot_skip = 0, tot_s1 = 0, tot_s2 = 0;
  always @(posedge clk) if (rst_n) begin
    if ((dut.u_cluster.f_rd_req & ~dut.u_cluster.f_rd_gnt) != 0) n_arb_wait++;
    if (dut.u_sched.rptr_q != dut.u_sched.wptr_q && dut.cl_available == '0 &&
        int'(dut.state_q) == 2) n_disp_stall++;
    if (!$onehot0(dut.u_cluster.f_res_valid)) n_res_conflict++;
    if (dut.sch_task_valid != '0 && dut.sch_task.kind == TASK_S2CAL) n_cal++;
    if (int'(dut.u_realign.state_q) == 1 &&
        dut.strides[dut.u_realign.f_q[$clog2(NFR)-1:0]] == STRIDE_2) begin
      if (dut.u_realign.l_ok)      n_al_left++;
      else if (dut.u_realign.r_ok) n_al_right++;
      else                         n_al_none++;
    end
  end

  // Clip: per-block amplitudes (0 = silence), pattern repeated every 20 blocks.
  function automatic void block_clip(input int amp[20], input int seed, output int x[$]);
    int s;
    x = {};
    s = seed;
    for (int i = 0; i < NS; i++) begin
      real v;
      s = s * 1103515245 + 12345;
      v = real'(amp[(i / HP) % 20]) * $sin(2.0 * 3.14159265358979 * 1000.0 * real'(i) / 16000.0)
        + real'(((s >>> 16) & 7) - 4);
      x.push_back(int'(v));
    end
  endfunction

  task automatic run_pass(input int raw[$]);
    int pre[$], st[$], feat[$], kinds[$], frames[$], v, cyc, t0, ns0, ns1, ns2;
    extract(raw, FL, HP, NB, pre, st, feat);
    priority_queue(st, kinds, frames);
    ns0 = 0; ns1 = 0; ns2 = 0;
    foreach (st[f]) begin
      if (st[f] == 0) ns0++;
      else if (st[f] == 1) ns1++;
      else ns2++;
    end
    tot_skip += ns0; tot_s1 += ns1; tot_s2 += ns2;
    for (int i = 0; i < NS; i++) axi_write(i * 4, raw[i]);
    apb_write(0, 1);
    t0 = 0;
    while (!irq) begin
      @(posedge clk);
      t0++;
    end
    apb_read(4, v);
    check(v == 2, $sformatf("STATUS after pass = %0d", v));
    apb_read(8, cyc);
    check(cyc == t0, $sformatf("CYCLES %0d, measured %0d", cyc, t0));
    apb_read(12, v); check(v == ns0, $sformatf("N_SKIP %0d vs %0d", v, ns0));
    apb_read(16, v); check(v == ns1, $sformatf("N_S1 %0d vs %0d", v, ns1));
    apb_read(20, v); check(v == ns2, $sformatf("N_S2 %0d vs %0d", v, ns2));
    apb_read(24, v); check(v == kinds.size(), $sformatf("N_TASKS %0d vs %0d", v, kinds.size()));
    apb_read(28, v); check(v == ns2, "N_REALIGN");
    for (int i = 0; i < NS; i++) begin
      axi_read(32'h10000 + i * 4, v);
      check(v == pre[i], $sformatf("pre-emphasized[%0d] %0d vs %0d", i, v, pre[i]));
    end
    for (int i = 0; i < NFR * NB; i++) begin
      axi_read(32'h20000 + i * 4, v);
      check((v & 16'hFFFF) == feat[i], $sformatf("feature frame %0d band %0d: %0d vs %0d",
                                               i / NB, i % NB, v & 16'hFFFF, feat[i]));
    end
    $display("pass: strides skip=%0d s1=%0d s2=%0d tasks=%0d cycles=%0d (%0.3f ms at 50 MHz)",
             ns0, ns1, ns2, kinds.size(), cyc, real'(cyc) / 50.0e3);
  endtask

  initial begin
    int raw[$], v;
    int amp1[20] = '{0, 0, 8000, 8000, 8000, 1500, 1500, 1500, 8000, 8000, 0, 0, 1500, 1500,
                     0, 0, 1500, 1500, 8000, 8000};
    psel = 0; penable = 0; pwrite = 0; paddr = 0; pwdata = 0;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    apb_read(32, v);
    check(v == (NFR << 16 | NB << 8 | M), "CONFIG register");
    for (int s = 0; s < 2 * NB + 2; s++) begin
      coefs_t c;
      c = coef_set(s, NB);
      for (int k = 0; k < 9; k++) apb_write(32'h2000 + s * 64 + k * 4, int'(c[k]));
    end

    block_clip(amp1, 3, raw);
    run_pass(raw);

    $display("mechanisms: arb_wait=%0d dispatch_stall=%0d res_conflict=%0d cal_tasks=%0d realign left=%0d right=%0d none=%0d",
             n_arb_wait, n_disp_stall, n_res_conflict, n_cal, n_al_left, n_al_right, n_al_none);
    check(tot_skip > 0, "frame skip never happened");
    check(tot_s1 > 0, "stride-1 frame never happened");
    check(tot_s2 > 0, "stride-2 frame never happened");
    check(n_arb_wait > 0, "SPM read arbitration wait never happened");
    check(n_disp_stall > 0, "dispatch stall never happened");
    check(n_res_conflict > 0, "result arbitration conflict never happened");
    check(n_cal > 0, "calibration task never dispatched");
    check(n_al_left > 0, "left-neighbour realignment never happened");
    check(n_al_right > 0, "right-neighbour realignment never happened");
    check(n_al_none > 0, "realignment without neighbour never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
