// tb_fe_latency_sweep: pass latency against the number of filter modules.
//
// Seven full-size ASAP-FE tops (40 bands, 256/192 framing, 16000-sample
// clip) with 1, 2, 4, 8, 15, 23 and 30 filter modules share one bus driver:
// every APB and AXI transfer is broadcast to all of them (their bus ports
// have the same timing whatever the filter count), they are started together
// and each one's completion is awaited. The clip is the same block pattern
// as in the full-size test. For every instance the testbench checks the
// CYCLES register, the pre-emphasized waveform and the whole feature map
// against the reference model, and that the latency never grows with more
// filters. It prints, per filter count, the cycles, the latency at a 50 MHz
// clock, and how many audio channels fit in one 32 ms audio period
// (channels = floor(32 ms / latency)), i.e. the multi-channel real-time
// budget of the front end for this clip. Each latency is also checked
// against the published measurement for that filter count, within 20% (the
// test clip's sparsity is not that of the published speech data).
module tb_fe_latency_sweep;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int NI = 7;
  localparam int MS[NI] = '{1, 2, 4, 8, 15, 23, 30};
  // Published latencies (ms) for the same filter counts.
  localparam real PUB_MS[NI] = '{11.97, 6.21, 3.35, 1.92, 1.25, 0.99, 0.88};
  localparam int NB = 40, FL = 256, HP = 192, NS = 16000, NFR = (NS - FL) / HP + 1;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        s_axi_awvalid, s_axi_wvalid, s_axi_bready, s_axi_arvalid, s_axi_rready;
  logic [17:0] s_axi_awaddr, s_axi_araddr;
  logic [31:0] s_axi_wdata;
  logic [3:0]  s_axi_wstrb;
  logic        psel, penable, pwrite;
  logic [13:0] paddr;
  logic [31:0] pwdata;

  logic [NI-1:0] awready, wready, bvalid, arready, rvalid, pready, pslverr, irq;
  logic [1:0]    bresp [NI];
  logic [1:0]    rresp [NI];
  logic [31:0]   rdata [NI];
  logic [31:0]   prdata [NI];

  for (genvar g = 0; g < NI; g++) begin : g_fe
    asap_fe #(.M(MS[g])) dut (
      .clk, .rst_n,
      .s_axi_awvalid, .s_axi_awready(awready[g]), .s_axi_awaddr,
      .s_axi_wvalid, .s_axi_wready(wready[g]), .s_axi_wdata, .s_axi_wstrb,
      .s_axi_bvalid(bvalid[g]), .s_axi_bready, .s_axi_bresp(bresp[g]),
      .s_axi_arvalid, .s_axi_arready(arready[g]), .s_axi_araddr,
      .s_axi_rvalid(rvalid[g]), .s_axi_rready, .s_axi_rdata(rdata[g]), .s_axi_rresp(rresp[g]),
      .psel, .penable, .pwrite, .paddr, .pwdata, .prdata(prdata[g]), .pready(pready[g]),
      .pslverr(pslverr[g]), .irq(irq[g])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic apb_write(input int addr, input int data);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 1; paddr = 14'(addr); pwdata = data;
    @(negedge clk);
    penable = 1;
    @(negedge clk);
    psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(input int addr, output int data[NI]);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = 0; paddr = 14'(addr);
    @(negedge clk);
    penable = 1;
    #1 for (int g = 0; g < NI; g++) data[g] = prdata[g];
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  task automatic axi_write(input int addr, input int data);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = 18'(addr);
    s_axi_wvalid = 1; s_axi_wdata = data; s_axi_wstrb = 4'hF;
    do @(posedge clk); while (!(awready[0] && wready[0]));
    check(&awready && &wready, "broadcast write accepted by every instance");
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    s_axi_bready = 1;
    while (!bvalid[0]) @(negedge clk);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(input int addr, output int data[NI]);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = 18'(addr);
    do @(posedge clk); while (!arready[0]);
    @(negedge clk);
    s_axi_arvalid = 0;
    s_axi_rready = 1;
    while (!rvalid[0]) @(negedge clk);
    check(&rvalid, "broadcast read answered by every instance");
    for (int g = 0; g < NI; g++) data[g] = rdata[g];
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  int t_done[NI];
  int t_now = 0;
  bit running = 0;
  always @(posedge clk) if (running) begin
    t_now++;
    for (int g = 0; g < NI; g++) if (irq[g] && t_done[g] == 0) t_done[g] = t_now;
  end

  initial begin
    int raw[$], pre[$], st[$], feat[$], v[NI];
    int amp[20] = '{0, 0, 8000, 8000, 8000, 1500, 1500, 1500, 8000, 8000, 0, 0, 1500, 1500,
                    0, 0, 1500, 1500, 8000, 8000};
    int s;
    psel = 0; penable = 0; pwrite = 0; paddr = 0; pwdata = 0;
    s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = 0; s_axi_wstrb = 0;
    foreach (t_done[g]) t_done[g] = 0;
    s = 3;
    for (int i = 0; i < NS; i++) begin
      s = s * 1103515245 + 12345;
      raw.push_back(int'(real'(amp[(i / HP) % 20]) *
                         $sin(2.0 * 3.14159265358979 * 1000.0 * real'(i) / 16000.0)
                         + real'(((s >>> 16) & 7) - 4)));
    end
    extract(raw, FL, HP, NB, pre, st, feat);
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int c = 0; c < 2 * NB + 2; c++) begin
      coefs_t k;
      k = coef_set(c, NB);
      for (int j = 0; j < 9; j++) apb_write(32'h2000 + c * 64 + j * 4, int'(k[j]));
    end
    for (int i = 0; i < NS; i++) axi_write(i * 4, raw[i]);
    apb_write(0, 1);
    running = 1;
    while (!(&irq) && t_now < 2000000) @(negedge clk);
    repeat (2) @(negedge clk);
    running = 0;

    apb_read(8, v);
    $display("  M   cycles   latency@50MHz   channels per 32 ms");
    for (int g = 0; g < NI; g++) begin
      real ms;
      ms = real'(v[g]) / 50.0e3;
      check(v[g] + 2 >= t_done[g] && v[g] <= t_done[g], $sformatf("M=%0d CYCLES %0d vs measured %0d",
                                                      MS[g], v[g], t_done[g]));
      if (g > 0) check(v[g] <= v[g-1], $sformatf("latency grows from M=%0d to M=%0d", MS[g-1], MS[g]));
      check(ms > 0.8 * PUB_MS[g] && ms < 1.2 * PUB_MS[g],
            $sformatf("M=%0d latency %0.3f ms is not within 20%% of the published %0.2f ms",
                      MS[g], ms, PUB_MS[g]));
      $display("%3d  %7d   %8.3f ms     %0d          (published %0.2f ms)", MS[g], v[g], ms,
               int'($floor(32.0 / ms)), PUB_MS[g]);
    end
    for (int i = 0; i < NS; i++) begin
      axi_read(32'h10000 + i * 4, v);
      for (int g = 0; g < NI; g++) check(v[g] == pre[i], $sformatf("M=%0d pre[%0d]", MS[g], i));
    end
    for (int i = 0; i < NFR * NB; i++) begin
      axi_read(32'h20000 + i * 4, v);
      for (int g = 0; g < NI; g++)
        check((v[g] & 16'hFFFF) == feat[i], $sformatf("M=%0d feature %0d", MS[g], i));
    end
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
