// tb_apb_ctrl: self-checking test of the APB control and status registers.
//
// An APB master issues setup/access transfers. The testbench checks the
// CONFIG word, that each status register returns the value driven on its
// input (random values, several rounds), that a write of 1 to CTRL gives a
// one-cycle start pulse only while the engine is idle, that writes into the
// coefficient window 0x2000 + set*64 + k*4 produce one coefficient write
// strobe with the decoded set, index and data, that irq follows done, and
// that pready is high and pslverr low on every access.
module tb_apb_ctrl;
  import asap_fe_pkg::*;

  localparam int M = 5, NB = 7, NF = 9;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic psel, penable, pwrite, pready, pslverr, start, busy, done, irq, coef_we;
  logic [13:0] paddr;
  logic [31:0] pwdata, prdata, cycles;
  logic [FIDX_W:0] n_skip, n_s1, n_s2, n_realigned;
  logic [FIDX_W+1:0] n_tasks;
  logic [SET_W-1:0] coef_set;
  logic [3:0] coef_k;
  coef_t coef_wdata;

  apb_ctrl #(.M(M), .NUM_BANDS(NB), .NF(NF)) dut (.*);

  int checks = 0, failures = 0, n_start = 0, n_cwe = 0;
  int last_set, last_k;
  logic [31:0] last_data;
  always @(posedge clk) if (rst_n) begin
    if (start) n_start++;
    if (coef_we) begin
      n_cwe++;
      last_set = int'(coef_set);
      last_k = int'(coef_k);
      last_data = 32'(coef_wdata);
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic apb(input bit wr, input int addr, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = wr; paddr = 14'(addr); pwdata = wd;
    @(negedge clk);
    penable = 1;
    #1;
    rd = prdata;
    check(pready && !pslverr, "pready high, pslverr low");
    @(negedge clk);
    psel = 0; penable = 0; pwrite = 0;
  endtask

  initial begin
    logic [31:0] r;
    psel = 0; penable = 0; pwrite = 0; paddr = 0; pwdata = 0;
    busy = 0; done = 0; cycles = 0; n_skip = 0; n_s1 = 0; n_s2 = 0; n_tasks = 0; n_realigned = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    apb(0, 'h20, 0, r);
    check(r == (NF << 16 | NB << 8 | M), $sformatf("CONFIG %h", r));
    for (int t = 0; t < 20; t++) begin
      busy = $urandom_range(0, 1); done = !busy && $urandom_range(0, 1);
      cycles = $urandom; n_skip = ($urandom); n_s1 = ($urandom); n_s2 = ($urandom);
      n_tasks = ($urandom); n_realigned = ($urandom);
      apb(0, 'h04, 0, r); check(r == {30'd0, done, busy}, "STATUS");
      apb(0, 'h08, 0, r); check(r == cycles, "CYCLES");
      apb(0, 'h0C, 0, r); check(r == 32'(n_skip), "N_SKIP");
      apb(0, 'h10, 0, r); check(r == 32'(n_s1), "N_S1");
      apb(0, 'h14, 0, r); check(r == 32'(n_s2), "N_S2");
      apb(0, 'h18, 0, r); check(r == 32'(n_tasks), "N_TASKS");
      apb(0, 'h1C, 0, r); check(r == 32'(n_realigned), "N_REALIGN");
      check(irq == done, "irq follows done");
      n_start = 0;
      apb(1, 'h00, 1, r);
      check(n_start == (busy ? 0 : 1), $sformatf("start pulses %0d with busy=%0d", n_start, busy));
      n_start = 0;
      apb(1, 'h00, 0, r);
      check(n_start == 0, "CTRL write of 0 gives no start");
    end
    for (int t = 0; t < 60; t++) begin
      int s, k;
      logic [31:0] d;
      s = $urandom_range(0, 81); k = $urandom_range(0, 8); d = $urandom;
      n_cwe = 0;
      apb(1, 'h2000 + s * 64 + k * 4, d, r);
      check(n_cwe == 1 && last_set == s && last_k == k && last_data == d,
            $sformatf("coefficient write set %0d k %0d", s, k));
      n_cwe = 0;
      apb(0, 'h2000 + s * 64 + k * 4, 0, r);
      check(n_cwe == 0, "a read gives no coefficient write");
    end
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
