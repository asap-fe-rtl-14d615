// tb_axi_spm_port: self-checking test of the AXI4-Lite scratchpad port.
//
// The port is connected to a model of the three scratchpad banks (raw,
// pre-emphasized, features; 64 words each here, one-cycle read). Random
// single-beat writes and reads are issued with random valid timing: the
// address and data channels of a write may arrive in different cycles, and
// the response ready is held low for random periods. Every read is compared
// with a shadow copy; bank 3 must answer DECERR without touching memory; a
// write with the low strobes cleared must not change memory; read data are
// the 16-bit word sign-extended to 32 bits; write and read responses must
// hold until accepted.
module tb_axi_spm_port;
  localparam int W = 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [17:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp, m_bank;
  logic m_en, m_we;
  logic [13:0] m_idx;
  logic [15:0] m_wdata, m_rdata;

  axi_spm_port dut (.*);

  int checks = 0, failures = 0, n_decerr = 0, n_strb0 = 0;
  logic [15:0] mem [3][W];
  logic [15:0] shadow [3][W];

  always_ff @(posedge clk) if (m_en && m_bank != 2'd3) begin
    m_rdata <= mem[m_bank][m_idx[5:0]];
    if (m_we) mem[m_bank][m_idx[5:0]] <= m_wdata;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic do_write(input int bank, input int idx, input logic [15:0] v, input logic [3:0] strb);
    bit aw_done, w_done;
    int hold;
    @(negedge clk);
    s_awaddr = 18'((bank << 16) | (idx << 2));
    s_wdata = {16'($urandom), v};
    s_wstrb = strb;
    s_awvalid = 1;
    s_wvalid = $urandom_range(0, 1);
    aw_done = 0; w_done = 0;
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (s_awvalid && s_awready) aw_done = 1;
      if (s_wvalid && s_wready) w_done = 1;
      @(negedge clk);
      if (aw_done) s_awvalid = 0;
      if (w_done) s_wvalid = 0; else s_wvalid = 1;
      if (aw_done && w_done) break;
      if (!aw_done) s_awvalid = 1;
    end
    hold = $urandom_range(0, 3);
    while (!s_bvalid) @(negedge clk);
    repeat (hold) begin
      @(negedge clk);
      check(s_bvalid, "write response held");
    end
    check(s_bresp == (bank == 3 ? 2'b11 : 2'b00), $sformatf("bresp %0d for bank %0d", s_bresp, bank));
    s_bready = 1;
    @(negedge clk);
    s_bready = 0;
    if (bank == 3) n_decerr++;
    else if (strb[1:0] != 0) shadow[bank][idx] = v;
    else n_strb0++;
  endtask

  task automatic do_read(input int bank, input int idx);
    logic [31:0] d;
    int hold;
    @(negedge clk);
    s_araddr = 18'((bank << 16) | (idx << 2));
    s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    hold = $urandom_range(0, 3);
    repeat (hold) begin
      @(negedge clk);
      check(s_rvalid && s_rdata == d, "read response held");
    end
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
    if (bank == 3) begin
      check(s_rresp == 2'b11, "rresp DECERR for bank 3");
      n_decerr++;
    end else begin
      check(s_rresp == 2'b00, "rresp OKAY");
      check(d == {{16{shadow[bank][idx][15]}}, shadow[bank][idx]},
            $sformatf("read bank %0d word %0d: %h vs %h", bank, idx, d, shadow[bank][idx]));
    end
  endtask

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int b = 0; b < 3; b++) for (int i = 0; i < W; i++) begin
      mem[b][i] = 16'($urandom);
      shadow[b][i] = mem[b][i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int bank;
      bank = $urandom_range(0, 12) == 0 ? 3 : $urandom_range(0, 2);
      if ($urandom_range(0, 1))
        do_write(bank, $urandom_range(0, W - 1), 16'($urandom),
                 $urandom_range(0, 7) == 0 ? 4'b1100 : 4'b1111);
      else
        do_read(bank, $urandom_range(0, W - 1));
    end
    check(n_decerr > 0 && n_strb0 > 0, "DECERR and zero-strobe writes exercised");
    $display("decerr=%0d zero-strobe writes=%0d", n_decerr, n_strb0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
