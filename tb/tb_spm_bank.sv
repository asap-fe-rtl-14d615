// tb_spm_bank: self-checking test of the dual-port scratchpad bank.
//
// A 100-word bank is driven with random reads and writes on both ports at
// once for 4000 cycles, with addresses drawn from a narrow range half of the
// time so that both ports often hit the same word. A behavioural copy of the
// memory predicts every read: data appears one cycle after the request, a
// read returns the word as it was before any write in the same cycle, and
// when both ports write one word in the same cycle the datapath port (B)
// wins. The bank is first filled through port A so no read sees an
// uninitialised word.
module tb_spm_bank;
  localparam int DEPTH = 100, WIDTH = 16, AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [WIDTH-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;

  spm_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0, collisions = 0;
  logic [WIDTH-1:0] model [DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [AW-1:0] pick();
    if ($urandom_range(0, 1) == 0) return AW'($urandom_range(0, 3));
    return AW'($urandom_range(0, DEPTH - 1));
  endfunction

  initial begin
    logic a_rd, b_rd;
    logic [WIDTH-1:0] a_exp, b_exp;
    // Fill through port A.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = WIDTH'($urandom);
      model[i] = a_wdata;
    end
    @(negedge clk);
    a_en = 0; a_we = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 3) != 0; a_we = $urandom_range(0, 1); a_addr = pick();
      b_en = $urandom_range(0, 3) != 0; b_we = $urandom_range(0, 1); b_addr = pick();
      a_wdata = WIDTH'($urandom); b_wdata = WIDTH'($urandom);
      a_rd = a_en; b_rd = b_en;
      a_exp = model[a_addr]; b_exp = model[b_addr];
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) collisions++;
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      @(negedge clk);
      if (a_rd) check(a_rdata == a_exp, $sformatf("port A read %0h, expected %0h", a_rdata, a_exp));
      if (b_rd) check(b_rdata == b_exp, $sformatf("port B read %0h, expected %0h", b_rdata, b_exp));
      a_en = 0; b_en = 0;
    end
    check(collisions > 0, "no write collision was exercised");
    $display("write collisions: %0d", collisions);
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
