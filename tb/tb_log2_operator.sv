// tb_log2_operator: self-checking test of the log2 feature operator.
//
// Band energies of every magnitude are pushed through the operator: zero,
// each power of two, each power of two plus every 4-bit mantissa, all-ones
// and random 40-bit values. The expected feature is computed independently
// in real arithmetic: integer part = position of the leading one, fraction =
// round(256 * log2(1 + m/16)) where m is the 4 bits after the leading one,
// zero energy giving zero. The test also checks the one-cycle latency and
// that the plane, frame and band tags travel with the value.
module tb_log2_operator;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid, out_plane;
  res_t in_res;
  logic [FIDX_W-1:0] out_frame;
  logic [BIDX_W-1:0] out_band;
  logic [FEAT_W-1:0] out_feat;

  log2_operator dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic apply(input longint e);
    res_t r;
    r.plane  = 1'($urandom);
    r.frame  = FIDX_W'($urandom);
    r.band   = BIDX_W'($urandom);
    r.energy = E_W'(e);
    @(negedge clk);
    in_valid = 1;
    in_res   = r;
    @(negedge clk);
    in_valid = 0;
    check(out_valid, "out_valid one cycle after in_valid");
    check(int'(out_feat) == log2_feat(longint'(r.energy)),
          $sformatf("energy %0d: feature %0d, expected %0d", r.energy, out_feat,
                    log2_feat(longint'(r.energy))));
    check(out_plane == r.plane && out_frame == r.frame && out_band == r.band, "tags");
    @(negedge clk);
    check(!out_valid, "out_valid lasts one cycle");
  endtask

  initial begin
    in_valid = 0;
    in_res = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply(0);
    for (int p = 0; p < E_W; p++) begin
      apply(longint'(1) << p);
      if (p >= 4) for (int m = 0; m < 16; m++) apply((longint'(1) << p) | (longint'(m) << (p - 4)));
    end
    apply((longint'(1) << E_W) - 1);
    repeat (300) apply({$urandom, $urandom} >> $urandom_range(24, 63));
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
