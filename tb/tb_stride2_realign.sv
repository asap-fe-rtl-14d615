// tb_stride2_realign: self-checking test of the stride-2 realignment pass.
//
// 12 frames of 3 bands. For each trial the feature memory (plane 0: features,
// plane 1: calibration features of the stride-1 frames) is filled with random
// Q8.8 values, a random stride pattern is applied and the pass is started.
// The memory is modelled with a one-cycle read. The expected result is worked
// out here: skipped frames become zero; a stride-2 frame gets
// F1[ref] - F2cal[ref] added to every band, where ref is the stride-1 frame
// bounding its run on the left, else the one on the right; a run with neither
// gets +1.0 (+256); results clamp to 0..65535; stride-1 frames and plane 1
// are untouched. Values near 0 and 65535 are used so that both clamps occur.
// The run time (one cycle per frame, plus NB cycles per skipped frame and
// 4*NB per stride-2 frame) and the realigned-frame count are checked too.
module tb_stride2_realign;
  import asap_fe_pkg::*;

  localparam int NF = 12, NB = 3, D = 2 * NF * NB;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, m_en, m_we;
  logic [NF-1:0][1:0] strides;
  logic [$clog2(D)-1:0] m_addr;
  logic [FEAT_W-1:0] m_wdata, m_rdata;
  logic [FIDX_W:0] n_realigned;

  stride2_realign #(.NF(NF), .NUM_BANDS(NB)) dut (.*);

  int checks = 0, failures = 0, n_left = 0, n_right = 0, n_none = 0, n_clamp = 0;
  logic [FEAT_W-1:0] mem [D];
  always_ff @(posedge clk) if (m_en) begin
    m_rdata <= mem[m_addr];
    if (m_we) mem[m_addr] <= m_wdata;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd_feat();
    case ($urandom_range(0, 3))
      0: return $urandom_range(0, 300);
      1: return $urandom_range(65200, 65535);
      default: return $urandom_range(0, 65535);
    endcase
  endfunction

  task automatic trial();
    int st[NF], exp_mem[D], ns0, ns2, t;
    for (int f = 0; f < NF; f++) st[f] = $urandom_range(0, 2);
    for (int i = 0; i < D; i++) begin
      exp_mem[i] = rnd_feat();
      mem[i] = FEAT_W'(exp_mem[i]);
    end
    ns0 = 0; ns2 = 0;
    for (int f = 0; f < NF; f++) begin
      if (st[f] == 0) begin
        ns0++;
        for (int b = 0; b < NB; b++) exp_mem[f * NB + b] = 0;
      end else if (st[f] == 2) begin
        int l, r, rf, v;
        ns2++;
        l = f - 1;
        while (l >= 0 && st[l] == 2) l--;
        r = f + 1;
        while (r < NF && st[r] == 2) r++;
        rf = -1;
        if (l >= 0 && st[l] == 1) begin rf = l; n_left++; end
        else if (r < NF && st[r] == 1) begin rf = r; n_right++; end
        else n_none++;
        for (int b = 0; b < NB; b++) begin
          if (rf >= 0) v = exp_mem[f * NB + b] + int'(mem[rf * NB + b]) - int'(mem[NF * NB + rf * NB + b]);
          else         v = exp_mem[f * NB + b] + 256;
          if (v < 0 || v > 65535) n_clamp++;
          exp_mem[f * NB + b] = v < 0 ? 0 : v > 65535 ? 65535 : v;
        end
      end
    end
    for (int f = 0; f < NF; f++) strides[f] = 2'(st[f]);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t = 1;
    while (!done && t < 5000) begin
      @(negedge clk);
      t++;
    end
    check(t == NF + NB * ns0 + 4 * NB * ns2 + 1,
          $sformatf("pass took %0d cycles, expected %0d", t, NF + NB * ns0 + 4 * NB * ns2 + 1));
    check(int'(n_realigned) == ns2, "realigned-frame count");
    for (int i = 0; i < D; i++)
      check(int'(mem[i]) == exp_mem[i], $sformatf("word %0d (frame %0d band %0d plane %0d): %0d vs %0d",
            i, (i % (NF * NB)) / NB, i % NB, i / (NF * NB), mem[i], exp_mem[i]));
  endtask

  initial begin
    start = 0; strides = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) trial();
    $display("reference cases: left=%0d right=%0d none=%0d clamps=%0d", n_left, n_right, n_none, n_clamp);
    check(n_left > 0 && n_right > 0 && n_none > 0 && n_clamp > 0, "every reference case and a clamp occurred");
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
