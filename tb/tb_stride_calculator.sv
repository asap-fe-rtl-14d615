// tb_stride_calculator: self-checking test of the stride calculator.
//
// Small geometry: 32-sample frames, hop 24, 488 samples (20 frames). Each
// trial builds a clip one hop-block at a time from tones of random amplitude
// (including silence) and random frequency, streams it in with random idle
// cycles between samples, and compares the 20 stride codes and the three
// counts with an independent reference that measures STE, zero crossings and
// max-min per frame and applies the thresholds STE < max/64 (skip) and
// S < max/2 (stride 2) in real arithmetic. It also checks that the decision
// pass takes one cycle per frame after the last sample, and that a new start
// clears the previous result.
module tb_stride_calculator;
  import asap_fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int FL = 32, HP = 24, NFR = 20, NS = (NFR - 1) * HP + FL;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, s_valid, done;
  logic signed [DATA_W-1:0] s_data;
  logic [NFR-1:0][1:0] strides;
  logic [FIDX_W:0] n_skip, n_s1, n_s2;

  stride_calculator #(.FRAME_LEN(FL), .HOP(HP), .NUM_SAMPLES(NS)) dut (.*);

  int checks = 0, failures = 0;
  int seen[3] = '{0, 0, 0};
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic trial(input bit gaps);
    int x[$], st[$], c[3], lat;
    int amps[6] = '{0, 200, 1000, 2500, 5000, 9000};
    x = {};
    for (int j = 0; j <= NS / HP; j++) begin
      int a;
      real fr;
      a  = amps[$urandom_range(0, 5)];
      fr = real'($urandom_range(200, 6000));
      for (int i = j * HP; i < (j + 1) * HP && i < NS; i++)
        x.push_back(int'(real'(a) * $sin(2.0 * 3.14159265358979 * fr * real'(i) / 16000.0))
                    + $urandom_range(0, 6) - 3);
    end
    strides_of(x, FL, HP, st);
    c = '{0, 0, 0};
    foreach (st[f]) c[st[f]]++;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    check(!done, "start clears done");
    for (int i = 0; i < NS; i++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
      s_valid = 1;
      s_data  = DATA_W'(x[i]);
      @(negedge clk);
      s_valid = 0;
    end
    lat = 0;
    while (!done && lat < 1000) begin
      @(negedge clk);
      lat++;
    end
    check(lat == NFR, $sformatf("decision took %0d cycles, expected %0d", lat, NFR));
    for (int f = 0; f < NFR; f++) begin
      check(int'(strides[f]) == st[f], $sformatf("frame %0d stride %0d, expected %0d",
                                                 f, strides[f], st[f]));
      seen[st[f]]++;
    end
    check(int'(n_skip) == c[0] && int'(n_s1) == c[1] && int'(n_s2) == c[2], "stride counts");
  endtask

  initial begin
    start = 0; s_valid = 0; s_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) trial(t % 2 == 1);
    check(seen[0] > 0 && seen[1] > 0 && seen[2] > 0, "every stride code occurred");
    $display("stride codes seen: skip=%0d s1=%0d s2=%0d", seen[0], seen[1], seen[2]);
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
