// asap_fe_pkg: types, widths and helper functions shared by the ASAP-FE
// feature extractor.
//
// The feature extractor splits a 1 s, 16 kHz clip into half-overlapped
// 256-sample frames, gives each frame a stride (0 = skipped, 1 = full rate,
// 2 = half rate), and filters the surviving frames through a bank of 40
// 4th-order IIR band-pass filters on several parallel filter modules. The
// stride codes, the frame geometry and the 40-band bank follow the paper; the
// fixed-point widths below (ALPHA fraction bits inside the filter, Q4.28
// coefficients, Q8.8 log2 features) are this design's own choices.
package asap_fe_pkg;

  // Sample and feature word width (one word per SPM entry).
  localparam int unsigned DATA_W = 16;
  // Fraction bits added by the filter's LShift stage ("alpha frac bits").
  localparam int unsigned ALPHA = 8;
  // Coefficient format: signed, COEF_W bits, CFRAC fraction bits (range +-8).
  localparam int unsigned COEF_W = 32;
  localparam int unsigned CFRAC = 28;
  // Width of the filter's internal state (input and output history).
  localparam int unsigned Y_W = 40;
  // Width of a band energy (sum of squared 16-bit outputs over <=256 samples).
  localparam int unsigned E_W = 40;
  // Log2 feature: unsigned Q8.8.
  localparam int unsigned FEAT_W = 16;
  localparam int unsigned FEAT_FRAC = 8;
  // Coefficients per set: b0..b4, a1..a4.
  localparam int unsigned NCOEF = 9;

  // Index widths (upper bounds on the configurable sizes).
  localparam int unsigned FIDX_W = 8;   // frame index, up to 256 frames
  localparam int unsigned BIDX_W = 6;   // band index, up to 64 bands
  localparam int unsigned SIDX_W = 16;  // sample index, up to 65536 samples
  localparam int unsigned SET_W = 7;    // coefficient set index, up to 128 sets

  // Stride codes as printed in the STRIDES array of the paper.
  typedef enum logic [1:0] {
    STRIDE_SKIP = 2'd0,
    STRIDE_1    = 2'd1,
    STRIDE_2    = 2'd2
  } stride_e;

  // Work a filter module can be given.
  //   TASK_PRE   : pre-emphasis over the whole raw waveform (runs once).
  //   TASK_S1    : stride-1 band-pass bank over a pre-emphasized frame.
  //   TASK_S2    : LPF + stride-2 band-pass bank over a raw frame.
  //   TASK_S2CAL : as TASK_S2, for a stride-1 frame next to a stride-2 frame;
  //                its features go to the calibration plane.
  typedef enum logic [1:0] {
    TASK_PRE   = 2'd0,
    TASK_S1    = 2'd1,
    TASK_S2    = 2'd2,
    TASK_S2CAL = 2'd3
  } task_kind_e;

  typedef struct packed {
    task_kind_e          kind;
    logic [FIDX_W-1:0]   frame;
  } task_t;

  typedef logic signed [COEF_W-1:0] coef_t;

  // One 4th-order coefficient set: b[0..4] feed-forward, a[0..3] = a1..a4.
  typedef struct packed {
    coef_t [4:0] b;
    coef_t [3:0] a;
  } coef_set_t;

  // Band energy produced by a filter module at the end of a band.
  typedef struct packed {
    logic                plane;  // 0 = feature plane, 1 = calibration plane
    logic [FIDX_W-1:0]   frame;
    logic [BIDX_W-1:0]   band;
    logic [E_W-1:0]      energy;
  } res_t;

  // Saturate a wide signed value to W bits (W <= 64).
  function automatic logic signed [63:0] sat_signed(input logic signed [127:0] v,
                                                    input int unsigned w);
    logic signed [127:0] hi, lo;
    hi = (128'sd1 <<< (w - 1)) - 128'sd1;
    lo = -(128'sd1 <<< (w - 1));
    if (v > hi) return 64'(hi);
    if (v < lo) return 64'(lo);
    return 64'(v);
  endfunction

  // Coefficient set numbering used by the filter cluster and the APB window.
  function automatic logic [SET_W-1:0] set_bpf1(input int unsigned band);
    return SET_W'(band);
  endfunction
  function automatic logic [SET_W-1:0] set_bpf2(input int unsigned nb, input int unsigned band);
    return SET_W'(nb + band);
  endfunction
  function automatic logic [SET_W-1:0] set_lpf(input int unsigned nb);
    return SET_W'(2 * nb);
  endfunction
  function automatic logic [SET_W-1:0] set_pre(input int unsigned nb);
    return SET_W'(2 * nb + 1);
  endfunction

endpackage
