// log2_operator: LUT-based log2 that turns a band energy into a feature.
//
// For an energy E > 0 with its leading one at bit p, the feature is
//   p + LUT[m] / 256,   m = the LUT_BITS bits just below the leading one,
//   LUT[i] = round(256 * log2(1 + i / 16)),  i = 0..15,
// returned as an unsigned Q8.8 word (integer part p, 8 fraction bits). E = 0
// gives 0. The frame, band and plane of the energy travel with it. One result
// per cycle, one cycle of latency (registered output); there is no back
// pressure, the operator always accepts.
//
// The paper specifies a LUT-based log2 after filtering; the feature format,
// the table size and the leading-one decomposition are this design's choices.
module log2_operator
  import asap_fe_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  res_t               in_res,
  output logic               out_valid,
  output logic               out_plane,
  output logic [FIDX_W-1:0]  out_frame,
  output logic [BIDX_W-1:0]  out_band,
  output logic [FEAT_W-1:0]  out_feat
);

  localparam int unsigned LUT_BITS = 4;
  localparam logic [FEAT_FRAC-1:0] LUT [1 << LUT_BITS] = '{
    8'd0,   8'd22,  8'd44,  8'd63,  8'd82,  8'd100, 8'd118, 8'd134,
    8'd150, 8'd165, 8'd179, 8'd193, 8'd207, 8'd220, 8'd232, 8'd244
  };

  logic [FEAT_W-1:0] feat;

  always_comb begin
    int unsigned p;
    logic [E_W+LUT_BITS-1:0] norm;
    logic [LUT_BITS-1:0] m;
    p = 0;
    for (int unsigned i = 0; i < E_W; i++) if (in_res.energy[i]) p = i;
    // Place the leading one at bit E_W+LUT_BITS-1 ... then take the next bits.
    norm = (E_W+LUT_BITS)'(in_res.energy) << (E_W + LUT_BITS - 1 - p);
    m    = norm[E_W+LUT_BITS-2 -: LUT_BITS];
    if (in_res.energy == '0) feat = '0;
    else                     feat = FEAT_W'((p << FEAT_FRAC) + int'(LUT[m]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_plane <= 1'b0;
      out_frame <= '0;
      out_band  <= '0;
      out_feat  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_plane <= in_res.plane;
        out_frame <= in_res.frame;
        out_band  <= in_res.band;
        out_feat  <= feat;
      end
    end
  end

endmodule
