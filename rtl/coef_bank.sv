// coef_bank: coefficient store shared by the filters of the cluster.
//
// Holds NUM_SETS coefficient sets of the 4th-order IIR (b0..b4, a1..a4), each
// coefficient a signed Q4.28 word. Set numbering: 0..NB-1 stride-1 band-pass,
// NB..2NB-1 stride-2 band-pass, 2NB the anti-alias low-pass used before
// stride-2, 2NB+1 pre-emphasis. The host writes one coefficient per cycle
// (set, k with k = 0..4 for b0..b4 and 5..8 for a1..a4); every filter reads a
// whole set combinationally through its own read port. All coefficients reset
// to zero.
//
// The paper names the filter operations but gives no coefficient values or
// storage; making them host-programmable registers is this design's choice.
module coef_bank
  import asap_fe_pkg::*;
#(
  parameter int unsigned NUM_SETS = 82,
  parameter int unsigned NPORTS   = 15
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [SET_W-1:0]        wset,
  input  logic [3:0]              wk,
  input  coef_t                   wdata,
  input  logic [NPORTS-1:0][SET_W-1:0] rsel,
  output coef_set_t [NPORTS-1:0]  rdata
);

  coef_t mem [NUM_SETS][NCOEF];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SETS; s++)
        for (int k = 0; k < NCOEF; k++)
          mem[s][k] <= '0;
    end else if (we && int'(wset) < NUM_SETS && int'(wk) < NCOEF) begin
      mem[wset][wk] <= wdata;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rdata[p] = '0;
      if (int'(rsel[p]) < NUM_SETS) begin
        for (int k = 0; k < 5; k++) rdata[p].b[k] = mem[rsel[p]][k];
        for (int k = 0; k < 4; k++) rdata[p].a[k] = mem[rsel[p]][5+k];
      end
    end
  end

endmodule
