// rr_arbiter: round-robin arbiter whose grant stays with its holder for as
// long as the holder keeps requesting.
//
// The grant is combinational from the request vector and a registered owner
// index. If the current owner still requests, it keeps the grant (a frame
// load from the scratchpad is one uninterrupted burst). Otherwise the first
// requester after the owner, in circular order, is granted and becomes the
// new owner. A requester that drops its request after each transfer (the
// filter result path) therefore shares the grant in plain round-robin order,
// and any requester waits at most N-1 cycles plus the length of the bursts
// ahead of it. The arbiter is a helper of the filter cluster; the paper does
// not describe its arbitration, so this policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          gnt_valid
);

  logic [IW-1:0] owner_q;

  always_comb begin
    gnt       = '0;
    gnt_idx   = owner_q;
    gnt_valid = 1'b0;
    if (req[owner_q]) begin
      gnt_valid = 1'b1;
    end else begin
      for (int unsigned k = 1; k <= N; k++) begin
        if (!gnt_valid && req[(int'(owner_q) + k) % N]) begin
          gnt_valid = 1'b1;
          gnt_idx   = IW'((int'(owner_q) + k) % N);
        end
      end
    end
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         owner_q <= '0;
    else if (gnt_valid) owner_q <= gnt_idx;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  assert property (@(posedge clk) disable iff (!rst_n) (|req) |-> gnt_valid);

endmodule
