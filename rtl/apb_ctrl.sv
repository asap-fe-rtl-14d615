// apb_ctrl: APB configuration and control port of ASAP-FE.
//
// An APB3 slave with no wait states (pready is always 1). Register map (byte
// addresses):
//   0x000 CTRL      write bit 0 = 1 to start a feature-extraction pass
//                   (ignored while a pass is running); reads 0
//   0x004 STATUS    bit 0 busy, bit 1 done (pass finished, cleared by start)
//   0x008 CYCLES    clock cycles the last pass took, start to done
//   0x00C N_SKIP    frames skipped (stride 0)
//   0x010 N_S1      stride-1 frames
//   0x014 N_S2      stride-2 frames
//   0x018 N_TASKS   tasks in the priority queue
//   0x01C N_REALIGN stride-2 frames realigned
//   0x020 CONFIG    [7:0] number of filters M, [15:8] bands, [23:16] frames
//   0x2000 + set*64 + k*4   coefficient k (0..4 = b0..b4, 5..8 = a1..a4) of
//                   coefficient set `set` (write only, signed Q4.28)
// Reads of other addresses return 0; pslverr is never raised. irq follows the
// done bit.
//
// The paper only says configuration and control go over APB; the register
// map is this design's.
module apb_ctrl
  import asap_fe_pkg::*;
#(
  parameter int unsigned M         = 15,
  parameter int unsigned NUM_BANDS = 40,
  parameter int unsigned NF        = 83
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              psel,
  input  logic              penable,
  input  logic              pwrite,
  input  logic [13:0]       paddr,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr,
  // control
  output logic              start,
  input  logic              busy,
  input  logic              done,
  input  logic [31:0]       cycles,
  input  logic [FIDX_W:0]   n_skip,
  input  logic [FIDX_W:0]   n_s1,
  input  logic [FIDX_W:0]   n_s2,
  input  logic [FIDX_W+1:0] n_tasks,
  input  logic [FIDX_W:0]   n_realigned,
  output logic              irq,
  // coefficient write
  output logic              coef_we,
  output logic [SET_W-1:0]  coef_set,
  output logic [3:0]        coef_k,
  output coef_t             coef_wdata
);

  logic wr, rd;
  assign wr = psel && penable && pwrite;
  assign rd = psel && !pwrite;

  assign pready  = 1'b1;
  assign pslverr = 1'b0;

  assign start      = wr && (paddr == 14'h000) && pwdata[0] && !busy;
  assign coef_we    = wr && paddr[13];
  assign coef_set   = paddr[12:6];
  assign coef_k     = paddr[5:2];
  assign coef_wdata = coef_t'(pwdata);
  assign irq        = done;

  always_comb begin
    prdata = '0;
    if (rd) begin
      unique case (paddr)
        14'h004: prdata = {30'd0, done, busy};
        14'h008: prdata = cycles;
        14'h00C: prdata = 32'(n_skip);
        14'h010: prdata = 32'(n_s1);
        14'h014: prdata = 32'(n_s2);
        14'h018: prdata = 32'(n_tasks);
        14'h01C: prdata = 32'(n_realigned);
        14'h020: prdata = {8'd0, 8'(NF), 8'(NUM_BANDS), 8'(M)};
        default: prdata = '0;
      endcase
    end
  end

  // APB rule: the access phase follows a setup phase with the same address.
  logic setup_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) setup_q <= 1'b0;
    else        setup_q <= psel && !penable;
  end
  assert property (@(posedge clk) disable iff (!rst_n) (psel && penable) |-> setup_q);

endmodule
