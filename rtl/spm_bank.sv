// spm_bank: one bank of the ASAP-FE scratchpad memory.
//
// The scratchpad holds the raw waveform, the pre-emphasized waveform and the
// extracted features; the accelerator uses three instances of this bank, one
// per region. Each bank is a simple true dual-port RAM written as an array:
// port A belongs to the host (AXI side), port B to the feature-extraction
// datapath. Both ports read synchronously: the word addressed in cycle t
// appears on *_rdata in cycle t+1. A write returns the old word on rdata.
// If both ports write the same word in one cycle, port B wins.
//
// The three regions are the paper's; the dual-port organisation, the 16-bit
// word and the one-cycle read latency are this design's choices.
module spm_bank #(
  parameter int unsigned DEPTH = 16000,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // host port
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // datapath port
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

  always_ff @(posedge clk) begin
    assert (!(a_en && int'(a_addr) >= DEPTH)) else $error("spm_bank: port A address out of range");
    assert (!(b_en && int'(b_addr) >= DEPTH)) else $error("spm_bank: port B address out of range");
  end

endmodule
