// axi_spm_port: AXI4-Lite slave through which the host reads and writes the
// ASAP-FE scratchpad.
//
// Each 32-bit bus word carries one 16-bit SPM word in its low half (reads
// return it sign-extended). Byte address bits [ADDR_W-1:16] select the bank
// (0 raw waveform, 1 pre-emphasized waveform, 2 features), bits [15:2] the
// word. Any bank number above 2 answers DECERR without touching memory. One
// transaction at a time: a write needs AW and W together, is done in the
// cycle they are accepted, and B follows next cycle; a read is accepted,
// the SPM answers a cycle later, and R is presented the cycle after that.
// Writes with any of wstrb[1:0] set write the whole 16-bit word.
//
// The paper connects the SPM to the processor over an AXI port; using the
// AXI4-Lite subset and this address map are this design's choices.
module axi_spm_port #(
  parameter int unsigned ADDR_W = 18
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ADDR_W-1:0] s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // SPM host side
  output logic              m_en,
  output logic              m_we,
  output logic [1:0]        m_bank,
  output logic [13:0]       m_idx,
  output logic [15:0]       m_wdata,
  input  logic [15:0]       m_rdata
);

  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_DECERR = 2'b11;

  typedef enum logic [1:0] {A_IDLE, A_BRESP, A_RWAIT, A_RRESP} astate_e;
  astate_e state_q;

  logic wr_go, rd_go;
  logic [1:0] aw_bank, ar_bank;
  assign aw_bank = 2'(s_awaddr[ADDR_W-1:16]);
  assign ar_bank = 2'(s_araddr[ADDR_W-1:16]);
  assign wr_go   = (state_q == A_IDLE) && s_awvalid && s_wvalid;
  assign rd_go   = (state_q == A_IDLE) && !wr_go && s_arvalid;

  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_arready = rd_go;

  always_comb begin
    m_en    = 1'b0;
    m_we    = 1'b0;
    m_bank  = 2'd0;
    m_idx   = '0;
    m_wdata = s_wdata[15:0];
    if (wr_go) begin
      m_en   = (s_awaddr[ADDR_W-1:16] <= (ADDR_W-16)'(2)) && (s_wstrb[1:0] != 2'b00);
      m_we   = 1'b1;
      m_bank = aw_bank;
      m_idx  = s_awaddr[15:2];
    end else if (rd_go) begin
      m_en   = (s_araddr[ADDR_W-1:16] <= (ADDR_W-16)'(2));
      m_bank = ar_bank;
      m_idx  = s_araddr[15:2];
    end
  end

  logic rd_err_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= A_IDLE;
      s_bvalid <= 1'b0;
      s_bresp  <= RESP_OKAY;
      s_rvalid <= 1'b0;
      s_rresp  <= RESP_OKAY;
      s_rdata  <= '0;
      rd_err_q <= 1'b0;
    end else begin
      unique case (state_q)
        A_IDLE: begin
          if (wr_go) begin
            s_bvalid <= 1'b1;
            s_bresp  <= (s_awaddr[ADDR_W-1:16] <= (ADDR_W-16)'(2)) ? RESP_OKAY : RESP_DECERR;
            state_q  <= A_BRESP;
          end else if (rd_go) begin
            rd_err_q <= !(s_araddr[ADDR_W-1:16] <= (ADDR_W-16)'(2));
            state_q  <= A_RWAIT;
          end
        end
        A_BRESP: if (s_bready) begin
          s_bvalid <= 1'b0;
          state_q  <= A_IDLE;
        end
        A_RWAIT: begin
          s_rvalid <= 1'b1;
          s_rdata  <= rd_err_q ? 32'd0 : {{16{m_rdata[15]}}, m_rdata};
          s_rresp  <= rd_err_q ? RESP_DECERR : RESP_OKAY;
          state_q  <= A_RRESP;
        end
        A_RRESP: if (s_rready) begin
          s_rvalid <= 1'b0;
          state_q  <= A_IDLE;
        end
        default: state_q <= A_IDLE;
      endcase
    end
  end

  // AXI rule: a valid response holds until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
