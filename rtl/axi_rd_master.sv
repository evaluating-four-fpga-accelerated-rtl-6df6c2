// axi_rd_master: m_axi_gmem read engine of an accelerator core.
//
// The paper lets a core fetch large inputs, and weights that do not fit in
// block RAM, from DRAM through an AXI4 master, at a DRAM address the
// processor writes into a control register. This engine turns a word
// request from the core into one single-beat AXI4 read (ARLEN 0, ARSIZE
// 4 bytes, INCR). It keeps one transaction outstanding, as the sequential
// layer units only ever wait for one word; bursts are not used. That
// simplicity is this design's choice.
//
// Core side: pulse req with addr (byte address) while busy is low; rvalid
// pulses with rdata when the beat returns. AXI side: ARVALID is held until
// ARREADY; RREADY is always high while a beat is awaited.
module axi_rd_master
  import axi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [63:0] addr,
  output logic        busy,
  output logic        rvalid,
  output logic [31:0] rdata,
  output logic        rerror,
  output axi_rd_req_t m_axi,
  input  axi_rd_rsp_t m_axi_rsp
);

  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_e;
  state_e      state;
  logic [63:0] addr_q;

  assign busy = (state != S_IDLE);

  always_comb begin
    m_axi         = '0;
    m_axi.araddr  = addr_q;
    m_axi.arlen   = 8'd0;
    m_axi.arsize  = 3'd2;
    m_axi.arburst = 2'b01;
    m_axi.arvalid = (state == S_AR);
    m_axi.rready  = (state == S_R);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; addr_q <= '0; rvalid <= 1'b0; rdata <= '0; rerror <= 1'b0;
    end else begin
      rvalid <= 1'b0;
      case (state)
        S_IDLE: if (req) begin
          addr_q <= addr;
          state  <= S_AR;
        end
        S_AR: if (m_axi_rsp.arready) state <= S_R;
        S_R: if (m_axi_rsp.rvalid) begin
          rvalid <= 1'b1;
          rdata  <= m_axi_rsp.rdata;
          rerror <= rerror | m_axi_rsp.rresp[1];
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_arvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi.arvalid && !m_axi_rsp.arready |=> m_axi.arvalid && $stable(m_axi.araddr));
  a_no_req_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    req |-> !busy);

endmodule
