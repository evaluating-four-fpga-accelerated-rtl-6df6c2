// logisticnet_accel: LogisticNet, the smallest MMS plasma-region classifier.
//
// Input: one 32x16x32 ion energy distribution from the MMS FPI instrument
// (16,384 binary32 words in DRAM). Output: four logits, one per dayside
// plasma region (solar wind, ion foreshock, magnetosheath, magnetosphere);
// the class is their argmax, taken by software. Topology, from the paper's
// LogisticNet figure:
//   MaxPool (2x2x2, 32x16x32 -> 16x8x16) -> Flatten (2048) -> Gemm 4x2048 + C(4)
// The pooling window is inferred (see maxpool3d_unit).
//
// Organisation, following the paper's description of its HLS cores: the
// processor writes the DRAM address of the input into a control register and
// the core reads it through its AXI4 master; all 8,196 parameters are held
// on chip; the pooled feature map sits in an on-chip buffer between the two
// layers; the logits are read back as registers. The layers run one after
// the other, each on its own unit (maxpool3d_unit, gemm_unit).
//
// On-chip parameters cannot be compile-time constants here because the
// trained values are not published with the network, so the core copies
// them from a DRAM parameter buffer (ONNX order: Gemm B, then C) when
// arg 4 bit 0 is set at start. That load step is this design's choice.
//
// Registers (axil_ctrl): arg0/arg1 input address low/high, arg2/arg3
// parameter buffer address low/high, arg4 bit0 load parameters at start;
// res0..res3 the logits. Timing: ap_start -> ap_done takes about
// 2*16384 + 2048 cycles for the pooling plus 4*(3*2048+3) for the Gemm,
// plus the AXI latency of each input read; a parameter load adds one AXI
// read per parameter.
module logisticnet_accel
  import fp32_pkg::*;
  import axi_pkg::*;
#(
  parameter int unsigned D = 32,
  parameter int unsigned H = 16,
  parameter int unsigned W = 32,
  parameter int unsigned N_CLASS = 4,
  localparam int unsigned N_FEAT  = (D / 2) * (H / 2) * (W / 2),
  localparam int unsigned N_PARAM = N_CLASS * N_FEAT + N_CLASS
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  input  axil_req_t   s_axi_control,
  output axil_rsp_t   s_axi_control_rsp,
  output axi_rd_req_t m_axi_gmem,
  input  axi_rd_rsp_t m_axi_gmem_rsp,
  output logic        interrupt
);

  logic        ap_start, ap_done, ap_idle;
  logic [31:0] args [5];
  fp32_t       logits [N_CLASS];

  axil_ctrl #(.N_ARG(5), .N_RES(N_CLASS)) u_ctrl (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axi(s_axi_control), .s_axi_rsp(s_axi_control_rsp),
    .ap_start, .ap_ready(ap_done), .ap_done, .ap_idle,
    .args, .results(logits), .interrupt
  );

  wire [63:0] in_base = {args[1], args[0]};
  wire [63:0] w_base  = {args[3], args[2]};

  // ---------------------------------------------------------------- AXI master
  logic        gm_req, gm_busy, gm_rvalid, gm_rerr;
  logic [63:0] gm_addr;
  fp32_t       gm_rdata;

  axi_rd_master u_gmem (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .req(gm_req), .addr(gm_addr), .busy(gm_busy),
    .rvalid(gm_rvalid), .rdata(gm_rdata), .rerror(gm_rerr),
    .m_axi(m_axi_gmem), .m_axi_rsp(m_axi_gmem_rsp)
  );

  // ---------------------------------------------------------------- sequencer
  typedef enum logic [2:0] {S_IDLE, S_LOAD_REQ, S_LOAD_WAIT, S_RUN, S_DONE} state_e;
  state_e      state;
  int unsigned lay, ld_idx;
  logic        launched;
  logic [1:0]  lay_start, lay_done;

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      state <= S_IDLE; lay <= 0; ld_idx <= 0; launched <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (ap_start) begin
          lay <= 0; ld_idx <= 0; launched <= 1'b0;
          state <= args[4][0] ? S_LOAD_REQ : S_RUN;
        end
        S_LOAD_REQ: state <= S_LOAD_WAIT;
        S_LOAD_WAIT: if (gm_rvalid) begin
          if (ld_idx == N_PARAM - 1) state <= S_RUN;
          else begin
            ld_idx <= ld_idx + 1;
            state  <= S_LOAD_REQ;
          end
        end
        S_RUN: begin
          launched <= 1'b1;
          if (lay_done[lay]) begin
            launched <= 1'b0;
            if (lay == 1) state <= S_DONE;
            else lay <= lay + 1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign ap_done = (state == S_DONE);
  assign ap_idle = (state == S_IDLE);
  always_comb begin
    lay_start = '0;
    if (state == S_RUN && !launched) lay_start[lay] = 1'b1;
  end

  // ---------------------------------------------------------------- storage
  localparam int unsigned WAW = $clog2(N_PARAM);
  localparam int unsigned FAW = $clog2(N_FEAT);

  logic          wr_re, wr_rvalid, fm_we, fm_re, fm_rvalid;
  logic [WAW-1:0] wr_raddr;
  logic [FAW-1:0] fm_waddr, fm_raddr;
  fp32_t         wr_rdata, fm_wdata, fm_rdata;

  sdp_ram #(.DEPTH(N_PARAM)) u_wram (
    .clk(ap_clk), .we(state == S_LOAD_WAIT && gm_rvalid), .waddr(WAW'(ld_idx)),
    .wdata(gm_rdata), .re(wr_re), .raddr(wr_raddr), .rvalid(wr_rvalid), .rdata(wr_rdata)
  );

  sdp_ram #(.DEPTH(N_FEAT)) u_fmap (
    .clk(ap_clk), .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata),
    .re(fm_re), .raddr(fm_raddr), .rvalid(fm_rvalid), .rdata(fm_rdata)
  );

  // ---------------------------------------------------------------- layers
  logic        p_src_req, p_dst_we, p_busy;
  logic [31:0] p_src_addr, p_dst_addr;
  fp32_t       p_dst_wdata;

  maxpool3d_unit #(.C(1), .ID(D), .IH(H), .IW(W)) u_pool (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[0]), .done(lay_done[0]), .busy(p_busy),
    .src_req(p_src_req), .src_addr(p_src_addr), .src_rvalid(gm_rvalid), .src_rdata(gm_rdata),
    .dst_we(p_dst_we), .dst_addr(p_dst_addr), .dst_wdata(p_dst_wdata)
  );

  logic        g_src_req, g_wgt_req, g_dst_we, g_busy;
  logic [31:0] g_src_addr, g_wgt_addr, g_dst_addr;
  fp32_t       g_dst_wdata;

  gemm_unit #(.N_IN(N_FEAT), .N_OUT(N_CLASS), .RELU(1'b0), .W_BASE(0), .B_BASE(N_CLASS * N_FEAT)) u_gemm (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[1]), .done(lay_done[1]), .busy(g_busy),
    .src_req(g_src_req), .src_addr(g_src_addr), .src_rvalid(fm_rvalid), .src_rdata(fm_rdata),
    .wgt_req(g_wgt_req), .wgt_addr(g_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(g_dst_we), .dst_addr(g_dst_addr), .dst_wdata(g_dst_wdata)
  );

  // ---------------------------------------------------------------- routing
  always_comb begin
    gm_req  = 1'b0;
    gm_addr = in_base + (64'(p_src_addr) << 2);
    if (state == S_LOAD_REQ) begin
      gm_req  = 1'b1;
      gm_addr = w_base + (64'(ld_idx) << 2);
    end else if (p_src_req) begin
      gm_req = 1'b1;
    end
  end

  assign fm_we    = p_dst_we;
  assign fm_waddr = FAW'(p_dst_addr);
  assign fm_wdata = p_dst_wdata;
  assign fm_re    = g_src_req;
  assign fm_raddr = FAW'(g_src_addr);
  assign wr_re    = g_wgt_req;
  assign wr_raddr = WAW'(g_wgt_addr);

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      for (int c = 0; c < N_CLASS; c++) logits[c] <= FP_ZERO;
    end else if (g_dst_we) begin
      logits[g_dst_addr[$clog2(N_CLASS)-1:0]] <= g_dst_wdata;
    end
  end

endmodule
