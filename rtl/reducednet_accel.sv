// reducednet_accel: ReducedNet, the mid-size MMS plasma-region classifier.
//
// Same input (32x16x32 ion distribution in DRAM) and output (four logits)
// as LogisticNet. Topology, from the paper's ReducedNet figure (kernel and
// matrix shapes printed there):
//   Conv 1->1, kernel 5x3x5, bias 1        32x16x32 -> 14x14x14
//   MaxPool 2x2x2                          14x14x14 -> 7x7x7
//   Flatten (343) -> Gemm 128x343 + C(128) -> ReLU -> Gemm 4x128 + C(4)
// The figure gives no stride or padding. Stride (2,1,2) without padding is
// the only choice that yields the 343-wide Gemm after a 2x2x2 pool, and it
// reproduces the paper's operation count (502,961) exactly, so it is used.
//
// Organisation (paper): input fetched through the AXI4 master from a DRAM
// address register; all 44,624 parameters on chip; feature maps in on-chip
// buffers between layers; logits read back as registers; one unit per layer,
// run in sequence. Parameter loading from a DRAM buffer (ONNX order: conv W,
// conv B, Gemm1 B, Gemm1 C, Gemm2 B, Gemm2 C) when arg4 bit0 is set at start
// is this design's choice, as the trained values are not published.
//
// Registers: as logisticnet_accel (arg0/1 input address, arg2/3 parameter
// address, arg4 bit0 load; res0..3 logits).
module reducednet_accel
  import fp32_pkg::*;
  import axi_pkg::*;
#(
  parameter int unsigned N_HIDDEN = 128,
  parameter int unsigned N_CLASS  = 4
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  input  axil_req_t   s_axi_control,
  output axil_rsp_t   s_axi_control_rsp,
  output axi_rd_req_t m_axi_gmem,
  input  axi_rd_rsp_t m_axi_gmem_rsp,
  output logic        interrupt
);

  // input and layer geometry
  localparam int unsigned D = 32, H = 16, W = 32;
  localparam int unsigned CD = (D - 5) / 2 + 1, CH = (H - 3) / 1 + 1, CW = (W - 5) / 2 + 1;
  localparam int unsigned N_CONV = CD * CH * CW;                   // 2744
  localparam int unsigned N_POOL = (CD / 2) * (CH / 2) * (CW / 2); // 343
  // parameter buffer offsets (words)
  localparam int unsigned P_CW  = 0;
  localparam int unsigned P_CB  = P_CW + 75;
  localparam int unsigned P_G1W = P_CB + 1;
  localparam int unsigned P_G1B = P_G1W + N_HIDDEN * N_POOL;
  localparam int unsigned P_G2W = P_G1B + N_HIDDEN;
  localparam int unsigned P_G2B = P_G2W + N_CLASS * N_HIDDEN;
  localparam int unsigned N_PARAM = P_G2B + N_CLASS;               // 44,624

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
  localparam int unsigned N_LAYER = 4;
  typedef enum logic [2:0] {S_IDLE, S_LOAD_REQ, S_LOAD_WAIT, S_RUN, S_DONE} state_e;
  state_e      state;
  int unsigned lay, ld_idx;
  logic        launched;
  logic [N_LAYER-1:0] lay_start, lay_done;

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
            if (lay == N_LAYER - 1) state <= S_DONE;
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
  logic  wr_re, wr_rvalid;
  logic [31:0] wr_raddr;
  fp32_t wr_rdata;
  sdp_ram #(.DEPTH(N_PARAM)) u_wram (
    .clk(ap_clk), .we(state == S_LOAD_WAIT && gm_rvalid), .waddr($clog2(N_PARAM)'(ld_idx)),
    .wdata(gm_rdata), .re(wr_re), .raddr($clog2(N_PARAM)'(wr_raddr)),
    .rvalid(wr_rvalid), .rdata(wr_rdata)
  );

  // feature buffers: f0 conv out, f1 pool out, f2 hidden activations
  logic        f0_we, f0_re, f0_rv, f1_we, f1_re, f1_rv, f2_we, f2_re, f2_rv;
  logic [31:0] f0_wa, f0_ra, f1_wa, f1_ra, f2_wa, f2_ra;
  fp32_t       f0_wd, f0_rd, f1_wd, f1_rd, f2_wd, f2_rd;

  sdp_ram #(.DEPTH(N_CONV)) u_f0 (.clk(ap_clk), .we(f0_we), .waddr($clog2(N_CONV)'(f0_wa)),
    .wdata(f0_wd), .re(f0_re), .raddr($clog2(N_CONV)'(f0_ra)), .rvalid(f0_rv), .rdata(f0_rd));
  sdp_ram #(.DEPTH(N_POOL)) u_f1 (.clk(ap_clk), .we(f1_we), .waddr($clog2(N_POOL)'(f1_wa)),
    .wdata(f1_wd), .re(f1_re), .raddr($clog2(N_POOL)'(f1_ra)), .rvalid(f1_rv), .rdata(f1_rd));
  sdp_ram #(.DEPTH(N_HIDDEN)) u_f2 (.clk(ap_clk), .we(f2_we), .waddr($clog2(N_HIDDEN)'(f2_wa)),
    .wdata(f2_wd), .re(f2_re), .raddr($clog2(N_HIDDEN)'(f2_ra)), .rvalid(f2_rv), .rdata(f2_rd));

  // ---------------------------------------------------------------- layers
  logic        c_src_req, c_wgt_req, c_busy;
  logic [31:0] c_src_addr, c_wgt_addr;
  conv3d_unit #(.CI(1), .CO(1), .ID(D), .IH(H), .IW(W), .KD(5), .KH(3), .KW(5),
                .SD(2), .SH(1), .SW(2), .RELU(1'b0), .W_BASE(P_CW), .B_BASE(P_CB)) u_conv (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[0]), .done(lay_done[0]), .busy(c_busy),
    .src_req(c_src_req), .src_addr(c_src_addr), .src_rvalid(gm_rvalid), .src_rdata(gm_rdata),
    .wgt_req(c_wgt_req), .wgt_addr(c_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(f0_we), .dst_addr(f0_wa), .dst_wdata(f0_wd)
  );

  logic p_busy;
  maxpool3d_unit #(.C(1), .ID(CD), .IH(CH), .IW(CW)) u_pool (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[1]), .done(lay_done[1]), .busy(p_busy),
    .src_req(f0_re), .src_addr(f0_ra), .src_rvalid(f0_rv), .src_rdata(f0_rd),
    .dst_we(f1_we), .dst_addr(f1_wa), .dst_wdata(f1_wd)
  );

  logic        g1_wgt_req, g1_busy;
  logic [31:0] g1_wgt_addr;
  gemm_unit #(.N_IN(N_POOL), .N_OUT(N_HIDDEN), .RELU(1'b1), .W_BASE(P_G1W), .B_BASE(P_G1B)) u_gemm1 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[2]), .done(lay_done[2]), .busy(g1_busy),
    .src_req(f1_re), .src_addr(f1_ra), .src_rvalid(f1_rv), .src_rdata(f1_rd),
    .wgt_req(g1_wgt_req), .wgt_addr(g1_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(f2_we), .dst_addr(f2_wa), .dst_wdata(f2_wd)
  );

  logic        g2_wgt_req, g2_busy, g2_we;
  logic [31:0] g2_wgt_addr, g2_wa;
  fp32_t       g2_wd;
  gemm_unit #(.N_IN(N_HIDDEN), .N_OUT(N_CLASS), .RELU(1'b0), .W_BASE(P_G2W), .B_BASE(P_G2B)) u_gemm2 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[3]), .done(lay_done[3]), .busy(g2_busy),
    .src_req(f2_re), .src_addr(f2_ra), .src_rvalid(f2_rv), .src_rdata(f2_rd),
    .wgt_req(g2_wgt_req), .wgt_addr(g2_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(g2_we), .dst_addr(g2_wa), .dst_wdata(g2_wd)
  );

  // ---------------------------------------------------------------- routing
  always_comb begin
    gm_req  = c_src_req;
    gm_addr = in_base + (64'(c_src_addr) << 2);
    if (state == S_LOAD_REQ) begin
      gm_req  = 1'b1;
      gm_addr = w_base + (64'(ld_idx) << 2);
    end
  end

  assign wr_re    = c_wgt_req | g1_wgt_req | g2_wgt_req;
  assign wr_raddr = (lay == 0) ? c_wgt_addr : (lay == 2) ? g1_wgt_addr : g2_wgt_addr;

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      for (int c = 0; c < N_CLASS; c++) logits[c] <= FP_ZERO;
    end else if (g2_we) begin
      logits[g2_wa[$clog2(N_CLASS)-1:0]] <= g2_wd;
    end
  end

endmodule
