// baselinenet_accel: BaselineNet, the full-size MMS plasma-region classifier.
//
// Same input (32x16x32 ion distribution in DRAM) and output (four logits)
// as LogisticNet and ReducedNet. Topology, from the paper's BaselineNet
// figure (kernel and matrix shapes printed there):
//   Conv 1->32,  kernel 5x3x5, stride (2,1,2)   32x16x32 -> 32 x 14x14x14
//   Conv 32->32, kernel 3x3x3, stride 1         -> 32 x 12x12x12
//   MaxPool 2x2x2                               -> 32 x 6x6x6
//   Flatten (6912) -> Gemm 128x6912 + C -> ReLU -> Gemm 4x128 + C
// The strides, the missing padding and the pool window are not printed;
// these are the values that give the 6912-wide Gemm and reproduce the
// paper's operation count (110,541,696) exactly.
//
// Memory placement follows the paper: its 915,492 parameters do not fit in
// block RAM, so the 884,864 of the first Gemm stay in DRAM and are fetched
// through the AXI4 master word by word while that layer runs; the two
// convolutions and the last Gemm (30,628 parameters) are kept on chip. The
// input is also read through the AXI4 master. Feature maps between layers
// sit in on-chip buffers (one per layer output; sharing them is possible
// but not done here).
//
// Parameter buffer in DRAM, ONNX order (words): conv1 W 2400, B 32;
// conv2 W 27648, B 32; Gemm1 B, C; Gemm2 B, C. With arg4 bit0 set, the
// start first copies the on-chip part into the weight RAM (this design's
// choice, since the trained values are not published).
// Registers: as logisticnet_accel. N_CH and N_HIDDEN default to the paper's
// 32 and 128; smaller values give a quicker model of the same structure.
module baselinenet_accel
  import fp32_pkg::*;
  import axi_pkg::*;
#(
  parameter int unsigned N_CH     = 32,
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

  localparam int unsigned D = 32, H = 16, W = 32;
  localparam int unsigned C1D = (D - 5) / 2 + 1, C1H = H - 3 + 1, C1W = (W - 5) / 2 + 1; // 14
  localparam int unsigned C2D = C1D - 2, C2H = C1H - 2, C2W = C1W - 2;                  // 12
  localparam int unsigned N_C1   = N_CH * C1D * C1H * C1W;
  localparam int unsigned N_C2   = N_CH * C2D * C2H * C2W;
  localparam int unsigned N_POOL = N_CH * (C2D / 2) * (C2H / 2) * (C2W / 2);            // 6912
  // parameter buffer offsets (words)
  localparam int unsigned P_C1W = 0;
  localparam int unsigned P_C1B = P_C1W + N_CH * 75;
  localparam int unsigned P_C2W = P_C1B + N_CH;
  localparam int unsigned P_C2B = P_C2W + N_CH * N_CH * 27;
  localparam int unsigned P_G1W = P_C2B + N_CH;
  localparam int unsigned P_G1B = P_G1W + N_HIDDEN * N_POOL;
  localparam int unsigned P_G2W = P_G1B + N_HIDDEN;
  localparam int unsigned P_G2B = P_G2W + N_CLASS * N_HIDDEN;
  localparam int unsigned N_PARAM = P_G2B + N_CLASS;
  // on-chip weight RAM: [P_C1W, P_G1W) then [P_G2W, N_PARAM)
  localparam int unsigned GAP      = P_G2W - P_G1W;
  localparam int unsigned N_ONCHIP = N_PARAM - GAP;

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
  localparam int unsigned N_LAYER = 5;
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
          if (ld_idx == N_ONCHIP - 1) state <= S_RUN;
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
  logic        wr_re, wr_rvalid;
  logic [31:0] wr_raddr;
  fp32_t       wr_rdata;
  sdp_ram #(.DEPTH(N_ONCHIP)) u_wram (
    .clk(ap_clk), .we(state == S_LOAD_WAIT && gm_rvalid), .waddr($clog2(N_ONCHIP)'(ld_idx)),
    .wdata(gm_rdata), .re(wr_re), .raddr($clog2(N_ONCHIP)'(wr_raddr)),
    .rvalid(wr_rvalid), .rdata(wr_rdata)
  );

  // feature buffers: f0 conv1 out, f1 conv2 out, f2 pool out, f3 hidden
  logic        f0_we, f0_re, f0_rv, f1_we, f1_re, f1_rv, f2_we, f2_re, f2_rv, f3_we, f3_re, f3_rv;
  logic [31:0] f0_wa, f0_ra, f1_wa, f1_ra, f2_wa, f2_ra, f3_wa, f3_ra;
  fp32_t       f0_wd, f0_rd, f1_wd, f1_rd, f2_wd, f2_rd, f3_wd, f3_rd;

  sdp_ram #(.DEPTH(N_C1)) u_f0 (.clk(ap_clk), .we(f0_we), .waddr($clog2(N_C1)'(f0_wa)),
    .wdata(f0_wd), .re(f0_re), .raddr($clog2(N_C1)'(f0_ra)), .rvalid(f0_rv), .rdata(f0_rd));
  sdp_ram #(.DEPTH(N_C2)) u_f1 (.clk(ap_clk), .we(f1_we), .waddr($clog2(N_C2)'(f1_wa)),
    .wdata(f1_wd), .re(f1_re), .raddr($clog2(N_C2)'(f1_ra)), .rvalid(f1_rv), .rdata(f1_rd));
  sdp_ram #(.DEPTH(N_POOL)) u_f2 (.clk(ap_clk), .we(f2_we), .waddr($clog2(N_POOL)'(f2_wa)),
    .wdata(f2_wd), .re(f2_re), .raddr($clog2(N_POOL)'(f2_ra)), .rvalid(f2_rv), .rdata(f2_rd));
  sdp_ram #(.DEPTH(N_HIDDEN)) u_f3 (.clk(ap_clk), .we(f3_we), .waddr($clog2(N_HIDDEN)'(f3_wa)),
    .wdata(f3_wd), .re(f3_re), .raddr($clog2(N_HIDDEN)'(f3_ra)), .rvalid(f3_rv), .rdata(f3_rd));

  // ---------------------------------------------------------------- layers
  logic        c1_src_req, c1_wgt_req, c1_busy;
  logic [31:0] c1_src_addr, c1_wgt_addr;
  conv3d_unit #(.CI(1), .CO(N_CH), .ID(D), .IH(H), .IW(W), .KD(5), .KH(3), .KW(5),
                .SD(2), .SH(1), .SW(2), .RELU(1'b0), .W_BASE(P_C1W), .B_BASE(P_C1B)) u_conv1 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[0]), .done(lay_done[0]), .busy(c1_busy),
    .src_req(c1_src_req), .src_addr(c1_src_addr), .src_rvalid(gm_rvalid), .src_rdata(gm_rdata),
    .wgt_req(c1_wgt_req), .wgt_addr(c1_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(f0_we), .dst_addr(f0_wa), .dst_wdata(f0_wd)
  );

  logic        c2_wgt_req, c2_busy;
  logic [31:0] c2_wgt_addr;
  conv3d_unit #(.CI(N_CH), .CO(N_CH), .ID(C1D), .IH(C1H), .IW(C1W), .KD(3), .KH(3), .KW(3),
                .SD(1), .SH(1), .SW(1), .RELU(1'b0), .W_BASE(P_C2W), .B_BASE(P_C2B)) u_conv2 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[1]), .done(lay_done[1]), .busy(c2_busy),
    .src_req(f0_re), .src_addr(f0_ra), .src_rvalid(f0_rv), .src_rdata(f0_rd),
    .wgt_req(c2_wgt_req), .wgt_addr(c2_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(f1_we), .dst_addr(f1_wa), .dst_wdata(f1_wd)
  );

  logic p_busy;
  maxpool3d_unit #(.C(N_CH), .ID(C2D), .IH(C2H), .IW(C2W)) u_pool (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[2]), .done(lay_done[2]), .busy(p_busy),
    .src_req(f1_re), .src_addr(f1_ra), .src_rvalid(f1_rv), .src_rdata(f1_rd),
    .dst_we(f2_we), .dst_addr(f2_wa), .dst_wdata(f2_wd)
  );

  logic        g1_wgt_req, g1_busy;
  logic [31:0] g1_wgt_addr;
  gemm_unit #(.N_IN(N_POOL), .N_OUT(N_HIDDEN), .RELU(1'b1), .W_BASE(P_G1W), .B_BASE(P_G1B)) u_gemm1 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[3]), .done(lay_done[3]), .busy(g1_busy),
    .src_req(f2_re), .src_addr(f2_ra), .src_rvalid(f2_rv), .src_rdata(f2_rd),
    .wgt_req(g1_wgt_req), .wgt_addr(g1_wgt_addr), .wgt_rvalid(gm_rvalid), .wgt_rdata(gm_rdata),
    .dst_we(f3_we), .dst_addr(f3_wa), .dst_wdata(f3_wd)
  );

  logic        g2_wgt_req, g2_busy, g2_we;
  logic [31:0] g2_wgt_addr, g2_wa;
  fp32_t       g2_wd;
  gemm_unit #(.N_IN(N_HIDDEN), .N_OUT(N_CLASS), .RELU(1'b0), .W_BASE(P_G2W), .B_BASE(P_G2B)) u_gemm2 (
    .clk(ap_clk), .rst_n(ap_rst_n), .start(lay_start[4]), .done(lay_done[4]), .busy(g2_busy),
    .src_req(f3_re), .src_addr(f3_ra), .src_rvalid(f3_rv), .src_rdata(f3_rd),
    .wgt_req(g2_wgt_req), .wgt_addr(g2_wgt_addr), .wgt_rvalid(wr_rvalid), .wgt_rdata(wr_rdata),
    .dst_we(g2_we), .dst_addr(g2_wa), .dst_wdata(g2_wd)
  );

  // ---------------------------------------------------------------- routing
  // AXI master: parameter load, then conv1 input reads, then Gemm1 weights.
  wire [31:0] ld_dram = (ld_idx < P_G1W) ? 32'(ld_idx) : 32'(ld_idx + GAP);
  always_comb begin
    gm_req  = 1'b0;
    gm_addr = in_base + (64'(c1_src_addr) << 2);
    if (state == S_LOAD_REQ) begin
      gm_req  = 1'b1;
      gm_addr = w_base + (64'(ld_dram) << 2);
    end else if (c1_src_req) begin
      gm_req  = 1'b1;
    end else if (g1_wgt_req) begin
      gm_req  = 1'b1;
      gm_addr = w_base + (64'(g1_wgt_addr) << 2);
    end
  end

  // On-chip weight RAM: conv1, conv2 and Gemm2 (Gemm2 stored after the gap).
  assign wr_re    = c1_wgt_req | c2_wgt_req | g2_wgt_req;
  assign wr_raddr = (lay == 0) ? c1_wgt_addr : (lay == 1) ? c2_wgt_addr : 32'(g2_wgt_addr - GAP);

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      for (int c = 0; c < N_CLASS; c++) logits[c] <= FP_ZERO;
    end else if (g2_we) begin
      logits[g2_wa[$clog2(N_CLASS)-1:0]] <= g2_wd;
    end
  end

endmodule
