// hls_accel_top: the four custom inference cores for on-board space use.
//
// The DPU cannot run ESPERTA (sigmoid, greater-than) or the MMS networks
// (3-D convolution and pooling), so these get their own cores, each with a
// block-level control slave and, for the MMS networks, an AXI4 read master
// into the DRAM shared with the processor:
//   core 0  multi_esperta_accel  six SEP forecasters on one 3-feature input
//   core 1  logisticnet_accel    MaxPool + Gemm
//   core 2  reducednet_accel     Conv3D + MaxPool + Gemm + ReLU + Gemm
//   core 3  baselinenet_accel    2x Conv3D + MaxPool + Gemm + ReLU + Gemm
// In the evaluated system each core is built into its own FPGA image next
// to the processor, with vendor AXI interconnect between them. Placing all
// four side by side in one top, with each core's ports brought out
// unchanged (AXI interconnect and reset logic left to the integrating
// system), is this design's choice.
//
// Ports: s_axi_control[i] / s_axi_control_rsp[i] is core i's AXI4-Lite
// control slave; m_axi_gmem[j] / m_axi_gmem_rsp[j] is the AXI4 read master
// of MMS core j+1; interrupt[i] is core i's done interrupt. One clock
// (ap_clk, 100 MHz in the evaluated system) and one active-low synchronous
// reset release (ap_rst_n) serve all cores.
//
// BASE_N_CH and BASE_N_HIDDEN set BaselineNet's channel count and hidden
// width; their defaults are the network's own (32 and 128). They exist so
// that a fast end-to-end simulation can narrow the largest core; the other
// cores have no size parameters here because their sizes are fixed by the
// networks they run.
module hls_accel_top
  import axi_pkg::*;
#(
  parameter int unsigned BASE_N_CH     = 32,
  parameter int unsigned BASE_N_HIDDEN = 128
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  input  axil_req_t   s_axi_control     [4],
  output axil_rsp_t   s_axi_control_rsp [4],
  output axi_rd_req_t m_axi_gmem        [3],
  input  axi_rd_rsp_t m_axi_gmem_rsp    [3],
  output logic [3:0]  interrupt
);

  multi_esperta_accel u_esperta (
    .ap_clk, .ap_rst_n,
    .s_axi_control(s_axi_control[0]), .s_axi_control_rsp(s_axi_control_rsp[0]),
    .interrupt(interrupt[0])
  );

  logisticnet_accel u_logistic (
    .ap_clk, .ap_rst_n,
    .s_axi_control(s_axi_control[1]), .s_axi_control_rsp(s_axi_control_rsp[1]),
    .m_axi_gmem(m_axi_gmem[0]), .m_axi_gmem_rsp(m_axi_gmem_rsp[0]),
    .interrupt(interrupt[1])
  );

  reducednet_accel u_reduced (
    .ap_clk, .ap_rst_n,
    .s_axi_control(s_axi_control[2]), .s_axi_control_rsp(s_axi_control_rsp[2]),
    .m_axi_gmem(m_axi_gmem[1]), .m_axi_gmem_rsp(m_axi_gmem_rsp[1]),
    .interrupt(interrupt[2])
  );

  baselinenet_accel #(.N_CH(BASE_N_CH), .N_HIDDEN(BASE_N_HIDDEN)) u_baseline (
    .ap_clk, .ap_rst_n,
    .s_axi_control(s_axi_control[3]), .s_axi_control_rsp(s_axi_control_rsp[3]),
    .m_axi_gmem(m_axi_gmem[2]), .m_axi_gmem_rsp(m_axi_gmem_rsp[2]),
    .interrupt(interrupt[3])
  );

endmodule
