// tb_hls_accel_top: end-to-end test of the four-core top, with BaselineNet
// narrowed to 4 channels and 16 hidden units (default 32 and 128) and the
// other three cores at full size. Every MMS core runs twice.
//
// The top is driven through its plain ports by top_driver, which acts as
// the host software and the DRAM: it configures and starts the cores,
// checks every result against a double-precision reference, and counts
// each mechanism of the design (ESPERTA decisions both ways, auto-restart,
// parameter load, Gemm1 weight streaming, ReLU clamping, done interrupts),
// failing if one never happened.
module tb_hls_accel_top;
  import axi_pkg::*;
  logic        clk = 0, rst_n = 1;
  axil_req_t   s_axi_control     [4];
  axil_rsp_t   s_axi_control_rsp [4];
  axi_rd_req_t m_axi_gmem        [3];
  axi_rd_rsp_t m_axi_gmem_rsp    [3];
  logic [3:0]  interrupt;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  hls_accel_top #(.BASE_N_CH(4), .BASE_N_HIDDEN(16)) dut (
    .ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control, .s_axi_control_rsp,
                     .m_axi_gmem, .m_axi_gmem_rsp, .interrupt);
  top_driver #(.N_CH(4), .N_HIDDEN(16), .MMS_RUNS(2), .ESP_RUNS(20)) drv (.clk, .s_axi_control, .s_axi_control_rsp,
                     .m_axi_gmem, .m_axi_gmem_rsp, .interrupt);

  initial begin
    repeat (30000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    drv.run_all();
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures);
    $finish;
  end
endmodule
