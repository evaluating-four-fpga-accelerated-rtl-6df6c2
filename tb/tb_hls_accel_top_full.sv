// tb_hls_accel_top_full: end-to-end test of the four-core top with
// every parameter at its default: all four cores at the networks' full
// sizes, one inference on each MMS core and ten on ESPERTA.
//
// The top is driven through its plain ports by top_driver, which acts as
// the host software and the DRAM: it configures and starts the cores,
// checks every result against a double-precision reference, and counts
// each mechanism of the design (ESPERTA decisions both ways, auto-restart,
// parameter load, Gemm1 weight streaming, ReLU clamping, done interrupts),
// failing if one never happened.
module tb_hls_accel_top_full;
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

  hls_accel_top dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control, .s_axi_control_rsp,
                     .m_axi_gmem, .m_axi_gmem_rsp, .interrupt);
  top_driver #(.N_CH(32), .N_HIDDEN(128), .MMS_RUNS(1), .ESP_RUNS(10)) drv (
                     .clk, .s_axi_control, .s_axi_control_rsp,
                     .m_axi_gmem, .m_axi_gmem_rsp, .interrupt);

  initial begin
    repeat (400000000) @(posedge clk);
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
