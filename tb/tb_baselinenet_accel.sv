// tb_baselinenet_accel: end-to-end check of the BaselineNet core, narrowed.
//
// The core is built with 4 convolution channels and 16 hidden units (the
// default is 32 and 128) to keep the run short; the structure, the layer
// order, the on-chip/DRAM split of the parameters and the input geometry
// are those of the full network. Run 1 loads the on-chip parameters, run 2
// keeps them. Logits are compared with the double-precision reference; the
// DRAM reads per run must equal input taps + first-Gemm parameters (+ the
// on-chip parameters when loading), which shows the first Gemm's weights
// are streamed from DRAM.
module tb_baselinenet_accel;
  import axi_pkg::*;
  localparam int N_CH = 4, N_HID = 16;
  localparam int N_G1 = N_HID * N_CH * 216 + N_HID;
  localparam int N_ON = N_CH * 76 + N_CH * N_CH * 27 + N_CH + 4 * N_HID + 4;
  logic clk = 0, rst_n = 1, interrupt;
  axil_req_t req;  axil_rsp_t rsp;
  axi_rd_req_t m_req;  axi_rd_rsp_t m_rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  baselinenet_accel #(.N_CH(N_CH), .N_HIDDEN(N_HID)) dut (.ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_control(req), .s_axi_control_rsp(rsp), .m_axi_gmem(m_req), .m_axi_gmem_rsp(m_rsp), .interrupt);
  mms_host #(.NET(2), .N_CH(N_CH), .N_HIDDEN(N_HID)) h (.clk, .req, .rsp, .m_req, .m_rsp);

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    h.infer(1'b1);
    checks++;
    if (h.last_reads != N_CH * 2744 * 75 + N_G1 + N_ON) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    $display("run 1 (with parameter load): %0d cycles", h.last_cycles);
    h.infer(1'b0);
    checks++;
    if (h.last_reads != N_CH * 2744 * 75 + N_G1) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    $display("run 2: %0d cycles", h.last_cycles);
    checks++;
    if (h.relu_zeros == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures);
    $finish;
  end
endmodule
