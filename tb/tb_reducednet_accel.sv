// tb_reducednet_accel: end-to-end check of the ReducedNet core at full size.
//
// Run 1 loads all 44,624 parameters and classifies a random input; run 2
// reuses the on-chip parameters on a new input. Logits are compared with
// the double-precision reference; the ReLU must clamp some hidden units;
// DRAM reads per run are checked (each convolution tap reads the input).
module tb_reducednet_accel;
  import axi_pkg::*;
  logic clk = 0, rst_n = 1, interrupt;
  axil_req_t req;  axil_rsp_t rsp;
  axi_rd_req_t m_req;  axi_rd_rsp_t m_rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  reducednet_accel dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control(req), .s_axi_control_rsp(rsp),
                        .m_axi_gmem(m_req), .m_axi_gmem_rsp(m_rsp), .interrupt);
  mms_host #(.NET(1), .N_HIDDEN(128)) h (.clk, .req, .rsp, .m_req, .m_rsp);

  initial begin
    repeat (10000000) @(posedge clk);
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
    if (h.last_reads != 2744 * 75 + 44624) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    $display("run 1 (with parameter load): %0d cycles", h.last_cycles);
    h.infer(1'b0);
    checks++;
    if (h.last_reads != 2744 * 75) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    $display("run 2: %0d cycles", h.last_cycles);
    checks++;
    if (h.relu_zeros == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures);
    $finish;
  end
endmodule
