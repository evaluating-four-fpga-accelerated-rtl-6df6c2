// tb_logisticnet_accel: end-to-end check of the LogisticNet core at full size.
//
// Run 1 loads all 8,196 parameters from DRAM and classifies a random
// 32x16x32 input; run 2 classifies a new input with the parameters kept on
// chip. Logits are compared with the double-precision reference. Also checks
// the number of DRAM reads of each run (parameters + 16,384 input words)
// and that the done interrupt is raised.
module tb_logisticnet_accel;
  import axi_pkg::*;
  logic clk = 0, rst_n = 1, interrupt;
  axil_req_t req;  axil_rsp_t rsp;
  axi_rd_req_t m_req;  axi_rd_rsp_t m_rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  logisticnet_accel dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control(req), .s_axi_control_rsp(rsp),
                         .m_axi_gmem(m_req), .m_axi_gmem_rsp(m_rsp), .interrupt);
  mms_host #(.NET(0)) h (.clk, .req, .rsp, .m_req, .m_rsp);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    h.host.write(REG_GIE, 1);
    h.host.write(REG_IER, 1);
    h.infer(1'b1);
    checks++;
    if (h.last_reads != 16384 + 8196) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    checks++;
    if (!interrupt) begin failures++; $display("FAIL no interrupt"); end
    $display("run 1 (with parameter load): %0d cycles", h.last_cycles);
    h.host.write(REG_ISR, 1);
    h.infer(1'b0);
    checks++;
    if (h.last_reads != 16384) begin failures++; $display("FAIL reads %0d", h.last_reads); end
    $display("run 2: %0d cycles", h.last_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks + h.checks, failures + h.failures);
    $finish;
  end
endmodule
