// tb_multi_esperta_accel: end-to-end check of the multi-ESPERTA core.
//
// Acting as the host, the testbench checks the reset values of the six
// biases and thresholds, writes random weights, then runs 40 inferences on
// random flare features: write the three inputs, set start, poll done,
// read the 6-bit decision word. Each decision is compared with
// sigmoid(B.x + C) > T computed in double precision (cases within 1e-5 of
// the threshold are not counted). Both decisions must occur, the done
// interrupt must fire, and the core's start-to-done latency is checked.
module tb_multi_esperta_accel;
  import fp32_pkg::*;
  import axi_pkg::*;
  import tb_fp_pkg::*;

  localparam int LATENCY = 49;   // cycles from ap_start seen to ap_done
  logic clk = 0, rst_n = 1, interrupt;
  axil_req_t req;
  axil_rsp_t rsp;
  int checks = 0, failures = 0, n_true = 0, n_false = 0, n_irq = 0;
  int cyc = 0, t_start = -1, lat = -1;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  multi_esperta_accel dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control(req),
                           .s_axi_control_rsp(rsp), .interrupt);
  axil_host host (.clk, .req, .rsp);

  always @(posedge clk) begin
    cyc++;
    if (dut.ap_start && dut.ap_idle && t_start < 0) t_start = cyc;
    if (dut.ap_done) begin lat = cyc - t_start; t_start = -1; end
  end
  always @(posedge interrupt) n_irq++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [11:0] arg(int i);
    return REG_ARG_BASE + 12'(4 * i);
  endfunction

  initial begin
    real c0 [6] = '{-6.07, -7.44, -5.02, -6.07, -7.44, -5.02};
    real t0 [6] = '{0.28, 0.28, 0.23, 0.35, 0.28, 0.23};
    real b [6][3], c [6], t [6], x [3];
    logic [31:0] v;
    int polls;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++) begin
      host.read(arg(3 + 5 * m + 3), v);
      checks++;
      if (v !== r2f(c0[m])) begin failures++; $display("FAIL reset C[%0d] %h", m, v); end
      host.read(arg(3 + 5 * m + 4), v);
      checks++;
      if (v !== r2f(t0[m])) begin failures++; $display("FAIL reset T[%0d] %h", m, v); end
      c[m] = q(c0[m]); t[m] = q(t0[m]);
      for (int k = 0; k < 3; k++) begin
        b[m][k] = q(urand(0.0, 1.5));
        host.write(arg(3 + 5 * m + k), r2f(b[m][k]));
      end
    end
    host.write(REG_GIE, 1);
    host.write(REG_IER, 1);
    for (int n = 0; n < 40; n++) begin
      for (int k = 0; k < 3; k++) begin
        x[k] = q(urand(0.0, 6.0));
        host.write(arg(k), r2f(x[k]));
      end
      host.run(polls);
      host.read(REG_RES_BASE, v);
      host.write(REG_ISR, 1);
      for (int m = 0; m < 6; m++) begin
        real s, p;
        s = c[m];
        for (int k = 0; k < 3; k++) s += b[m][k] * x[k];
        p = 1.0 / (1.0 + $exp(-s));
        if (rabs(p - t[m]) > 1e-5) begin
          checks++;
          if (v[m] !== (p > t[m])) begin
            failures++; $display("FAIL run %0d model %0d: got %b p=%g T=%g", n, m, v[m], p, t[m]);
          end
          if (p > t[m]) n_true++; else n_false++;
        end
      end
      checks++;
      if (v[31:6] != 0) begin failures++; $display("FAIL upper result bits"); end
      checks++;
      if (lat != LATENCY) begin failures++; $display("FAIL latency %0d", lat); end
    end
    checks++;
    if (n_true == 0 || n_false == 0) begin failures++; $display("FAIL decisions one-sided %0d/%0d", n_true, n_false); end
    checks++;
    if (n_irq != 40) begin failures++; $display("FAIL interrupts %0d", n_irq); end
    $display("decisions true=%0d false=%0d, latency %0d cycles", n_true, n_false, lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
