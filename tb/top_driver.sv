// top_driver: host software and DRAM for the four-core top, used by the
// end-to-end testbenches.
//
// Core 0 (multi-ESPERTA) is driven by its own control master; cores 1-3
// (LogisticNet, ReducedNet, BaselineNet) each get an mms_host, i.e. a
// control master plus a behavioural DRAM holding input and parameters.
// Task run_all() exercises every mechanism of the design and counts how
// often each happened:
//   esp_true / esp_false  ESPERTA decisions above / below threshold
//   esp_auto              completions seen while auto-restart was set
//   loads                 parameter loads from DRAM into on-chip RAM
//   streamed              BaselineNet runs that streamed Gemm1 weights
//   relu_zeros            hidden units clamped by ReLU (reference count)
//   irq[i]                done interrupts raised by core i
// The three MMS cores run concurrently, each first with a parameter load
// and then (if MMS_RUNS > 1) reusing the loaded parameters.
module top_driver
  import axi_pkg::*;
  import tb_fp_pkg::*;
#(
  parameter int N_CH     = 32,
  parameter int N_HIDDEN = 128,
  parameter int MMS_RUNS = 2,
  parameter int ESP_RUNS = 20
) (
  input  logic        clk,
  output axil_req_t   s_axi_control     [4],
  input  axil_rsp_t   s_axi_control_rsp [4],
  input  axi_rd_req_t m_axi_gmem        [3],
  output axi_rd_rsp_t m_axi_gmem_rsp    [3],
  input  logic [3:0]  interrupt
);
  int checks = 0, failures = 0;
  int esp_true = 0, esp_false = 0, esp_auto = 0, loads = 0, streamed = 0, relu_zeros = 0;
  int irq [4] = '{0, 0, 0, 0};
  logic [3:0] irq_q = '0;

  axil_host esp (.clk, .req(s_axi_control[0]), .rsp(s_axi_control_rsp[0]));
  mms_host #(.NET(0)) h_log (.clk, .req(s_axi_control[1]), .rsp(s_axi_control_rsp[1]),
                             .m_req(m_axi_gmem[0]), .m_rsp(m_axi_gmem_rsp[0]));
  mms_host #(.NET(1)) h_red (.clk, .req(s_axi_control[2]), .rsp(s_axi_control_rsp[2]),
                             .m_req(m_axi_gmem[1]), .m_rsp(m_axi_gmem_rsp[1]));
  mms_host #(.NET(2), .N_CH(N_CH), .N_HIDDEN(N_HIDDEN)) h_base (.clk, .req(s_axi_control[3]),
                             .rsp(s_axi_control_rsp[3]), .m_req(m_axi_gmem[2]), .m_rsp(m_axi_gmem_rsp[2]));

  always @(posedge clk) begin
    for (int i = 0; i < 4; i++) if (interrupt[i] && !irq_q[i]) irq[i]++;
    irq_q <= interrupt;
  end

  function automatic logic [11:0] arg(int i);
    return REG_ARG_BASE + 12'(4 * i);
  endfunction

  // ESPERTA: random weights, default C and T, ESP_RUNS inferences checked
  // against a double-precision model, then an auto-restart burst.
  task automatic run_esperta();
    real c [6] = '{-6.07, -7.44, -5.02, -6.07, -7.44, -5.02};
    real t [6] = '{0.28, 0.28, 0.23, 0.35, 0.28, 0.23};
    real b [6][3], x [3];
    logic [31:0] v;
    int polls;
    for (int m = 0; m < 6; m++) begin
      c[m] = q(c[m]); t[m] = q(t[m]);
      for (int k = 0; k < 3; k++) begin
        b[m][k] = q(urand(0.0, 1.5));
        esp.write(arg(3 + 5 * m + k), r2f(b[m][k]));
      end
    end
    esp.write(REG_GIE, 1);
    esp.write(REG_IER, 1);
    for (int n = 0; n < ESP_RUNS; n++) begin
      for (int k = 0; k < 3; k++) begin
        x[k] = q(urand(0.0, 6.0));
        esp.write(arg(k), r2f(x[k]));
      end
      esp.run(polls);
      esp.read(REG_RES_BASE, v);
      esp.write(REG_ISR, 1);
      for (int m = 0; m < 6; m++) begin
        real s, p;
        s = c[m];
        for (int k = 0; k < 3; k++) s += b[m][k] * x[k];
        p = 1.0 / (1.0 + $exp(-s));
        if (rabs(p - t[m]) > 1e-5) begin
          checks++;
          if (v[m] !== (p > t[m])) begin failures++; $display("FAIL esperta run %0d model %0d", n, m); end
          if (p > t[m]) esp_true++; else esp_false++;
        end
      end
    end
    // auto-restart: the core must keep completing without new starts
    esp.write(REG_CTRL, 32'h81);
    for (int i = 0; i < 100; i++) begin
      esp.read(REG_CTRL, v);
      if (v[1]) esp_auto++;
    end
    esp.write(REG_CTRL, 32'h0);
    do esp.read(REG_CTRL, v); while (!v[2] || v[0]);
    esp.write(REG_ISR, 1);
  endtask

  task automatic run_mms();
    h_log.host.write(REG_GIE, 1); h_log.host.write(REG_IER, 1);
    h_red.host.write(REG_GIE, 1); h_red.host.write(REG_IER, 1);
    h_base.host.write(REG_GIE, 1); h_base.host.write(REG_IER, 1);
    for (int r = 0; r < MMS_RUNS; r++) begin
      fork
        begin h_log.infer(r == 0);  h_log.host.write(REG_ISR, 1);  end
        begin h_red.infer(r == 0);  h_red.host.write(REG_ISR, 1);  end
        begin
          h_base.infer(r == 0);
          if (h_base.last_reads > N_CH * 2744 * 75 + N_HIDDEN * N_CH * 216) streamed++;
          h_base.host.write(REG_ISR, 1);
        end
      join
      $display("MMS run %0d: LogisticNet %0d, ReducedNet %0d, BaselineNet %0d cycles", r,
               h_log.last_cycles, h_red.last_cycles, h_base.last_cycles);
    end
    loads = h_log.loads + h_red.loads + h_base.loads;
    relu_zeros = h_red.relu_zeros + h_base.relu_zeros;
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
    else $display("mechanism %-28s seen %0d times", what, n);
  endtask

  task automatic run_all();
    fork
      run_esperta();
      run_mms();
    join
    repeat (4) @(posedge clk);
    expect_seen("ESPERTA decision true", esp_true);
    expect_seen("ESPERTA decision false", esp_false);
    expect_seen("ESPERTA auto-restart", esp_auto > 1 ? esp_auto : 0);
    expect_seen("parameter load from DRAM", loads);
    expect_seen("Gemm1 weights streamed", streamed);
    expect_seen("ReLU clamp", relu_zeros);
    for (int i = 0; i < 4; i++) expect_seen($sformatf("done interrupt core %0d", i), irq[i]);
    checks += h_log.checks + h_red.checks + h_base.checks;
    failures += h_log.failures + h_red.failures + h_base.failures;
  endtask
endmodule
