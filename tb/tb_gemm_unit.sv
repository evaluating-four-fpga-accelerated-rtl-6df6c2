// tb_gemm_unit: checks the fully connected layer unit.
//
// Two instances share the stimulus: one 37 -> 9 with ReLU, one 37 -> 9
// without. Input and parameters come from memories with random latency.
// Every output is compared with a double-precision reference (with and
// without the ReLU clamp); the ReLU must have zeroed at least one output.
module tb_gemm_unit;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int N_IN = 37, N_OUT = 9, WB = 3, BB = WB + N_IN * N_OUT, N_P = BB + N_OUT;

  logic clk = 0, rst_n = 1, start = 0;
  logic [1:0] done, busy, src_req, src_rvalid, wgt_req, wgt_rvalid, dst_we;
  logic [31:0] src_addr [2], wgt_addr [2], dst_addr [2];
  fp32_t src_rdata [2], wgt_rdata [2], dst_wdata [2];
  fp32_t out_mem [2][N_OUT];
  int checks = 0, failures = 0, done_cnt = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    gemm_unit #(.N_IN(N_IN), .N_OUT(N_OUT), .RELU(g == 0), .W_BASE(WB), .B_BASE(BB)) dut (
      .clk, .rst_n, .start, .done(done[g]), .busy(busy[g]),
      .src_req(src_req[g]), .src_addr(src_addr[g]), .src_rvalid(src_rvalid[g]), .src_rdata(src_rdata[g]),
      .wgt_req(wgt_req[g]), .wgt_addr(wgt_addr[g]), .wgt_rvalid(wgt_rvalid[g]), .wgt_rdata(wgt_rdata[g]),
      .dst_we(dst_we[g]), .dst_addr(dst_addr[g]), .dst_wdata(dst_wdata[g]));
    rd_port_model #(.WORDS(N_IN)) src_m (.clk, .req(src_req[g]), .addr(src_addr[g]), .rvalid(src_rvalid[g]), .rdata(src_rdata[g]));
    rd_port_model #(.WORDS(N_P)) wgt_m (.clk, .req(wgt_req[g]), .addr(wgt_addr[g]), .rvalid(wgt_rvalid[g]), .rdata(wgt_rdata[g]));
    always @(posedge clk) if (dst_we[g] && dst_addr[g] < N_OUT) out_mem[g][dst_addr[g]] <= dst_wdata[g];
  end

  always @(posedge clk) if (done[0]) done_cnt++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x [], p [], y [], yr [], mag [];
    int zeros;
    x = new[N_IN]; p = new[N_P];
    for (int i = 0; i < N_IN; i++) begin
      x[i] = q(urand(0.0, 2.0));
      g_dut[0].src_m.mem[i] = r2f(x[i]); g_dut[1].src_m.mem[i] = r2f(x[i]);
    end
    for (int i = 0; i < N_P; i++) begin
      p[i] = q(urand(-0.5, 0.5));
      g_dut[0].wgt_m.mem[i] = r2f(p[i]); g_dut[1].wgt_m.mem[i] = r2f(p[i]);
    end
    gemm_ref(x, p, WB, BB, N_IN, N_OUT, 1'b0, y, mag);
    gemm_ref(x, p, WB, BB, N_IN, N_OUT, 1'b1, yr, mag);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy != 0 || done_cnt == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    zeros = 0;
    for (int o = 0; o < N_OUT; o++) begin
      checks += 2;
      if (!close(f2r(out_mem[1][o]), y[o], 1e-6, mag[o], 0.0)) begin
        failures++; $display("FAIL linear %0d: got %g want %g", o, f2r(out_mem[1][o]), y[o]);
      end
      if (!close(f2r(out_mem[0][o]), yr[o], 1e-6, mag[o], 0.0)) begin
        failures++; $display("FAIL relu %0d: got %g want %g", o, f2r(out_mem[0][o]), yr[o]);
      end
      if (yr[o] == 0.0) zeros++;
    end
    checks++;
    if (zeros == 0) begin failures++; $display("FAIL ReLU never clamped; reseed"); end
    checks++;
    if (g_dut[0].wgt_m.count != N_OUT * (N_IN + 1) || g_dut[0].wgt_m.overlap) begin
      failures++; $display("FAIL weight reads %0d", g_dut[0].wgt_m.count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
