// tb_conv3d_unit: checks the 3-D convolution layer unit.
//
// A reduced layer (2 -> 3 channels, 7x5x9 input, 3x2x3 kernel, stride
// (2,1,2), ReLU on) reads its input and parameters from two memories with
// random 1..3-cycle latency. Every output word is compared with a double
// precision reference; each output must be written exactly once, no read
// may be issued while one is pending or out of range, and done must pulse
// once. The layer is run twice to check that it restarts cleanly.
module tb_conv3d_unit;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int CI = 2, CO = 3, ID = 7, IH = 5, IW = 9, KD = 3, KH = 2, KW = 3;
  localparam int SD = 2, SH = 1, SW = 2;
  localparam int OD = (ID - KD) / SD + 1, OH = (IH - KH) / SH + 1, OW = (IW - KW) / SW + 1;
  localparam int N_IN = CI * ID * IH * IW, N_W = CO * CI * KD * KH * KW, N_OUT = CO * OD * OH * OW;
  localparam int WB = 5, BB = WB + N_W;   // parameters at an offset, bias after weights

  logic clk = 0, rst_n = 1, start = 0, done, busy;
  logic src_req, src_rvalid, wgt_req, wgt_rvalid, dst_we;
  logic [31:0] src_addr, wgt_addr, dst_addr;
  fp32_t src_rdata, wgt_rdata, dst_wdata;
  fp32_t out_mem [N_OUT];
  int    out_cnt [N_OUT];
  int checks = 0, failures = 0, done_cnt = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  conv3d_unit #(.CI(CI), .CO(CO), .ID(ID), .IH(IH), .IW(IW), .KD(KD), .KH(KH), .KW(KW),
                .SD(SD), .SH(SH), .SW(SW), .RELU(1'b1), .W_BASE(WB), .B_BASE(BB)) dut (.*);
  rd_port_model #(.WORDS(N_IN)) src_m (.clk, .req(src_req), .addr(src_addr), .rvalid(src_rvalid), .rdata(src_rdata));
  rd_port_model #(.WORDS(BB + CO)) wgt_m (.clk, .req(wgt_req), .addr(wgt_addr), .rvalid(wgt_rvalid), .rdata(wgt_rdata));

  always @(posedge clk) begin
    if (dst_we) begin
      if (dst_addr < N_OUT) begin out_mem[dst_addr] <= dst_wdata; out_cnt[dst_addr]++; end
      else begin failures++; $display("FAIL write out of range %0d", dst_addr); end
    end
    if (done) done_cnt++;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x [], p [], y [], mag [];
    int  zeros;
    x = new[N_IN]; p = new[BB + CO];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int i = 0; i < N_IN; i++) begin x[i] = q(urand(-1.0, 1.0)); src_m.mem[i] = r2f(x[i]); end
      for (int i = 0; i < BB + CO; i++) begin p[i] = q(urand(-0.5, 0.5)); wgt_m.mem[i] = r2f(p[i]); end
      conv3d_ref(x, p, WB, BB, CI, CO, ID, IH, IW, KD, KH, KW, SD, SH, SW, y, mag);
      foreach (out_cnt[i]) out_cnt[i] = 0;
      done_cnt = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (done_cnt == 0) @(negedge clk);
      repeat (3) @(negedge clk);
      zeros = 0;
      for (int i = 0; i < N_OUT; i++) begin
        real want;
        want = y[i] < 0.0 ? 0.0 : y[i];
        if (want == 0.0) zeros++;
        checks++;
        if (out_cnt[i] != 1 || !close(f2r(out_mem[i]), want, 1e-6, mag[i], 0.0)) begin
          failures++;
          $display("FAIL out %0d: got %g want %g (writes %0d)", i, f2r(out_mem[i]), want, out_cnt[i]);
        end
      end
      checks++;
      if (zeros == 0 || zeros == N_OUT) begin failures++; $display("FAIL ReLU not exercised"); end
      checks++;
      if (done_cnt != 1 || busy) begin failures++; $display("FAIL done count %0d", done_cnt); end
    end
    checks++;
    if (src_m.overlap || wgt_m.overlap || src_m.out_of_range || wgt_m.out_of_range) begin
      failures++; $display("FAIL port protocol");
    end
    checks++;
    if (src_m.count != 2 * N_OUT * CI * KD * KH * KW) begin failures++; $display("FAIL src reads %0d", src_m.count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
