// tb_maxpool3d_unit: checks the 3-D max pooling unit.
//
// Pools a 3-channel 6x4x8 map (2x2x2 windows) read through a memory with
// random latency and compares every output with a reference maximum. Values
// are drawn from a small set of signed numbers so that ties and all-negative
// windows occur. Also checks one write per output and one done pulse.
module tb_maxpool3d_unit;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  localparam int C = 3, ID = 6, IH = 4, IW = 8;
  localparam int N_IN = C * ID * IH * IW, N_OUT = N_IN / 8;

  logic clk = 0, rst_n = 1, start = 0, done, busy;
  logic src_req, src_rvalid, dst_we;
  logic [31:0] src_addr, dst_addr;
  fp32_t src_rdata, dst_wdata;
  fp32_t out_mem [N_OUT];
  int    out_cnt [N_OUT];
  int checks = 0, failures = 0, done_cnt = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  maxpool3d_unit #(.C(C), .ID(ID), .IH(IH), .IW(IW)) dut (.*);
  rd_port_model #(.WORDS(N_IN)) src_m (.clk, .req(src_req), .addr(src_addr), .rvalid(src_rvalid), .rdata(src_rdata));

  always @(posedge clk) begin
    if (dst_we) begin
      if (dst_addr < N_OUT) begin out_mem[dst_addr] <= dst_wdata; out_cnt[dst_addr]++; end
      else begin failures++; $display("FAIL write out of range"); end
    end
    if (done) done_cnt++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x [], y [];
    x = new[N_IN];
    for (int i = 0; i < N_IN; i++) begin
      x[i] = (i % 17 == 0) ? -3.5 - real'(i % 5) : real'(int'($urandom % 13) - 9) * 0.75;
      src_m.mem[i] = r2f(x[i]);
    end
    // one window entirely negative
    for (int u = 0; u < 2; u++) for (int v = 0; v < 2; v++) for (int t = 0; t < 2; t++) begin
      x[(u * IH + v) * IW + t] = -1.0 - real'(u + v + t);
      src_m.mem[(u * IH + v) * IW + t] = r2f(x[(u * IH + v) * IW + t]);
    end
    maxpool_ref(x, C, ID, IH, IW, y);
    foreach (out_cnt[i]) out_cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (done_cnt == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < N_OUT; i++) begin
      checks++;
      if (out_cnt[i] != 1 || f2r(out_mem[i]) != y[i]) begin
        failures++;
        $display("FAIL out %0d: got %g want %g", i, f2r(out_mem[i]), y[i]);
      end
    end
    checks++;
    if (done_cnt != 1 || busy || src_m.overlap || src_m.count != N_IN) begin
      failures++; $display("FAIL protocol: done %0d reads %0d", done_cnt, src_m.count);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
