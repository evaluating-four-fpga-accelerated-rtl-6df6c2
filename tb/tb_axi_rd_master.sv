// tb_axi_rd_master: checks the single-beat AXI4 read engine.
//
// Reads 2000 random word addresses from a behavioural DRAM with random
// AR and R latencies, one request at a time as the layer units do, and
// checks each returned word, that exactly one AXI read is made per request,
// that every burst is single-beat 4-byte, that busy is high while waiting,
// and that an out-of-range address sets the sticky error flag.
module tb_axi_rd_master;
  import axi_pkg::*;

  localparam logic [63:0] BASE = 64'h0000_0008_1000_0000;
  logic clk = 0, rst_n = 1, req = 0, busy, rvalid, rerror;
  logic [63:0] addr = '0;
  logic [31:0] rdata;
  axi_rd_req_t m_axi;
  axi_rd_rsp_t m_axi_rsp;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  axi_rd_master dut (.*);
  axi_mem_model #(.WORDS(4096), .BASE(BASE)) mem (.clk, .req(m_axi), .rsp(m_axi_rsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(input logic [63:0] a, output logic [31:0] d);
    @(negedge clk);
    req = 1; addr = a;
    @(negedge clk);
    req = 0;
    if (!busy) begin failures++; $display("FAIL busy low after request"); end
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < 4096; i++) mem.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int unsigned k;
      k = $urandom % 4096;
      rd(BASE + 64'(k) * 4, d);
      checks++;
      if (d !== mem.mem[k]) begin failures++; $display("FAIL word %0d: %h vs %h", k, d, mem.mem[k]); end
    end
    checks++;
    if (mem.reads != 2000) begin failures++; $display("FAIL %0d AXI reads", mem.reads); end
    checks++;
    if (mem.bad_bursts != 0) begin failures++; $display("FAIL burst shape"); end
    checks++;
    if (rerror) begin failures++; $display("FAIL spurious error"); end
    rd(BASE + 64'h10_0000, d);
    checks++;
    if (!rerror) begin failures++; $display("FAIL error not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
