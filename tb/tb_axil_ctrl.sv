// tb_axil_ctrl: checks the AXI4-Lite control slave.
//
// Acts as the processor (axil_host) and as the core (driving ap_ready,
// ap_done, ap_idle). Checks argument write/read-back and reset values,
// result words, the start bit being held until ap_ready and then cleared,
// auto-restart keeping it set, done set by ap_done and cleared by reading
// CTRL, idle reflected, interrupt gating by GIE and IER, ISR toggle-on-write,
// and that unmapped offsets read 0.
module tb_axil_ctrl;
  import axi_pkg::*;

  localparam int N_ARG = 3, N_RES = 2;
  logic clk = 0, rst_n = 1;
  axil_req_t req;
  axil_rsp_t rsp;
  logic ap_start, interrupt;
  logic ap_ready = 0, ap_done = 0, ap_idle = 1;
  logic [31:0] args [N_ARG];
  logic [31:0] results [N_RES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  axil_ctrl #(.N_ARG(N_ARG), .N_RES(N_RES), .ARG_INIT({32'hCAFE_0002, 32'h0, 32'h1234_5678})) dut (
    .clk, .rst_n, .s_axi(req), .s_axi_rsp(rsp), .ap_start, .ap_ready, .ap_done, .ap_idle,
    .args, .results, .interrupt);
  axil_host host (.clk, .req, .rsp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [31:0] got, input logic [31:0] want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %h want %h", what, got, want);
    end
  endtask

  task automatic pulse_done();
    @(negedge clk); ap_done = 1; ap_ready = 1; ap_idle = 1;
    @(negedge clk); ap_done = 0; ap_ready = 0;
  endtask

  initial begin
    logic [31:0] v;
    results[0] = 32'hAAAA_0001; results[1] = 32'h5555_0002;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values and read-back
    host.read(REG_ARG_BASE, v);      expect_eq(v, 32'h1234_5678, "arg0 reset");
    host.read(REG_ARG_BASE + 8, v);  expect_eq(v, 32'hCAFE_0002, "arg2 reset");
    host.write(REG_ARG_BASE + 4, 32'hDEAD_0001);
    host.read(REG_ARG_BASE + 4, v);  expect_eq(v, 32'hDEAD_0001, "arg1 write");
    expect_eq(args[1], 32'hDEAD_0001, "arg1 port");
    host.read(REG_RES_BASE + 4, v);  expect_eq(v, 32'h5555_0002, "res1");
    host.read(12'h0F0, v);           expect_eq(v, 32'h0, "unmapped");
    host.read(REG_CTRL, v);          expect_eq(v, 32'h4, "idle at reset");
    // start held until ready
    host.write(REG_CTRL, 32'h1);
    expect_eq(32'(ap_start), 1, "start set");
    ap_idle = 0;
    repeat (5) @(negedge clk);
    expect_eq(32'(ap_start), 1, "start held");
    host.read(REG_CTRL, v);          expect_eq(v, 32'h1, "ctrl while running");
    pulse_done();
    expect_eq(32'(ap_start), 0, "start cleared by ready");
    expect_eq(32'(interrupt), 0, "no interrupt without enable");
    host.read(REG_CTRL, v);          expect_eq(v, 32'hE, "done+idle+ready");
    host.read(REG_CTRL, v);          expect_eq(v, 32'h4, "done cleared on read");
    // interrupts
    host.write(REG_IER, 32'h1);
    host.write(REG_CTRL, 32'h1);
    pulse_done();
    expect_eq(32'(interrupt), 0, "GIE off masks");
    host.read(REG_ISR, v);           expect_eq(v, 32'h1, "ISR done");
    host.write(REG_GIE, 32'h1);
    expect_eq(32'(interrupt), 1, "interrupt raised");
    host.write(REG_ISR, 32'h1);
    expect_eq(32'(interrupt), 0, "ISR toggle clears");
    host.read(REG_ISR, v);           expect_eq(v, 32'h0, "ISR cleared");
    // auto restart
    host.write(REG_CTRL, 32'h81);
    pulse_done();
    expect_eq(32'(ap_start), 1, "auto restart keeps start");
    expect_eq(32'(interrupt), 1, "interrupt again");
    host.write(REG_CTRL, 32'h0);
    pulse_done();
    expect_eq(32'(ap_start), 0, "start dropped without auto restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
