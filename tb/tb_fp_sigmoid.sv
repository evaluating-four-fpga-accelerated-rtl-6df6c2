// tb_fp_sigmoid: checks the binary32 logistic unit.
//
// Feeds one input per cycle (back to back) and checks each output against
// 1/(1+exp(-x)) computed in double precision, within 2e-7 absolute plus
// 4e-7 relative, and that each result appears exactly three cycles after
// its input. Covers small, moderate and saturating inputs.
module tb_fp_sigmoid;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 1, in_valid = 0, out_valid;
  fp32_t x = '0, y;
  int checks = 0, failures = 0;
  int cycle = 0;
  real   want_q [$];
  int    when_q [$];

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;
  always @(posedge clk) cycle++;

  fp_sigmoid dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // capture outputs
  always @(posedge clk) if (rst_n && out_valid) begin
    real want;
    int  when_in;
    checks++;
    if (want_q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      want = want_q.pop_front();
      when_in = when_q.pop_front();
      if (cycle - when_in != 3) begin
        failures++; $display("FAIL latency %0d", cycle - when_in);
      end
      if (!close(f2r(y), want, 4e-7, want, 2e-7)) begin
        failures++; $display("FAIL sigmoid: got %.9g want %.9g", f2r(y), want);
      end
    end
  end

  task automatic feed(input real v);
    real xv;
    @(negedge clk);
    xv = q(v);
    in_valid = 1; x = r2f(xv);
    want_q.push_back(1.0 / (1.0 + $exp(-xv)));
    when_q.push_back(cycle + 1);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    feed(0.0); feed(1.0); feed(-1.0); feed(0.5); feed(-6.07); feed(10.0); feed(-10.0);
    feed(30.0); feed(-30.0); feed(100.0); feed(-100.0); feed(1e-3); feed(-87.0); feed(87.0);
    for (int i = 0; i < 2000; i++) feed(urand(-20.0, 20.0));
    for (int i = 0; i < 500; i++) feed(urand(-2.0, 2.0));
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (want_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", want_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
