// tb_fp_mac: checks the binary32 multiply-accumulate register.
//
// Runs random dot products (init with a bias, then N steps of acc += a*b)
// and compares every intermediate acc, one cycle after each step, with a
// double-precision reference rounded to binary32 at each step. Also checks
// exact cases (integers, cancellation to zero, init priority).
module tb_fp_mac;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  logic  clk = 0, rst_n = 1, init = 0, en = 0;
  fp32_t init_val = '0, a = '0, b = '0, acc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  // drop reset after time 0 so the asynchronous reset sees an edge before the first clock
  initial #1 rst_n = 0;

  fp_mac dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit do_init, input real va, input real vb, input real bias);
    @(negedge clk);
    init = do_init; en = !do_init;
    a = r2f(va); b = r2f(vb); init_val = r2f(bias);
    @(negedge clk);
    init = 0; en = 0;
  endtask

  task automatic expect_acc(input real want, input real scale, input string what);
    checks++;
    if (!close(f2r(acc), want, 2e-7, scale, 0.0)) begin
      failures++;
      $display("FAIL %s: acc=%g want=%g", what, f2r(acc), want);
    end
  endtask

  initial begin
    real ref_acc, scale, va, vb, bias;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // exact integer arithmetic
    step(1, 0, 0, 3.0);   expect_acc(3.0, 1.0, "init");
    step(0, 2.0, 5.0, 0); expect_acc(13.0, 1.0, "3+2*5");
    step(0, -4.0, 3.25, 0); expect_acc(0.0, 1.0, "cancel to zero");
    step(0, 1.5, -0.5, 0); expect_acc(-0.75, 1.0, "negative");
    // init has priority over en
    @(negedge clk); init = 1; en = 1; init_val = r2f(7.0); a = r2f(100.0); b = r2f(100.0);
    @(negedge clk); init = 0; en = 0;
    expect_acc(7.0, 1.0, "init priority");
    // no change without en
    repeat (3) @(negedge clk);
    expect_acc(7.0, 1.0, "hold");
    // random dot products
    for (int t = 0; t < 300; t++) begin
      bias = urand(-2.0, 2.0);
      step(1, 0, 0, bias);
      ref_acc = q(bias); scale = rabs(ref_acc);
      for (int k = 0; k < 40; k++) begin
        va = q(urand(-10.0, 10.0) * (real'(1 << ($urandom % 9)) / 16.0));
        vb = q(urand(-1.0, 1.0));
        step(0, va, vb, 0);
        ref_acc = q(ref_acc + q(va * vb));
        scale += rabs(va * vb);
        expect_acc(ref_acc, scale, "random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
