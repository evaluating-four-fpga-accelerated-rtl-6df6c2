// tb_sdp_ram: checks the on-chip buffer.
//
// Writes random words to every address of a 300-word buffer, reads them
// back in random order and checks data and the one-cycle read latency,
// then checks that a same-cycle read and write return the old word.
module tb_sdp_ram;
  localparam int DEPTH = 300;
  logic clk = 0, we = 0, re = 0, rvalid;
  logic [8:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sdp_ram #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 9'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 1000; n++) begin
      int unsigned k;
      k = $urandom % DEPTH;
      @(negedge clk);
      re = 1; raddr = 9'(k);
      @(negedge clk);
      re = 0;
      checks++;
      if (!rvalid || rdata !== model[k]) begin
        failures++; $display("FAIL addr %0d: valid %b data %h want %h", k, rvalid, rdata, model[k]);
      end
      checks++;
      @(negedge clk);
      if (rvalid) begin failures++; $display("FAIL rvalid held"); end
    end
    // read during write to the same address: old data
    @(negedge clk);
    we = 1; waddr = 9'd7; wdata = ~model[7]; re = 1; raddr = 9'd7;
    @(negedge clk);
    we = 0; re = 0;
    checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk); re = 1; raddr = 9'd7;
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== ~model[7]) begin failures++; $display("FAIL write after read-during-write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
