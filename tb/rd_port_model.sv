// rd_port_model: memory behind a layer unit's request/valid read port.
//
// Answers each request after a random latency of MIN_LAT..MAX_LAT cycles
// with the word at the requested index of `mem`, which the testbench fills
// directly. Counts requests and flags a request made while one is pending.
module rd_port_model #(
  parameter int unsigned WORDS   = 1024,
  parameter int unsigned MIN_LAT = 1,
  parameter int unsigned MAX_LAT = 3
) (
  input  logic        clk,
  input  logic        req,
  input  logic [31:0] addr,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];
  int unsigned count = 0;
  int unsigned overlap = 0;
  int unsigned out_of_range = 0;
  int          wait_cycles = -1;
  logic [31:0] addr_q;

  initial begin
    rvalid = 1'b0;
    rdata  = '0;
  end

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (wait_cycles > 0) wait_cycles <= wait_cycles - 1;
    if (wait_cycles == 1) begin
      rvalid <= 1'b1;
      rdata  <= (addr_q < WORDS) ? mem[addr_q] : 32'hDEAD_BEEF;
    end
    if (req) begin
      count++;
      if (wait_cycles > 1) overlap++;
      if (addr >= WORDS) out_of_range++;
      addr_q      <= addr;
      wait_cycles <= MIN_LAT + ($urandom % (MAX_LAT - MIN_LAT + 1));
    end
  end
endmodule
