// sdp_ram: simple dual-port on-chip buffer (one write port, one read port).
//
// Models the block RAM in which the cores keep on-chip weights and the
// feature maps between layers (the paper stores parameters on chip where
// they fit and attributes the remaining BRAM use to intermediate feature
// maps). Written as a plain array so that synthesis infers block RAM.
//
// Timing: a write (we, waddr, wdata) takes effect at the rising edge. A read
// request (re, raddr) returns rdata with rvalid one cycle later. A read and a
// write to the same address in the same cycle return the old word.
// The read port follows the request/valid convention of the layer units;
// the contents are not reset.
module sdp_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
    rvalid <= re;
  end

endmodule
