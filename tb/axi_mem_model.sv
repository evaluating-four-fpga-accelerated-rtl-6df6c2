// axi_mem_model: behavioural DRAM behind an AXI4 read master.
//
// Stands in for the processor's DRAM. The array `mem` holds 32-bit words at
// byte address BASE + 4*i; the testbench fills it directly. AR is accepted
// after 0..2 idle cycles, R follows 1..4 cycles later (single beat, RLAST
// set). Addresses outside the array return SLVERR. Counts read bursts.
module axi_mem_model
  import axi_pkg::*;
#(
  parameter int unsigned WORDS = 65536,
  parameter logic [63:0] BASE  = 64'h0
) (
  input  logic        clk,
  input  axi_rd_req_t req,
  output axi_rd_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  int unsigned reads = 0;
  int unsigned bad_bursts = 0;
  int          ar_wait = 0, r_wait = -1;
  logic [63:0] a_q;

  initial rsp = '0;

  always @(posedge clk) begin
    rsp.arready <= 1'b0;
    if (r_wait > 0) r_wait <= r_wait - 1;
    if (rsp.rvalid && req.rready) rsp.rvalid <= 1'b0;
    if (r_wait == 1) begin
      logic [63:0] idx;
      idx = (a_q - BASE) >> 2;
      rsp.rvalid <= 1'b1;
      rsp.rlast  <= 1'b1;
      if (a_q >= BASE && idx < WORDS) begin
        rsp.rdata <= mem[idx];
        rsp.rresp <= 2'b00;
      end else begin
        rsp.rdata <= 32'hDEAD_BEEF;
        rsp.rresp <= 2'b10;
      end
    end
    if (req.arvalid && !rsp.arready && r_wait <= 0 && !rsp.rvalid) begin
      if (ar_wait == 0) begin
        rsp.arready <= 1'b1;
        a_q    <= req.araddr;
        reads++;
        if (req.arlen != 0 || req.arsize != 3'd2) bad_bursts++;
        r_wait  <= 1 + ($urandom % 4);
        ar_wait <= $urandom % 3;
      end else begin
        ar_wait <= ar_wait - 1;
      end
    end
  end
endmodule
