// axi_pkg: bundles for the two AXI ports of every accelerator core.
//
//   s_axi_control  AXI4-Lite slave, 32-bit data, CTRL_AW-bit byte address.
//                  Carries the start/done/idle/auto-restart control word,
//                  the interrupt registers, and small input/output tensors.
//   m_axi_gmem     AXI4 master, read channels only, 64-bit byte address and
//                  32-bit data. Used to fetch large inputs and weights from
//                  DRAM; the cores never write DRAM.
// The port names follow the usual HLS core convention; the widths are this
// design's choice.
package axi_pkg;

  localparam int CTRL_AW = 12;

  typedef struct packed {
    logic [CTRL_AW-1:0] awaddr;
    logic               awvalid;
    logic [31:0]        wdata;
    logic [3:0]         wstrb;
    logic               wvalid;
    logic               bready;
    logic [CTRL_AW-1:0] araddr;
    logic               arvalid;
    logic               rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic [1:0]  bresp;
    logic        bvalid;
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rvalid;
  } axil_rsp_t;

  typedef struct packed {
    logic [63:0] araddr;
    logic [7:0]  arlen;
    logic [2:0]  arsize;
    logic [1:0]  arburst;
    logic        arvalid;
    logic        rready;
  } axi_rd_req_t;

  typedef struct packed {
    logic        arready;
    logic [31:0] rdata;
    logic [1:0]  rresp;
    logic        rlast;
    logic        rvalid;
  } axi_rd_rsp_t;

  // Control register map shared by all cores (byte offsets).
  localparam logic [CTRL_AW-1:0] REG_CTRL     = 12'h000;
  localparam logic [CTRL_AW-1:0] REG_GIE      = 12'h004;
  localparam logic [CTRL_AW-1:0] REG_IER      = 12'h008;
  localparam logic [CTRL_AW-1:0] REG_ISR      = 12'h00C;
  localparam logic [CTRL_AW-1:0] REG_ARG_BASE = 12'h100;
  localparam logic [CTRL_AW-1:0] REG_RES_BASE = 12'h200;

endpackage
