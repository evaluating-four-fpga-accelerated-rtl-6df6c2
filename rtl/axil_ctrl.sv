// axil_ctrl: s_axi_control slave of an accelerator core.
//
// Each core is started and observed by the processor through memory-mapped
// registers: the paper exposes the input tensor, the output tensor and the
// control bits start, auto-start, done and interrupt enable over AXI4-Lite,
// and the driver sets start and then polls done. The layout below follows
// the customary HLS block-level control protocol; offsets and widths are
// this design's choice.
//
//   0x000 CTRL  bit0 ap_start (RW; held until the core reports ap_ready,
//               then cleared unless auto_restart), bit1 ap_done (RO, cleared
//               when CTRL is read), bit2 ap_idle (RO), bit3 ap_ready (RO,
//               cleared on read), bit7 auto_restart (RW)
//   0x004 GIE   bit0 global interrupt enable
//   0x008 IER   bit0 done interrupt enable, bit1 ready interrupt enable
//   0x00C ISR   bit0 done, bit1 ready status; writing 1 toggles a bit
//   0x100+4i    argument word i (RW), i < N_ARG: inputs, DRAM addresses,
//               parameters
//   0x200+4j    result word j (RO), j < N_RES: the output tensor
//
// Handshake: a write is accepted when AW and W are both valid and no write
// response is pending; the response follows one cycle later. A read is
// accepted when no read data is pending; data follows one cycle later.
// interrupt = GIE & |(ISR & IER). Unmapped reads return 0.
module axil_ctrl
  import axi_pkg::*;
#(
  parameter int unsigned N_ARG = 4,
  parameter int unsigned N_RES = 4,
  parameter logic [N_ARG*32-1:0] ARG_INIT = '0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axi,
  output axil_rsp_t         s_axi_rsp,
  // block-level handshake with the core
  output logic              ap_start,
  input  logic              ap_ready,
  input  logic              ap_done,
  input  logic              ap_idle,
  output logic [31:0]       args [N_ARG],
  input  logic [31:0]       results [N_RES],
  output logic              interrupt
);

  logic       done_q, ready_q, auto_restart, gie;
  logic [1:0] ier, isr;
  logic       bvalid, rvalid;
  logic [31:0] rdata;

  wire wr_fire = s_axi.awvalid && s_axi.wvalid && !bvalid;
  wire rd_fire = s_axi.arvalid && !rvalid;
  wire [CTRL_AW-1:0] wa = s_axi.awaddr;
  wire [CTRL_AW-1:0] ra = s_axi.araddr;

  always_comb begin
    s_axi_rsp         = '0;
    s_axi_rsp.awready = wr_fire;
    s_axi_rsp.wready  = wr_fire;
    s_axi_rsp.bvalid  = bvalid;
    s_axi_rsp.arready = rd_fire;
    s_axi_rsp.rvalid  = rvalid;
    s_axi_rsp.rdata   = rdata;
  end

  assign interrupt = gie && |(isr & ier);

  function automatic logic [31:0] read_word(logic [CTRL_AW-1:0] a);
    if (a == REG_CTRL) return {24'd0, auto_restart, 3'd0, ready_q, ap_idle, done_q, ap_start};
    if (a == REG_GIE)  return {31'd0, gie};
    if (a == REG_IER)  return {30'd0, ier};
    if (a == REG_ISR)  return {30'd0, isr};
    for (int i = 0; i < N_ARG; i++)
      if (a == REG_ARG_BASE + CTRL_AW'(4 * i)) return args[i];
    for (int j = 0; j < N_RES; j++)
      if (a == REG_RES_BASE + CTRL_AW'(4 * j)) return results[j];
    return 32'd0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start <= 1'b0; done_q <= 1'b0; ready_q <= 1'b0; auto_restart <= 1'b0;
      gie <= 1'b0; ier <= '0; isr <= '0;
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
      for (int i = 0; i < N_ARG; i++) args[i] <= ARG_INIT[32*i +: 32];
    end else begin
      // core events
      if (ap_ready && !auto_restart) ap_start <= 1'b0;
      if (ap_done)  done_q  <= 1'b1;
      if (ap_ready) ready_q <= 1'b1;
      if (ap_done  && ier[0]) isr[0] <= 1'b1;
      if (ap_ready && ier[1]) isr[1] <= 1'b1;
      // write channel
      if (wr_fire) begin
        bvalid <= 1'b1;
        if (wa == REG_CTRL) begin
          if (s_axi.wdata[0]) ap_start <= 1'b1;
          auto_restart <= s_axi.wdata[7];
        end else if (wa == REG_GIE) begin
          gie <= s_axi.wdata[0];
        end else if (wa == REG_IER) begin
          ier <= s_axi.wdata[1:0];
        end else if (wa == REG_ISR) begin
          isr <= isr ^ s_axi.wdata[1:0];
        end
        for (int i = 0; i < N_ARG; i++)
          if (wa == REG_ARG_BASE + CTRL_AW'(4 * i)) args[i] <= s_axi.wdata;
      end else if (bvalid && s_axi.bready) begin
        bvalid <= 1'b0;
      end
      // read channel
      if (rd_fire) begin
        rvalid <= 1'b1;
        rdata  <= read_word(ra);
        if (ra == REG_CTRL) begin
          if (!ap_done)  done_q  <= 1'b0;
          if (!ap_ready) ready_q <= 1'b0;
        end
      end else if (rvalid && s_axi.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, stays valid until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bvalid && !s_axi.bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && !s_axi.rready |=> rvalid && $stable(rdata));

endmodule
