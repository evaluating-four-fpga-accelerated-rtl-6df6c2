// conv3d_unit: one 3-D convolution layer (ONNX Conv, no padding).
//
// The MMS networks start with 3-D convolutions, the layer type the DPU
// cannot run. Each Conv layer of a network gets its own instance, as the
// accelerators map every layer onto its own piece of fabric. The unit is
// sequential, like an un-pipelined HLS loop nest: one binary32 multiply-
// accumulate at a time on an fp_mac, in the loop order
//   co, od, oh, ow  (outputs)   ci, kd, kh, kw  (taps)
// Each output starts from its bias and is written once all CI*KD*KH*KW taps
// are accumulated; with RELU=1 negative sums are written as 0.
//
// Tensor layouts are those of ONNX/PyTorch, flattened row-major:
//   input  x[ci][d][h][w]              word ((ci*ID + d)*IH + h)*IW + w
//   weight W[co][ci][kd][kh][kw]       word W_BASE + (((co*CI+ci)*KD+kd)*KH+kh)*KW+kw
//   bias   B[co]                       word B_BASE + co
//   output y[co][od][oh][ow]           OD = (ID-KD)/SD + 1, likewise OH, OW
// The kernel shapes come from the paper's network figures; the strides and
// the absence of padding are inferred from the figures' flattened sizes and
// the paper's operation counts.
//
// Ports: start (pulse) begins the layer; done pulses once the last output
// is written. src_* and wgt_* are read ports: pulse *_req with *_addr and
// wait for *_rvalid/*_rdata (any latency, one request outstanding per port).
// dst_we/dst_addr/dst_wdata write one output word per pulse. Throughput is
// one tap per three cycles when both read ports answer in one cycle.
module conv3d_unit
  import fp32_pkg::*;
#(
  parameter int unsigned CI = 1,
  parameter int unsigned CO = 32,
  parameter int unsigned ID = 32,
  parameter int unsigned IH = 16,
  parameter int unsigned IW = 32,
  parameter int unsigned KD = 5,
  parameter int unsigned KH = 3,
  parameter int unsigned KW = 5,
  parameter int unsigned SD = 2,
  parameter int unsigned SH = 1,
  parameter int unsigned SW = 2,
  parameter bit          RELU = 1'b0,
  parameter int unsigned W_BASE = 0,
  parameter int unsigned B_BASE = CO * CI * KD * KH * KW,
  localparam int unsigned OD = (ID - KD) / SD + 1,
  localparam int unsigned OH = (IH - KH) / SH + 1,
  localparam int unsigned OW = (IW - KW) / SW + 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        done,
  output logic        busy,
  output logic        src_req,
  output logic [31:0] src_addr,
  input  logic        src_rvalid,
  input  fp32_t       src_rdata,
  output logic        wgt_req,
  output logic [31:0] wgt_addr,
  input  logic        wgt_rvalid,
  input  fp32_t       wgt_rdata,
  output logic        dst_we,
  output logic [31:0] dst_addr,
  output fp32_t       dst_wdata
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS_RD, S_BIAS_WAIT, S_TAP_RD, S_TAP_WAIT, S_MAC, S_WRITE} state_e;
  state_e state;

  int unsigned co, od, oh, ow, ci, kd, kh, kw;
  logic        have_x, have_w;
  fp32_t       x_q, w_q, acc;
  logic        mac_init, mac_en;

  wire last_tap = (kw == KW - 1) && (kh == KH - 1) && (kd == KD - 1) && (ci == CI - 1);
  wire last_out = (ow == OW - 1) && (oh == OH - 1) && (od == OD - 1) && (co == CO - 1);

  fp_mac u_mac (
    .clk, .rst_n, .init(mac_init), .init_val(wgt_rdata), .en(mac_en),
    .a(x_q), .b(w_q), .acc
  );

  assign busy     = (state != S_IDLE);
  assign mac_init = (state == S_BIAS_WAIT) && wgt_rvalid;
  assign mac_en   = (state == S_MAC);
  assign src_req  = (state == S_TAP_RD);
  assign src_addr = 32'(((ci * ID + od * SD + kd) * IH + oh * SH + kh) * IW + ow * SW + kw);
  assign wgt_req  = (state == S_TAP_RD) || (state == S_BIAS_RD);
  assign wgt_addr = (state == S_BIAS_RD) ? 32'(B_BASE + co)
                  : 32'(W_BASE + (((co * CI + ci) * KD + kd) * KH + kh) * KW + kw);
  assign dst_we    = (state == S_WRITE);
  assign dst_addr  = 32'(((co * OD + od) * OH + oh) * OW + ow);
  assign dst_wdata = RELU ? fp_relu(acc) : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      co <= 0; od <= 0; oh <= 0; ow <= 0; ci <= 0; kd <= 0; kh <= 0; kw <= 0;
      have_x <= 1'b0; have_w <= 1'b0; x_q <= FP_ZERO; w_q <= FP_ZERO;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          co <= 0; od <= 0; oh <= 0; ow <= 0;
          state <= S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_WAIT;
        S_BIAS_WAIT: if (wgt_rvalid) begin
          ci <= 0; kd <= 0; kh <= 0; kw <= 0;
          state <= S_TAP_RD;
        end
        S_TAP_RD: begin
          have_x <= 1'b0; have_w <= 1'b0;
          state  <= S_TAP_WAIT;
        end
        S_TAP_WAIT: begin
          if (src_rvalid) begin x_q <= src_rdata; have_x <= 1'b1; end
          if (wgt_rvalid) begin w_q <= wgt_rdata; have_w <= 1'b1; end
          if ((have_x || src_rvalid) && (have_w || wgt_rvalid)) state <= S_MAC;
        end
        S_MAC: begin
          if (last_tap) begin
            state <= S_WRITE;
          end else begin
            state <= S_TAP_RD;
            if (kw != KW - 1) kw <= kw + 1;
            else begin
              kw <= 0;
              if (kh != KH - 1) kh <= kh + 1;
              else begin
                kh <= 0;
                if (kd != KD - 1) kd <= kd + 1;
                else begin kd <= 0; ci <= ci + 1; end
              end
            end
          end
        end
        S_WRITE: begin
          if (last_out) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_BIAS_RD;
            if (ow != OW - 1) ow <= ow + 1;
            else begin
              ow <= 0;
              if (oh != OH - 1) oh <= oh + 1;
              else begin
                oh <= 0;
                if (od != OD - 1) od <= od + 1;
                else begin od <= 0; co <= co + 1; end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
