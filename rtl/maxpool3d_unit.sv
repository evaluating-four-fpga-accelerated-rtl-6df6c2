// maxpool3d_unit: 3-D max pooling layer (ONNX MaxPool, stride = kernel).
//
// All three MMS networks pool a 3-D feature map before flattening it into
// their fully connected layers. The paper's figures name the layer but do
// not print its window; a 2x2x2 window with stride 2 is the one that turns
// the printed input shapes into the printed Gemm widths (32x16x32 -> 2048,
// 14x14x14 -> 343, 32x12x12x12 -> 6912) and reproduces the paper's
// operation counts, so it is the default here.
//
// The unit reads the window's words one at a time, keeps the largest with
// the binary32 ordered compare of fp32_pkg, and writes one word per window.
// Layout: x[c][d][h][w] in, y[c][od][oh][ow] out, row-major; OD = ID/PD etc.
// Ports follow conv3d_unit: start/done pulses, src read port with any
// latency, dst write port. Cost: two cycles per input word read plus one
// cycle per output word.
module maxpool3d_unit
  import fp32_pkg::*;
#(
  parameter int unsigned C  = 1,
  parameter int unsigned ID = 32,
  parameter int unsigned IH = 16,
  parameter int unsigned IW = 32,
  parameter int unsigned PD = 2,
  parameter int unsigned PH = 2,
  parameter int unsigned PW = 2,
  localparam int unsigned OD = ID / PD,
  localparam int unsigned OH = IH / PH,
  localparam int unsigned OW = IW / PW
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
  output logic        dst_we,
  output logic [31:0] dst_addr,
  output fp32_t       dst_wdata
);

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WAIT, S_WRITE} state_e;
  state_e state;

  int unsigned c, od, oh, ow, kd, kh, kw;
  logic        first;
  fp32_t       mx;

  wire last_tap = (kw == PW - 1) && (kh == PH - 1) && (kd == PD - 1);
  wire last_out = (ow == OW - 1) && (oh == OH - 1) && (od == OD - 1) && (c == C - 1);

  assign busy      = (state != S_IDLE);
  assign src_req   = (state == S_RD);
  assign src_addr  = 32'(((c * ID + od * PD + kd) * IH + oh * PH + kh) * IW + ow * PW + kw);
  assign dst_we    = (state == S_WRITE);
  assign dst_addr  = 32'(((c * OD + od) * OH + oh) * OW + ow);
  assign dst_wdata = mx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; first <= 1'b1; mx <= FP_NEG_INF;
      c <= 0; od <= 0; oh <= 0; ow <= 0; kd <= 0; kh <= 0; kw <= 0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          c <= 0; od <= 0; oh <= 0; ow <= 0; kd <= 0; kh <= 0; kw <= 0;
          first <= 1'b1;
          state <= S_RD;
        end
        S_RD: state <= S_WAIT;
        S_WAIT: if (src_rvalid) begin
          if (first || fp_gt(src_rdata, mx)) mx <= src_rdata;
          first <= 1'b0;
          if (last_tap) begin
            state <= S_WRITE;
            kd <= 0; kh <= 0; kw <= 0;
          end else begin
            state <= S_RD;
            if (kw != PW - 1) kw <= kw + 1;
            else begin
              kw <= 0;
              if (kh != PH - 1) kh <= kh + 1;
              else begin kh <= 0; kd <= kd + 1; end
            end
          end
        end
        S_WRITE: begin
          first <= 1'b1;
          if (last_out) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RD;
            if (ow != OW - 1) ow <= ow + 1;
            else begin
              ow <= 0;
              if (oh != OH - 1) oh <= oh + 1;
              else begin
                oh <= 0;
                if (od != OD - 1) od <= od + 1;
                else begin od <= 0; c <= c + 1; end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
