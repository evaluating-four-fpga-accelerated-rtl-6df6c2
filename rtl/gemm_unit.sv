// gemm_unit: fully connected layer (ONNX Gemm with transposed B), optional ReLU.
//
// Computes y[o] = C[o] + sum_i B[o][i] * x[i] for o < N_OUT, i < N_IN, with
// B stored as in the paper's figures (N_OUT x N_IN, row-major) and the bias
// vector C after it. With RELU=1 the ReLU that follows the layer in the
// figures is folded into the write: negative results are stored as 0.
// The unit is sequential, one binary32 multiply-accumulate on an fp_mac per
// tap, in the plain loop order of the C code the paper's cores come from.
//
//   input   x[i]        src word i
//   weight  B[o][i]     wgt word W_BASE + o*N_IN + i
//   bias    C[o]        wgt word B_BASE + o
//   output  y[o]        dst word o
// Ports and timing follow conv3d_unit: start/done pulses; src and wgt read
// ports with request/valid handshakes of any latency; a dst write strobe.
module gemm_unit
  import fp32_pkg::*;
#(
  parameter int unsigned N_IN   = 2048,
  parameter int unsigned N_OUT  = 4,
  parameter bit          RELU   = 1'b0,
  parameter int unsigned W_BASE = 0,
  parameter int unsigned B_BASE = N_IN * N_OUT
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

  int unsigned o, i;
  logic        have_x, have_w;
  fp32_t       x_q, w_q, acc;
  logic        mac_init, mac_en;

  fp_mac u_mac (
    .clk, .rst_n, .init(mac_init), .init_val(wgt_rdata), .en(mac_en),
    .a(x_q), .b(w_q), .acc
  );

  assign busy      = (state != S_IDLE);
  assign mac_init  = (state == S_BIAS_WAIT) && wgt_rvalid;
  assign mac_en    = (state == S_MAC);
  assign src_req   = (state == S_TAP_RD);
  assign src_addr  = 32'(i);
  assign wgt_req   = (state == S_TAP_RD) || (state == S_BIAS_RD);
  assign wgt_addr  = (state == S_BIAS_RD) ? 32'(B_BASE + o) : 32'(W_BASE + o * N_IN + i);
  assign dst_we    = (state == S_WRITE);
  assign dst_addr  = 32'(o);
  assign dst_wdata = RELU ? fp_relu(acc) : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; o <= 0; i <= 0;
      have_x <= 1'b0; have_w <= 1'b0; x_q <= FP_ZERO; w_q <= FP_ZERO;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          o <= 0;
          state <= S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_WAIT;
        S_BIAS_WAIT: if (wgt_rvalid) begin
          i <= 0;
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
          if (i == N_IN - 1) state <= S_WRITE;
          else begin
            i <= i + 1;
            state <= S_TAP_RD;
          end
        end
        S_WRITE: begin
          if (o == N_OUT - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            o <= o + 1;
            state <= S_BIAS_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
