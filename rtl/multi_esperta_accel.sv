// multi_esperta_accel: the multi-ESPERTA solar-energetic-particle forecaster.
//
// ESPERTA predicts an SEP event from three flare features (heliolongitude,
// time-integrated soft X-ray flux, time-integrated 1 MHz radio flux). The
// paper places six ESPERTA models with different parameters side by side
// on the same 1x3 input. Each model m is
//   p[m] = sigmoid(B[m][0]*x[0] + B[m][1]*x[1] + B[m][2]*x[2] + C[m])
//   y[m] = p[m] > T[m]
// and the six decisions are concatenated into the 1x6 output. All
// arithmetic is IEEE-754 binary32.
//
// Structure (this design's choice, in the spirit of an un-optimised HLS
// core): one fp_mac evaluates the Gemm of each model in 1 + 3 steps, one
// fp_sigmoid (3-cycle latency) follows, and the Greater compare is done on
// its result. The six models run one after another; an inference takes
// 6 * 8 + 1 = 49 cycles from ap_start being seen to ap_done.
//
// Register interface (axil_ctrl): CTRL/GIE/IER/ISR at 0x000-0x00C.
//   arg 0..2     (0x100..0x108)  input x[0..2], binary32
//   arg 3+5m+k   (0x10C + 20m + 4k)  model m: k=0..2 B[m][k], k=3 C[m],
//                k=4 threshold T[m]
//   res 0        (0x200)  bits 5:0 = y[5:0]
// The reset values of C and T are the ones printed in the paper's
// multi-ESPERTA figure (C = -6.07, -7.44, -5.02, -6.07, -7.44, -5.02;
// T = 0.28, 0.28, 0.23, 0.35, 0.28, 0.23). The figure does not print the
// weights B, so they reset to 0 and must be written before use. Making the
// parameters writable, rather than constants of the core, is this design's
// choice.
module multi_esperta_accel
  import fp32_pkg::*;
  import axi_pkg::*;
#(
  parameter int unsigned N_MODELS = 6,
  parameter int unsigned N_FEAT   = 3
) (
  input  logic      ap_clk,
  input  logic      ap_rst_n,
  input  axil_req_t s_axi_control,
  output axil_rsp_t s_axi_control_rsp,
  output logic      interrupt
);

  localparam int unsigned N_ARG = N_FEAT + N_MODELS * (N_FEAT + 2);

  // Reset values from the paper's figure, for up to six models.
  localparam fp32_t C_INIT [6] = '{32'hC0C2_3D71, 32'hC0EE_147B, 32'hC0A0_A3D7,
                                   32'hC0C2_3D71, 32'hC0EE_147B, 32'hC0A0_A3D7};
  localparam fp32_t T_INIT [6] = '{32'h3E8F_5C29, 32'h3E8F_5C29, 32'h3E6B_851F,
                                   32'h3EB3_3333, 32'h3E8F_5C29, 32'h3E6B_851F};

  function automatic logic [N_ARG*32-1:0] arg_init();
    logic [N_ARG*32-1:0] v;
    v = '0;
    for (int m = 0; m < N_MODELS && m < 6; m++) begin
      v[32*(N_FEAT + m*(N_FEAT+2) + N_FEAT)     +: 32] = C_INIT[m];
      v[32*(N_FEAT + m*(N_FEAT+2) + N_FEAT + 1) +: 32] = T_INIT[m];
    end
    return v;
  endfunction

  logic        ap_start, ap_done, ap_idle;
  logic [31:0] args    [N_ARG];
  logic [31:0] results [1];

  axil_ctrl #(.N_ARG(N_ARG), .N_RES(1), .ARG_INIT(arg_init())) u_ctrl (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axi(s_axi_control), .s_axi_rsp(s_axi_control_rsp),
    .ap_start, .ap_ready(ap_done), .ap_done, .ap_idle,
    .args, .results, .interrupt
  );

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_MAC, S_SIG, S_SIG_WAIT, S_DONE} state_e;
  state_e state;

  int unsigned m, k;
  fp32_t       acc, sig_y;
  logic        sig_valid;
  logic [N_MODELS-1:0] y;

  function automatic int unsigned arg_idx(int unsigned mm, int unsigned kk);
    return N_FEAT + mm * (N_FEAT + 2) + kk;
  endfunction

  fp_mac u_mac (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .init(state == S_INIT), .init_val(args[arg_idx(m, N_FEAT)]),
    .en(state == S_MAC), .a(args[k]), .b(args[arg_idx(m, k)]),
    .acc
  );

  fp_sigmoid u_sigmoid (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .in_valid(state == S_SIG), .x(acc),
    .out_valid(sig_valid), .y(sig_y)
  );

  assign ap_done = (state == S_DONE);
  assign ap_idle    = (state == S_IDLE);
  assign results[0] = 32'(y);

  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      state <= S_IDLE; m <= 0; k <= 0; y <= '0;
    end else begin
      case (state)
        S_IDLE: if (ap_start) begin
          m <= 0;
          state <= S_INIT;
        end
        S_INIT: begin
          k <= 0;
          state <= S_MAC;
        end
        S_MAC: if (k == N_FEAT - 1) state <= S_SIG;
               else k <= k + 1;
        S_SIG: state <= S_SIG_WAIT;
        S_SIG_WAIT: if (sig_valid) begin
          y[m] <= fp_gt(sig_y, args[arg_idx(m, N_FEAT + 1)]);
          if (m == N_MODELS - 1) state <= S_DONE;
          else begin
            m <= m + 1;
            state <= S_INIT;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
