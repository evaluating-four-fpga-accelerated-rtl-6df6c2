// fp_sigmoid: binary32 logistic function y = 1 / (1 + exp(-x)).
//
// The ESPERTA models end in a Sigmoid followed by a Greater threshold; the
// sigmoid is one of the operators the paper moves to custom logic because
// the DPU lacks it. How it is computed is this design's choice:
//   stage 1  t = -x*log2(e), n = round(t), r = (t - n)*ln2,  |r| <= 0.347
//   stage 2  e = 2^n * P(r), P the degree-6 Taylor polynomial of exp (Horner),
//            d = 1 + e
//   stage 3  1/d by an affine first guess on the significand of d and three
//            Newton steps r' = r(2 - m r), then rescaled by the exponent.
// |x| > 88 saturates to 1.0 or 0.0. All steps use the binary32 functions of
// fp32_pkg; the result is within a few ulp of the correctly rounded value.
//
// Interface: in_valid/x are sampled on a rising edge; out_valid/y appear
// three edges later. A new input may be given every cycle.
module fp_sigmoid
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x,
  output logic  out_valid,
  output fp32_t y
);

  localparam fp32_t C_88    = 32'h42B0_0000;
  localparam fp32_t C_M88   = 32'hC2B0_0000;
  localparam fp32_t C_LOG2E = 32'h3FB8_AA3B;
  localparam fp32_t C_LN2   = 32'h3F31_7218;
  localparam fp32_t C_24_17 = 32'h3FB4_B4B5;
  localparam fp32_t C_8_17  = 32'h3EF0_F0F1;
  localparam fp32_t POLY [7] = '{32'h3AB6_0B61, 32'h3C08_8889, 32'h3D2A_AAAB,
                                 32'h3E2A_AAAB, 32'h3F00_0000, FP_ONE, FP_ONE};

  typedef enum logic [1:0] {SAT_NONE, SAT_ONE, SAT_ZERO} sat_e;

  // stage 1
  logic  v1;
  sat_e  sat1;
  int    n1;
  fp32_t r1;
  // stage 2
  logic  v2;
  sat_e  sat2;
  fp32_t d2;

  function automatic fp32_t exp_poly(fp32_t r);
    fp32_t p;
    p = POLY[0];
    for (int i = 1; i < 7; i++) p = fp_add(fp_mul(p, r), POLY[i]);
    return p;
  endfunction

  function automatic fp32_t reciprocal(fp32_t d);
    int    k;
    fp32_t m, r;
    k = int'(d[30:23]) - 127;
    m = {1'b0, 8'd127, d[22:0]};
    r = fp_add(C_24_17, fp_neg(fp_mul(C_8_17, m)));
    for (int i = 0; i < 3; i++) r = fp_mul(r, fp_add(FP_TWO, fp_neg(fp_mul(m, r))));
    return fp_ldexp(r, -k);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; sat1 <= SAT_NONE; n1 <= 0; r1 <= FP_ZERO;
      v2 <= 1'b0; sat2 <= SAT_NONE; d2 <= FP_ONE;
      out_valid <= 1'b0; y <= FP_ZERO;
    end else begin
      // stage 1: range reduction
      v1 <= in_valid;
      if (in_valid) begin
        fp32_t t;
        int    n;
        t  = fp_mul(fp_neg(x), C_LOG2E);
        n  = fp_to_int(t);
        n1 <= n;
        r1 <= fp_mul(fp_add(t, fp_neg(fp_from_int(n))), C_LN2);
        sat1 <= fp_gt(x, C_88) ? SAT_ONE : (fp_gt(C_M88, x) ? SAT_ZERO : SAT_NONE);
      end
      // stage 2: exp(-x) and 1 + exp(-x)
      v2 <= v1;
      if (v1) begin
        d2   <= fp_add(FP_ONE, fp_ldexp(exp_poly(r1), n1));
        sat2 <= sat1;
      end
      // stage 3: reciprocal
      out_valid <= v2;
      if (v2) begin
        case (sat2)
          SAT_ONE:  y <= FP_ONE;
          SAT_ZERO: y <= FP_ZERO;
          default:  y <= reciprocal(d2);
        endcase
      end
    end
  end

endmodule
