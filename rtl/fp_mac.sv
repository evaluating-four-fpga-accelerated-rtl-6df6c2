// fp_mac: binary32 multiply-accumulate register.
//
// The arithmetic core of the Conv and Gemm layer units. It reproduces the
// statement `acc = acc + a * b` of a plain C/ONNX loop: the product is rounded
// to binary32 and then added, so two roundings occur per step, exactly as in
// the un-fused float code the accelerators were generated from. Precision
// (IEEE-754 binary32) follows the paper; the separate rounding and the
// flush-to-zero of subnormals are this design's choices.
//
// Interface: `init` loads acc with init_val (the layer bias); `en` performs
// one accumulate step. Both act on the next rising clock edge (latency 1,
// one step per cycle); `init` wins if both are high.
module fp_mac
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,
  input  fp32_t init_val,
  input  logic  en,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= FP_ZERO;
    else if (init) acc <= init_val;
    else if (en)   acc <= fp_add(acc, fp_mul(a, b));
  end

endmodule
