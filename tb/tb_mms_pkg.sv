// tb_mms_pkg: double-precision reference models of the three MMS networks.
//
// net 0 LogisticNet, 1 ReducedNet, 2 BaselineNet, with the parameter buffer
// in ONNX order as the cores expect it. Returns the four logits, a scale for
// the comparison tolerance (sum of magnitudes of the last layer's terms) and
// how many hidden activations the ReLU clamped.
package tb_mms_pkg;
  import tb_fp_pkg::*;

  function automatic int n_params(int net, int n_ch, int n_hidden);
    case (net)
      0: return 4 * 2048 + 4;
      1: return 76 + n_hidden * 343 + n_hidden + 4 * n_hidden + 4;
      default: return n_ch * 76 + n_ch * n_ch * 27 + n_ch + n_hidden * n_ch * 216 + n_hidden + 4 * n_hidden + 4;
    endcase
  endfunction

  function automatic void mms_ref(input int net, input real x[], input real p[], input int n_ch,
      input int n_hidden, output real y[], output real mag[], output int relu_zeros);
    real a [], b [], c [], m [];
    int o;
    relu_zeros = 0;
    if (net == 0) begin
      maxpool_ref(x, 1, 32, 16, 32, a);
      gemm_ref(a, p, 0, 8192, 2048, 4, 1'b0, y, mag);
    end else if (net == 1) begin
      conv3d_ref(x, p, 0, 75, 1, 1, 32, 16, 32, 5, 3, 5, 2, 1, 2, a, m);
      maxpool_ref(a, 1, 14, 14, 14, b);
      gemm_ref(b, p, 76, 76 + n_hidden * 343, 343, n_hidden, 1'b1, c, m);
      foreach (c[i]) if (c[i] == 0.0) relu_zeros++;
      o = 76 + n_hidden * 344;
      gemm_ref(c, p, o, o + 4 * n_hidden, n_hidden, 4, 1'b0, y, mag);
    end else begin
      int c2w, c2b, g1w, g1b, g2w, np;
      real d [];
      c2w = n_ch * 76; c2b = c2w + n_ch * n_ch * 27;
      g1w = c2b + n_ch; g1b = g1w + n_hidden * n_ch * 216;
      g2w = g1b + n_hidden;
      conv3d_ref(x, p, 0, n_ch * 75, 1, n_ch, 32, 16, 32, 5, 3, 5, 2, 1, 2, a, m);
      conv3d_ref(a, p, c2w, c2b, n_ch, n_ch, 14, 14, 14, 3, 3, 3, 1, 1, 1, b, m);
      maxpool_ref(b, n_ch, 12, 12, 12, c);
      gemm_ref(c, p, g1w, g1b, n_ch * 216, n_hidden, 1'b1, d, m);
      foreach (d[i]) if (d[i] == 0.0) relu_zeros++;
      gemm_ref(d, p, g2w, g2w + 4 * n_hidden, n_hidden, 4, 1'b0, y, mag);
    end
  endfunction
endpackage
