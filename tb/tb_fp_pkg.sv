// tb_fp_pkg: reference helpers for the testbenches.
//
// Converts between binary32 bit patterns and SystemVerilog reals (double),
// and gives double-precision reference models of the network layers, written
// independently of the RTL. Results of the RTL (binary32) are compared with
// these references within a relative tolerance.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // double -> binary32, round to nearest (ties away), flush tiny to zero
  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, 1'b1, d[51:29]} + {24'd0, d[28]};
    if (m[24]) begin m = m >> 1; e++; end
    if (e <= 0) return 32'd0;
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic real rabs(real a);
    return a < 0.0 ? -a : a;
  endfunction

  // true when got is within rel*scale + abs_tol of want
  function automatic bit close(real got, real want, real rel, real scale, real abs_tol);
    return rabs(got - want) <= rel * scale + abs_tol;
  endfunction

  // uniform real in [lo, hi)
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  // y[co][od][oh][ow] = b[co] + sum x[ci][od*sd+kd][oh*sh+kh][ow*sw+kw] * w[co][ci][kd][kh][kw]
  function automatic void conv3d_ref(input real x[], input real p[], input int wb, input int bb,
      input int ci, input int co, input int id, input int ih, input int iw,
      input int kd, input int kh, input int kw, input int sd, input int sh, input int sw,
      output real y[], output real mag[]);
    int od, oh, ow;
    od = (id - kd) / sd + 1; oh = (ih - kh) / sh + 1; ow = (iw - kw) / sw + 1;
    y = new[co * od * oh * ow];
    mag = new[co * od * oh * ow];
    for (int o = 0; o < co; o++)
      for (int a = 0; a < od; a++)
        for (int b = 0; b < oh; b++)
          for (int c = 0; c < ow; c++) begin
            real s, m;
            s = p[bb + o]; m = rabs(s);
            for (int i = 0; i < ci; i++)
              for (int u = 0; u < kd; u++)
                for (int v = 0; v < kh; v++)
                  for (int t = 0; t < kw; t++) begin
                    real xv, wv;
                    xv = x[((i * id + a * sd + u) * ih + b * sh + v) * iw + c * sw + t];
                    wv = p[wb + (((o * ci + i) * kd + u) * kh + v) * kw + t];
                    s += xv * wv; m += rabs(xv * wv);
                  end
            y[((o * od + a) * oh + b) * ow + c] = s;
            mag[((o * od + a) * oh + b) * ow + c] = m;
          end
  endfunction

  function automatic void maxpool_ref(input real x[], input int ch, input int id, input int ih,
      input int iw, output real y[]);
    int od, oh, ow;
    od = id / 2; oh = ih / 2; ow = iw / 2;
    y = new[ch * od * oh * ow];
    for (int c = 0; c < ch; c++)
      for (int a = 0; a < od; a++)
        for (int b = 0; b < oh; b++)
          for (int d = 0; d < ow; d++) begin
            real m;
            m = x[((c * id + 2 * a) * ih + 2 * b) * iw + 2 * d];
            for (int u = 0; u < 2; u++)
              for (int v = 0; v < 2; v++)
                for (int t = 0; t < 2; t++)
                  if (x[((c * id + 2 * a + u) * ih + 2 * b + v) * iw + 2 * d + t] > m)
                    m = x[((c * id + 2 * a + u) * ih + 2 * b + v) * iw + 2 * d + t];
            y[((c * od + a) * oh + b) * ow + d] = m;
          end
  endfunction

  function automatic void gemm_ref(input real x[], input real p[], input int wb, input int bb,
      input int n_in, input int n_out, input bit relu, output real y[], output real mag[]);
    y = new[n_out];
    mag = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      real s, m;
      s = p[bb + o]; m = rabs(s);
      for (int i = 0; i < n_in; i++) begin
        s += x[i] * p[wb + o * n_in + i];
        m += rabs(x[i] * p[wb + o * n_in + i]);
      end
      y[o] = (relu && s < 0.0) ? 0.0 : s;
      mag[o] = m;
    end
  endfunction

  // Values as the core holds them: every binary32 input rounded first.
  function automatic real q(real r);
    return f2r(r2f(r));
  endfunction

endpackage
