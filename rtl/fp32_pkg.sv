// fp32_pkg: IEEE-754 binary32 arithmetic shared by every datapath unit.
//
// The accelerators keep the networks in 32-bit floating point, as the
// HLS-generated cores they model do, so that their outputs match a CPU run
// of the same network. The functions below are combinational and
// synthesizable. They round to nearest-even; the simplifications are this
// design's own choices: subnormal inputs and results are flushed to zero, NaN
// is not distinguished from infinity, and a zero result is always +0.
//
//   fp_add / fp_mul      correctly rounded sum / product (before flushing)
//   fp_gt                ordered "greater than" (the ONNX Greater operator)
//   fp_from_int          exact for |n| < 2^24
//   fp_to_int            round to nearest (ties away), valid for |a| < 2^30
//   fp_ldexp             a * 2^n by exponent adjustment
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO    = 32'h0000_0000;
  localparam fp32_t FP_ONE     = 32'h3F80_0000;
  localparam fp32_t FP_TWO     = 32'h4000_0000;
  localparam fp32_t FP_POS_INF = 32'h7F80_0000;
  localparam fp32_t FP_NEG_INF = 32'hFF80_0000;

  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // Round a 27-bit significand {hidden, 23 fraction, guard, round, sticky}
  // with biased exponent exp and pack it.
  function automatic fp32_t fp_round_pack(logic sign, int exp, logic [26:0] mant);
    logic [24:0] r;
    logic        up;
    int          e;
    e  = exp;
    up = mant[2] & (mant[1] | mant[0] | mant[3]);
    r  = {1'b0, mant[26:3]} + {24'd0, up};
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e >= 255) return {sign, 8'hFF, 23'd0};
    if (e <= 0) return FP_ZERO;
    return {sign, e[7:0], r[22:0]};
  endfunction

  function automatic fp32_t fp_add(fp32_t a_in, fp32_t b_in);
    fp32_t       a, b;
    logic [26:0] ma, mb, sh, mask;
    logic [27:0] sum;
    int          d, e, lz;
    logic        found;
    a = (a_in[30:23] == 8'd0) ? FP_ZERO : a_in;
    b = (b_in[30:23] == 8'd0) ? FP_ZERO : b_in;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:0] < b[30:0]) begin
      a = b_in[30:23] == 8'd0 ? FP_ZERO : b_in;
      b = a_in[30:23] == 8'd0 ? FP_ZERO : a_in;
    end
    if (b[30:0] == 31'd0) return a;
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    d  = int'(a[30:23]) - int'(b[30:23]);
    if (d > 26) begin
      sh = 27'd1;
    end else begin
      mask = (27'd1 << d) - 27'd1;
      sh   = mb >> d;
      sh[0] = sh[0] | (|(mb & mask));
    end
    e = int'(a[30:23]);
    if (a[31] == b[31]) begin
      sum = {1'b0, ma} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, sh};
      if (sum == 28'd0) return FP_ZERO;
      lz    = 0;
      found = 1'b0;
      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          lz    = 26 - i;
          found = 1'b1;
        end
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp_round_pack(a[31], e, sum[26:0]);
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [26:0] m;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return FP_ZERO;
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      e = e + 1;
      m = {p[47:24], p[23], p[22], |p[21:0]};
    end else begin
      m = {p[46:23], p[22], p[21], |p[20:0]};
    end
    return fp_round_pack(s, e, m);
  endfunction

  // Order-preserving unsigned key; subnormals and -0 map to the key of +0.
  function automatic logic [31:0] fp_key(fp32_t a);
    if (a[30:23] == 8'd0) return 32'h8000_0000;
    return a[31] ? ~a : {1'b1, a[30:0]};
  endfunction

  function automatic logic fp_gt(fp32_t a, fp32_t b);
    return fp_key(a) > fp_key(b);
  endfunction

  function automatic fp32_t fp_relu(fp32_t a);
    return (a[31] || a[30:23] == 8'd0) ? FP_ZERO : a;
  endfunction

  function automatic fp32_t fp_from_int(int n);
    logic [31:0] mag;
    int          msb;
    logic [31:0] norm;
    if (n == 0) return FP_ZERO;
    mag = (n < 0) ? 32'(-n) : 32'(n);
    msb = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = i;
    norm = mag << (31 - msb);
    return {n < 0, 8'(msb + 127), norm[30:8]};
  endfunction

  function automatic int fp_to_int(fp32_t a);
    int          e;
    logic [55:0] m;
    logic [55:0] r;
    e = int'(a[30:23]) - 127;
    if (e < -1) return 0;
    m = {32'd0, 1'b1, a[22:0]};
    if (e >= 23) r = (m << (e - 23)) << 1;
    else r = (m << 1) >> (23 - e);
    r = (r + 56'd1) >> 1;
    return a[31] ? -int'(r[31:0]) : int'(r[31:0]);
  endfunction

  function automatic fp32_t fp_ldexp(fp32_t a, int n);
    int e;
    if (a[30:23] == 8'd0) return FP_ZERO;
    if (a[30:23] == 8'hFF) return a;
    e = int'(a[30:23]) + n;
    if (e >= 255) return {a[31], 8'hFF, 23'd0};
    if (e <= 0) return FP_ZERO;
    return {a[31], e[7:0], a[22:0]};
  endfunction

endpackage
