// vrex_fp_pkg: BF16 / FP32 arithmetic shared by the LLM execution engine.
//
// The execution engine computes in BF16 (1 sign, 8 exponent, 7 fraction bits).
// Products of two BF16 values are exact in FP32, so the dot-product engine
// multiplies into FP32 and reduces and accumulates in FP32, rounding to BF16
// only at its output. Every function here is combinational and synthesizable.
//
// Simplifications chosen for this design (the arithmetic details are not part
// of the V-Rex description): subnormal inputs and results are flushed to zero,
// infinities saturate and NaN payloads are not preserved; all rounding is
// round-to-nearest-even.
package vrex_fp_pkg;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  function automatic fp32_t bf16_to_fp32(input bf16_t b);
    return (b[14:7] == 8'h00) ? {b[15], 31'h0} : {b, 16'h0000};
  endfunction

  // Round-to-nearest-even from FP32 to BF16.
  function automatic bf16_t fp32_to_bf16(input fp32_t f);
    logic rnd;
    if (f[30:23] == 8'hff) return f[31:16];
    if (f[30:23] == 8'h00) return {f[31], 15'h0};
    rnd = f[15] & ((|f[14:0]) | f[16]);
    return f[31:16] + {15'h0, rnd};
  endfunction

  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [22:0] m;
    logic        g, st, rnd;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) return {s, 8'hff, 23'h0};
    if (a[30:23] == 8'h00 || b[30:23] == 8'h00) return {s, 31'h0};
    p = {24'h0, 1'b1, a[22:0]} * {24'h0, 1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      m = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 1;
    end else begin
      m = p[45:23]; g = p[22]; st = |p[21:0];
    end
    rnd = g & (st | m[0]);
    if (e >= 255) return {s, 8'hff, 23'h0};
    if (e <= 0)   return {s, 31'h0};
    return {s, e[7:0], m} + {31'h0, rnd};
  endfunction

  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my;
    logic [27:0] sum;
    logic [22:0] m;
    logic        g, st, rnd, sticky;
    int          d, e;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    if (x[30:23] == 8'hff) return x;
    if (x[30:23] == 8'h00) return 32'h0;
    if (y[30:23] == 8'h00) return x;
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = int'(x[30:23]) - int'(y[30:23]);
    if (d > 26) my = 27'd1;
    else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && my[i]) sticky = 1'b1;
      my = (my >> d) | {26'h0, sticky};
    end
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'h0) return 32'h0;
    e = int'(x[30:23]);
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e = e + 1;
    end else begin
      for (int i = 0; i < 27; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e = e - 1;
        end
      end
    end
    m   = sum[25:3];
    g   = sum[2];
    st  = |sum[1:0];
    rnd = g & (st | m[0]);
    if (e >= 255) return {x[31], 8'hff, 23'h0};
    if (e <= 0)   return {x[31], 31'h0};
    return {x[31], e[7:0], m} + {31'h0, rnd};
  endfunction

  function automatic bf16_t bf16_mul(input bf16_t a, input bf16_t b);
    return fp32_to_bf16(fp32_mul(bf16_to_fp32(a), bf16_to_fp32(b)));
  endfunction

  function automatic bf16_t bf16_add(input bf16_t a, input bf16_t b);
    return fp32_to_bf16(fp32_add(bf16_to_fp32(a), bf16_to_fp32(b)));
  endfunction

  // BF16 to unsigned fixed point with FRAC fraction bits, truncated;
  // negative inputs give 0 and values too large saturate at 16'hffff.
  function automatic logic [15:0] bf16_to_ufix16(input bf16_t b, input int frac);
    int          sh;
    logic [31:0] v;
    if (b[15] || b[14:7] == 8'h00) return 16'h0;
    sh = int'(b[14:7]) - 127 + frac - 7;
    if (sh >= 9) return 16'hffff;
    if (sh <= -8) return 16'h0;
    v = {24'h0, 1'b1, b[6:0]};
    if (sh >= 0) v = v << sh;
    else         v = v >> (-sh);
    return (v > 32'h0000ffff) ? 16'hffff : v[15:0];
  endfunction

endpackage
