// ncp_fp_pkg: float32 arithmetic used by the NOU-post pipelines.
//
// The paper's post unit is built from int2float, float32 multiply-add and
// float2int modules. It does not state their rounding, so this design uses
// IEEE-754 round-to-nearest-even for every operation. Subnormal inputs and
// results are flushed to zero, an overflow saturates to the largest finite
// value of the sign, and infinities and NaNs are not produced or recognised
// (BN scale and bias are finite numbers). Each function is combinational;
// the caller places pipeline registers between them.
package ncp_fp_pkg;

  localparam logic [31:0] FP_MAXF = 32'h7f7f_ffff;

  // int32 -> float32, round to nearest even.
  function automatic logic [31:0] fp_i2f(input logic signed [31:0] x);
    logic        s;
    logic [31:0] mag, n;
    logic [23:0] man;
    logic [24:0] rnd;
    logic [8:0]  e;
    int          lz;
    if (x == 0) return 32'h0;
    s   = x[31];
    mag = s ? (~x + 32'd1) : x;       // |-2^31| = 2^31 fits unsigned
    lz  = 0;
    for (int i = 31; i >= 0; i--) begin
      if (mag[i]) break;
      lz++;
    end
    n   = mag << lz;
    e   = 9'(127 + 31 - lz);
    man = n[31:8];
    rnd = {1'b0, man};
    if (n[7] && ((|n[6:0]) || man[0])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 9'd1;
    end
    return {s, e[7:0], rnd[22:0]};
  endfunction

  // float32 * float32, round to nearest even.
  function automatic logic [31:0] fp_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [23:0] man;
    logic [24:0] rnd;
    logic        g, st;
    logic signed [10:0] e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(signed'({3'b0, a[30:23]})) + 11'(signed'({3'b0, b[30:23]})) - 11'sd127;
    if (p[47]) begin
      man = p[47:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      man = p[46:23]; g = p[22]; st = |p[21:0];
    end
    rnd = {1'b0, man};
    if (g && (st || man[0])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 11'sd1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, FP_MAXF[30:0]};
    return {s, e[7:0], rnd[22:0]};
  endfunction

  // float32 + float32, round to nearest even.
  function automatic logic [31:0] fp_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] l, sm;
    logic [26:0] ml, ms, mss, d27;
    logic [27:0] sum;
    logic [23:0] man;
    logic [24:0] rnd;
    logic signed [10:0] e;
    int          d;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'h0 : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin l = a; sm = b; end
    else                    begin l = b; sm = a; end
    ml = {1'b1, l[22:0], 3'b000};
    ms = {1'b1, sm[22:0], 3'b000};
    d  = int'(l[30:23]) - int'(sm[30:23]);
    if (d > 26) mss = 27'd1;
    else begin
      mss = ms >> d;
      if ((ms & ((27'd1 << d) - 27'd1)) != 27'd0) mss[0] = 1'b1;
    end
    e = 11'(signed'({3'b0, l[30:23]}));
    if (l[31] == sm[31]) begin
      sum = {1'b0, ml} + {1'b0, mss};
      if (sum[27]) begin
        d27 = sum[27:1];
        d27[0] = d27[0] | sum[0];
        e = e + 11'sd1;
      end else d27 = sum[26:0];
    end else begin
      d27 = ml - mss;
      if (d27 == 27'd0) return 32'h0;
      for (int i = 0; i < 27; i++) begin
        if (d27[26]) break;
        d27 = d27 << 1;
        e   = e - 11'sd1;
      end
    end
    man = d27[26:3];
    rnd = {1'b0, man};
    if (d27[2] && ((|d27[1:0]) || man[0])) rnd = rnd + 25'd1;
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 11'sd1;
    end
    if (e <= 0)   return 32'h0;
    if (e >= 255) return {l[31], FP_MAXF[30:0]};
    return {l[31], e[7:0], rnd[22:0]};
  endfunction

  // float32 -> int8, round to nearest even, saturating to [-128, 127].
  function automatic logic signed [7:0] fp_f2i8(input logic [31:0] f);
    logic [23:0] m, q;
    logic [9:0]  r;
    int          sh;
    logic        g, st;
    if (f[30:23] < 8'd126) return 8'sd0;                        // |f| < 0.5
    if (f[30:23] > 8'd134) return f[31] ? -8'sd128 : 8'sd127;   // |f| >= 512
    m  = {1'b1, f[22:0]};
    sh = 150 - int'(f[30:23]);                                  // 16 .. 24
    q  = m >> sh;
    g  = m[sh-1];
    st = (m & ((24'd1 << (sh - 1)) - 24'd1)) != 24'd0;
    r  = {1'b0, q[8:0]};
    if (g && (st || q[0])) r = r + 10'd1;
    if (f[31]) return (r >= 10'd128) ? -8'sd128 : -8'(signed'(r[7:0]));
    return (r >= 10'd127) ? 8'sd127 : 8'(signed'(r[7:0]));
  endfunction

endpackage
