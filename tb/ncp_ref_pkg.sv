// ncp_ref_pkg: golden model of the NCP's neural operations for the testbenches.
//
// Holds a model of the tensor memory (`rm`, one entry per TM word) and
// computes each layer directly from its mathematical definition and the
// tensor layouts: nested loops over channels and pixels, float32 arithmetic
// done in double precision and rounded once to single precision (exact for
// the products and for the sums used in the tests). It shares no code with
// the RTL.
package ncp_ref_pkg;
  import ncp_pkg::*;

  localparam int TM_WORDS = 31744;
  logic [TTM*8-1:0] rm [TM_WORDS];

  // ---------------------------------------------------------------- float32
  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    int          e;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    if (d[28] && ((|d[27:0]) || m[0])) m = m + 1;
    if (m[23]) begin m = 0; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 31'h7f7f_ffff};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic signed [7:0] sat8(input longint v);
    if (v > 127) return 8'sd127;
    if (v < -128) return -8'sd128;
    return 8'(v);
  endfunction

  function automatic logic signed [7:0] f2i8(input logic [31:0] f);
    real    r, fr;
    longint fl;
    r  = f2r(f);
    fl = longint'($floor(r));
    fr = r - real'(fl);
    if (fr > 0.5 || (fr == 0.5 && (fl % 2 != 0))) fl = fl + 1;
    return sat8(fl);
  endfunction

  // NOU-post on one value
  function automatic logic signed [7:0] post(input int x, input int res, input bit bn,
      input logic [31:0] scale, input logic [31:0] bias, input bit relu);
    int sum;
    logic [31:0] f;
    logic signed [7:0] q;
    sum = x + res;
    if (bn) begin
      f = r2f(real'(sum));
      f = r2f(f2r(f) * f2r(scale));
      f = r2f(f2r(f) + f2r(bias));
      q = f2i8(f);
    end else q = sat8(sum);
    if (relu && q < 0) q = 0;
    return q;
  endfunction

  // ---------------------------------------------------------------- memory
  function automatic logic signed [7:0] getb(input int a, input int b);
    return rm[a][8*b +: 8];
  endfunction
  function automatic void setb(input int a, input int b, input logic [7:0] v);
    rm[a][8*b +: 8] = v;
  endfunction
  // pixel-major and interleaved tensor element access
  function automatic logic signed [7:0] pm_get(input int base, input int hw, input int c,
                                              input int p);
    return getb(base + c * (hw / TTM) + p / TTM, p % TTM);
  endfunction
  function automatic void pm_set(input int base, input int hw, input int c, input int p,
                                 input logic [7:0] v);
    setb(base + c * (hw / TTM) + p / TTM, p % TTM, v);
  endfunction
  function automatic logic signed [7:0] il_get(input int base, input int hw, input int c,
                                              input int p);
    return getb(base + (c / TTM) * hw + p, c % TTM);
  endfunction
  function automatic void il_set(input int base, input int hw, input int c, input int p,
                                 input logic [7:0] v);
    setb(base + (c / TTM) * hw + p, c % TTM, v);
  endfunction
  function automatic logic [31:0] bn_scale(input int src2, input int c);
    return rm[src2 + c / 4][64 * (c % 4) +: 32];
  endfunction
  function automatic logic [31:0] bn_bias(input int src2, input int c);
    return rm[src2 + c / 4][64 * (c % 4) + 32 +: 32];
  endfunction

  // ---------------------------------------------------------------- layers
  function automatic void run(input instr_t i);
    int h, w, hw, ho, wo, hwo, cin, s;
    h = int'(i.h); w = int'(i.w); hw = h * w; cin = int'(i.cin);
    s = i.stride2 ? 2 : 1;
    case (i.opcode)
      OP_MOVE:
        for (int k = 0; k < int'(i.aux); k++) rm[int'(i.dst) + k] = rm[int'(i.src0) + k];
      OP_CONV: begin
        logic signed [7:0] outv [];
        int kn;
        ho = i.k3 ? h / s : h; wo = i.k3 ? w / s : w; hwo = ho * wo;
        kn = i.k3 ? cin * 9 : cin;
        outv = new[int'(i.cout) * hwo];
        for (int co = 0; co < int'(i.cout); co++)
          for (int p = 0; p < hwo; p++) begin
            int acc, res, e, iy, ix;
            acc = 0;
            for (int k = 0; k < kn; k++) begin
              logic signed [7:0] x;
              e = (co / TOC) * kn + k;
              if (!i.k3) x = pm_get(int'(i.src0), hw, k, p);
              else begin
                iy = (p / wo) * s + (k % 9) / 3 - 1;
                ix = (p % wo) * s + (k % 9) % 3 - 1;
                x = (iy >= 0 && iy < h && ix >= 0 && ix < w) ?
                    pm_get(int'(i.src0), hw, k / 9, iy * w + ix) : 8'sd0;
              end
              acc += int'(getb(int'(i.src1) + e / (TTM / TOC),
                               (e % (TTM / TOC)) * TOC + co % TOC)) * int'(x);
            end
            res = !i.res_add ? 0 :
                  i.out_il ? int'(il_get(int'(i.aux), hwo, co, p))
                           : int'(pm_get(int'(i.aux), hwo, co, p));
            outv[co * hwo + p] = post(acc, res, i.bn, bn_scale(int'(i.src2), co),
                                      bn_bias(int'(i.src2), co), i.relu);
          end
        for (int co = 0; co < int'(i.cout); co++)
          for (int p = 0; p < hwo; p++)
            if (i.out_il) il_set(int'(i.dst), hwo, co, p, outv[co * hwo + p]);
            else          pm_set(int'(i.dst), hwo, co, p, outv[co * hwo + p]);
      end
      OP_DWCONV: begin
        logic signed [7:0] outv [];
        ho = h / s; wo = w / s; hwo = ho * wo;
        outv = new[cin * hwo];
        for (int c = 0; c < cin; c++)
          for (int oy = 0; oy < ho; oy++)
            for (int ox = 0; ox < wo; ox++) begin
              int acc, res, iy, ix;
              acc = 0;
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++) begin
                  iy = oy * s + ky - 1; ix = ox * s + kx - 1;
                  if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                    acc += int'(il_get(int'(i.src0), hw, c, iy * w + ix)) *
                           int'(getb(int'(i.src1) + (c / TTM) * 9 + 3 * ky + kx, c % TTM));
                end
              res = i.res_add ? int'(il_get(int'(i.aux), hwo, c, oy * wo + ox)) : 0;
              outv[c * hwo + oy * wo + ox] = post(acc, res, i.bn, bn_scale(int'(i.src2), c),
                                                  bn_bias(int'(i.src2), c), i.relu);
            end
        for (int c = 0; c < cin; c++)
          for (int p = 0; p < hwo; p++)
            if (i.out_il) il_set(int'(i.dst), hwo, c, p, outv[c * hwo + p]);
            else          pm_set(int'(i.dst), hwo, c, p, outv[c * hwo + p]);
      end
      OP_BN, OP_RELU, OP_ADD: begin
        bit bn, relu;
        bn = i.bn || i.opcode == OP_BN; relu = i.relu || i.opcode == OP_RELU;
        for (int c = 0; c < cin; c++)
          for (int p = 0; p < hw; p++) begin
            int res;
            res = (i.res_add || i.opcode == OP_ADD) ? int'(pm_get(int'(i.src1), hw, c, p)) : 0;
            pm_set(int'(i.dst), hw, c, p,
                   post(int'(pm_get(int'(i.src0), hw, c, p)), res, bn,
                        bn_scale(int'(i.src2), c), bn_bias(int'(i.src2), c), relu));
          end
      end
      OP_MAXP, OP_DSAM, OP_USAM: begin
        if (i.opcode == OP_USAM) begin ho = 2 * h; wo = 2 * w; end
        else begin ho = h / 2; wo = w / 2; end
        hwo = ho * wo;
        for (int c = 0; c < cin; c++)
          for (int oy = 0; oy < ho; oy++)
            for (int ox = 0; ox < wo; ox++) begin
              logic signed [7:0] v, t;
              if (i.opcode == OP_USAM) v = il_get(int'(i.src0), hw, c, (oy / 2) * w + ox / 2);
              else begin
                v = il_get(int'(i.src0), hw, c, (2 * oy) * w + 2 * ox);
                if (i.opcode == OP_MAXP)
                  for (int d = 1; d < 4; d++) begin
                    t = il_get(int'(i.src0), hw, c, (2 * oy + d / 2) * w + 2 * ox + d % 2);
                    if (t > v) v = t;
                  end
              end
              il_set(int'(i.dst), hwo, c, oy * wo + ox, v);
            end
      end
      OP_GAP: begin
        int lg;
        lg = $clog2(hw);
        for (int c = 0; c < cin; c++) begin
          int sum;
          sum = 0;
          for (int p = 0; p < hw; p++) sum += int'(il_get(int'(i.src0), hw, c, p));
          setb(int'(i.dst) + c / TTM, c % TTM, sat8((longint'(sum) + (hw / 2)) >>> lg));
        end
      end
      default: ;
    endcase
  endfunction

  // random float32 in +-[lo_exp .. hi_exp) binary orders of magnitude
  function automatic logic [31:0] rand_f(input int lo_exp, input int hi_exp, input bit pos);
    int e;
    e = lo_exp + int'($urandom % 32'(hi_exp - lo_exp));
    return {pos ? 1'b0 : 1'($urandom), 8'(127 + e), 23'($urandom)};
  endfunction

endpackage
