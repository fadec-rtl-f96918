// tb_ref_pkg: golden models for the FADEC testbenches.
//
// The models work on two package-level word arrays that mirror the data and
// parameter memories (rmem, pmem) and are written independently of the RTL:
// integer arithmetic on longints, and the sigmoid / ELU tables recomputed
// with real-valued $exp rather than read from the ROM files.
package tb_ref_pkg;
  import fadec_pkg::*;

  logic [63:0] rmem [65536];
  logic [63:0] pmem [65536];

  function automatic longint rsc(longint v, int r);
    longint t;
    t = v;
    if (r > 0) t = (t + (longint'(1) << (r - 1))) >>> r;
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return t;
  endfunction

  function automatic longint getl(logic [63:0] wd, int l);
    return longint'($signed(wd[l*16 +: 16]));
  endfunction

  function automatic void setl(int unsigned a, int l, longint v);
    rmem[a][l*16 +: 16] = 16'(v);
  endfunction

  function automatic longint sig(longint x, int sh);
    longint v, m, t;
    v = rsc(x, sh);
    m = (v < 0) ? -v : v;
    if (m > 127) m = 127;
    t = longint'($floor(16384.0 / (1.0 + $exp(-real'(m) / 16.0)) + 0.5));
    return (v < 0) ? 16384 - t : t;
  endfunction

  function automatic longint elu(longint x, int frac);
    longint v, k, t;
    if (x >= 0) return x;
    v = x >>> (frac - 4);
    k = v + 128;
    if (k < 0) k = 0;
    if (k > 127) k = 127;
    t = longint'($floor(16384.0 * ($exp(-8.0 + real'(k) / 16.0) - 1.0) + 0.5));
    return rsc(t, 14 - frac);
  endfunction

  function automatic void ref_conv(stage_t c, int K, int S, int OCP);
    int P, ho, wo, cin, wbase;
    P   = (K - 1) / 2;
    ho  = (int'(c.h) + 2 * P - K) / S + 1;
    wo  = (int'(c.w) + 2 * P - K) / S + 1;
    cin = int'(c.cin_g) * 4;
    wbase = int'(c.paddr) + int'(c.oc_num) * 2;
    for (int oy = 0; oy < ho; oy++)
      for (int ox = 0; ox < wo; ox++)
        for (int oc = 0; oc < int'(c.oc_num) * 4; oc++) begin
          longint acc, y;
          int ch, o;
          ch  = oc / OCP;
          o   = oc % OCP;
          acc = longint'($signed(pmem[int'(c.paddr) + oc / 2][(oc % 2) * 32 +: 32]));
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int ci = 0; ci < cin; ci++) begin
                int iy, ix;
                longint xv, wv;
                iy = oy * S + ky - P;
                ix = ox * S + kx - P;
                if (iy < 0 || ix < 0 || iy >= int'(c.h) || ix >= int'(c.w)) continue;
                xv = getl(rmem[int'(c.src0) + (iy * int'(c.w) + ix) * int'(c.cin_g) + ci / 4], ci % 4);
                wv = longint'($signed(pmem[wbase + (ch * K * K + ky * K + kx) * (cin / 2) + ci / 2]
                                          [(o * 2 + ci % 2) * 8 +: 8]));
                acc += xv * wv;
              end
          y = rsc(acc * longint'(c.scale), int'(c.sh0));
          if (c.act == ACT_RELU && y < 0) y = 0;
          if (c.act == ACT_SIGMOID) y = sig(y, int'(c.sh1));
          setl(int'(c.dst) + (oy * wo + ox) * int'(c.cout_g) + int'(c.oc_first) + oc / 4, oc % 4, y);
        end
  endfunction

  function automatic void ref_elt(stage_t c);
    int n;
    n = int'(c.h) * int'(c.w) * int'(c.cin_g);
    for (int k = 0; k < n; k++)
      for (int l = 0; l < 4; l++) begin
        longint s;
        s = getl(rmem[int'(c.src0) + k], l) * (longint'(1) << c.la);
        if (c.op == OP_ADD) s += getl(rmem[int'(c.src1) + k], l) * (longint'(1) << c.lb);
        setl(int'(c.dst) + k, l, rsc(s, int'(c.sh0)));
      end
  endfunction

  function automatic void ref_up(stage_t c);
    int W2;
    W2 = 2 * int'(c.w);
    for (int y = 0; y < 2 * int'(c.h); y++)
      for (int x = 0; x < W2; x++)
        for (int g = 0; g < int'(c.cin_g); g++)
          rmem[int'(c.dst) + (y * W2 + x) * int'(c.cin_g) + g] =
            rmem[int'(c.src0) + ((y / 2) * int'(c.w) + x / 2) * int'(c.cin_g) + g];
  endfunction

  function automatic void ref_copy(stage_t c);
    for (int p = 0; p < int'(c.h) * int'(c.w); p++)
      for (int g = 0; g < int'(c.oc_num); g++)
        rmem[int'(c.dst) + p * int'(c.cout_g) + int'(c.oc_first) + g] =
          rmem[int'(c.src0) + p * int'(c.cin_g) + int'(c.soff) + g];
  endfunction

  function automatic void ref_cell(stage_t c);
    int n;
    n = int'(c.h) * int'(c.w) * int'(c.cin_g);
    for (int k = 0; k < n; k++)
      for (int l = 0; l < 4; l++) begin
        longint ig, fg, gg, cc, s;
        ig = getl(rmem[int'(c.src0) + k], l);
        fg = getl(rmem[int'(c.src0) + n + k], l);
        gg = getl(rmem[int'(c.src0) + 2 * n + k], l);
        cc = getl(rmem[int'(c.src1) + k], l);
        s  = rsc(sig(fg, int'(c.sh1)), int'(c.sh2)) * cc
           + rsc(sig(ig, int'(c.sh1)), int'(c.sh2)) * elu(gg, int'(c.sh3));
        setl(int'(c.dst) + k, l, rsc(s, int'(c.sh0)));
      end
  endfunction

  function automatic void ref_hidden(stage_t c);
    int n;
    n = int'(c.h) * int'(c.w) * int'(c.cin_g);
    for (int k = 0; k < n; k++)
      for (int l = 0; l < 4; l++) begin
        longint og, cc;
        og = getl(rmem[int'(c.src0) + k], l);
        cc = getl(rmem[int'(c.src1) + k], l);
        setl(int'(c.dst) + k, l, rsc(sig(og, int'(c.sh1)) * elu(cc, int'(c.sh3)), int'(c.sh0)));
      end
  endfunction

  function automatic logic [63:0] rnd_word(int bits);
    logic [63:0] wd;
    for (int l = 0; l < 4; l++) wd[l*16 +: 16] = 16'($signed($urandom % (1 << bits)) - (1 << (bits - 1)));
    return wd;
  endfunction
endpackage
