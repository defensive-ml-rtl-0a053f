// defender_ref_pkg -- reference model of the memory-side defender arithmetic,
// written independently of the RTL for the testbenches.
//
// FP16 values are decoded and encoded through real arithmetic (sign,
// exponent search, round half away from zero), fixed-point values are held in
// longint, and the layers are evaluated element by element. The model follows
// the number formats documented in defender_pkg.
package defender_ref_pkg;

  function automatic real fp16_val(input logic [15:0] f);
    int  e;
    real m, v;
    e = int'(f[14:10]);
    m = real'(f[9:0]) / 1024.0;
    if (e == 0) v = m * (2.0 ** -14);
    else        v = (1.0 + m) * (2.0 ** (e - 15));
    return f[15] ? -v : v;
  endfunction

  // Encode a value that is a multiple of 2**-12 and below 2048 in magnitude.
  function automatic logic [15:0] fp16_enc(input real v);
    logic s;
    real  a, frac;
    int   e, m;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a == 0.0) return 16'h0000;
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    frac = a / (2.0 ** e) * 1024.0 - 1024.0;  // 0 .. 1024
    m = int'($floor(frac + 0.5));
    if (m == 1024) begin
      m = 0;
      e++;
    end
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  function automatic longint clampl(input longint v, input longint lo, input longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  localparam longint QMAX = 64'sd8388607;
  localparam longint QMIN = -64'sd8388608;

  function automatic longint to_q12(input logic [15:0] f);
    return clampl(longint'($rtoi(fp16_val(f) * 4096.0)), QMAX * -1, QMAX);
  endfunction

  function automatic logic [15:0] from_q12(input longint q);
    return fp16_enc(real'(clampl(q, QMIN, QMAX)) / 4096.0);
  endfunction

  typedef byte          wvec_t [2177];
  typedef logic [15:0]  hvec_t [16];
  typedef byte          xvec_t [32];

  function automatic hvec_t ff1(input xvec_t x, input wvec_t w);
    hvec_t y;
    for (int j = 0; j < 16; j++) begin
      longint acc;
      acc = longint'(w[512 + j]) * 128;
      for (int i = 0; i < 32; i++) acc += longint'(x[i]) * longint'(w[j*32 + i]);
      y[j] = from_q12(acc);
    end
    return y;
  endfunction

  function automatic longint floor_div(input longint a, input longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q--;
    return q;
  endfunction

  function automatic hvec_t gru(input hvec_t x, input hvec_t h, input wvec_t w);
    longint xi [16], hi [16], gi [48], gh [48];
    hvec_t  hn;
    for (int k = 0; k < 16; k++) begin
      xi[k] = to_q12(x[k]);
      hi[k] = to_q12(h[k]);
    end
    for (int g = 0; g < 48; g++) begin
      longint a, b;
      a = longint'(w[1296 + g]) * 4096;
      b = longint'(w[2112 + g]) * 4096;
      for (int k = 0; k < 16; k++) begin
        a += xi[k] * longint'(w[528 + g*16 + k]);
        b += hi[k] * longint'(w[1344 + g*16 + k]);
      end
      gi[g] = clampl(floor_div(a, 32), QMIN, QMAX);
      gh[g] = clampl(floor_div(b, 32), QMIN, QMAX);
    end
    for (int j = 0; j < 16; j++) begin
      longint r, z, n, v;
      v = clampl(gi[j] + gh[j], QMIN, QMAX);
      r = clampl(floor_div(v, 4) + 2048, 0, 4096);
      v = clampl(gi[16+j] + gh[16+j], QMIN, QMAX);
      z = clampl(floor_div(v, 4) + 2048, 0, 4096);
      v = clampl(gi[32+j] + floor_div(r * gh[32+j], 4096), QMIN, QMAX);
      n = clampl(v, -4096, 4096);
      v = n + floor_div(z * (hi[j] - n), 4096);
      hn[j] = from_q12(v);
    end
    return hn;
  endfunction

  function automatic int ff2(input hvec_t x, input wvec_t w);
    longint acc;
    acc = longint'(w[2176]) * 4096;
    for (int j = 0; j < 16; j++) acc += to_q12(x[j]) * longint'(w[2160 + j]);
    acc = floor_div(acc, 1024);
    return int'(clampl(acc, 0, 127));
  endfunction

  function automatic logic [31:0] xs32(input logic [31:0] s);
    s ^= s << 13;
    s ^= s >> 17;
    s ^= s << 5;
    return s;
  endfunction

  // 32 keep bits from a generator state; state is advanced by eight rounds.
  function automatic logic [31:0] drop_mask(inout logic [31:0] st, input int thresh);
    logic [31:0] m;
    for (int r = 0; r < 8; r++) begin
      st = xs32(st);
      for (int b = 0; b < 4; b++) m[r*4 + b] = (int'(st[8*b +: 8]) >= thresh);
    end
    return m;
  endfunction

  // Full inference: returns delay in sample units and updates h.
  function automatic int infer(input xvec_t x, inout hvec_t h, input wvec_t w,
                               input logic [31:0] mask);
    hvec_t a, g;
    a = ff1(x, w);
    for (int j = 0; j < 16; j++) if (!mask[j]) a[j] = 16'h0000;
    h = gru(a, h, w);
    g = h;
    for (int j = 0; j < 16; j++) if (!mask[16+j]) g[j] = 16'h0000;
    return ff2(g, w);
  endfunction

  // Random parameters: small weights keep the network out of saturation.
  function automatic wvec_t rand_weights(input int span);
    wvec_t w;
    for (int a = 0; a < 2177; a++) w[a] = byte'($signed($urandom_range(2*span, 0)) - span);
    return w;
  endfunction

endpackage
