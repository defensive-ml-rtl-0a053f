// defender_pkg -- sizes, number formats and address map shared by the
// memory-controller side-channel defender.
//
// The defender network is the compressed three-layer model: a feed-forward
// layer from a 32-sample INT8 latency history to 16 values, a 16-wide GRU,
// and a feed-forward layer from 16 values to one INT8 delay followed by ReLU.
// These widths (32, 16, 1), the INT8 input/output and the FP16 GRU state are
// the published architecture. Everything below about scaling is this
// design's own choice, since only the formats are published:
//
//   * weights and biases are INT8 with real value W / 2**WS (WS = 5,
//     range -4 .. +3.97);
//   * latency samples and the output delay are INT8 with real value
//     q / 2**XS (XS = 7), so the delay comes out in the same units as the
//     samples it perturbs;
//   * inside a layer, values are signed Q.FRAC fixed point (FRAC = 12, 24 bits,
//     range +-2048); the 16-wide links between layers and the stored GRU
//     state are FP16 (IEEE binary16), rounded to nearest, ties away from zero.
//
// Parameter memory layout (byte addresses of the configuration port):
//   W1  [16][32]  @ 0      FF1 weights, row j (output), column i (sample i)
//   B1  [16]      @ 512
//   Wih [48][16]  @ 528    GRU input weights, rows r0..r15, z0..z15, n0..n15
//   Bih [48]      @ 1296
//   Whh [48][16]  @ 1344   GRU recurrent weights, same row order
//   Bhh [48]      @ 2112
//   W2  [16]      @ 2160   FF2 weights
//   B2            @ 2176
// Control registers follow at 0xF00 (enable), 0xF01 (latency shift) and
// 0xF02 (dropout threshold).
package defender_pkg;

  localparam int HIST_LEN = 32;          // history vector length
  localparam int HID      = 16;          // FF1 outputs / GRU width
  localparam int NGATE    = 3 * HID;     // r, z, n gate rows
  localparam int NMASK    = 2 * HID;     // dropout positions per inference

  localparam int FRAC = 12;              // fixed-point fraction bits
  localparam int WS   = 5;               // weight scale 2**-WS
  localparam int XS   = 7;               // sample / delay scale 2**-XS

  localparam int OFF_W1  = 0;
  localparam int OFF_B1  = OFF_W1  + HID * HIST_LEN;
  localparam int OFF_WIH = OFF_B1  + HID;
  localparam int OFF_BIH = OFF_WIH + NGATE * HID;
  localparam int OFF_WHH = OFF_BIH + NGATE;
  localparam int OFF_BHH = OFF_WHH + NGATE * HID;
  localparam int OFF_W2  = OFF_BHH + NGATE;
  localparam int OFF_B2  = OFF_W2  + HID;
  localparam int NPARAM  = OFF_B2  + 1;  // 2177

  localparam int CFG_AW = 12;
  localparam logic [CFG_AW-1:0] ADDR_ENABLE = 12'hF00;
  localparam logic [CFG_AW-1:0] ADDR_LATSH  = 12'hF01;
  localparam logic [CFG_AW-1:0] ADDR_DROP   = 12'hF02;

  localparam int TS_W  = 16;             // cycle timestamps
  localparam int DLY_W = 15;             // delay in cycles: 127 << 7 max

  typedef logic signed [7:0]  q8_t;      // INT8 weight / sample
  typedef logic [15:0]        fp16_t;    // IEEE binary16 bit pattern
  typedef logic signed [23:0] fix_t;     // Q.12

  localparam fix_t FIX_ONE = fix_t'(1 << FRAC);
  localparam fix_t FIX_MAX = 24'sh7FFFFF;
  localparam fix_t FIX_MIN = -24'sh800000;

  typedef struct packed {
    logic       enable;                  // 0: defender adds no delay
    logic [2:0] lat_shift;               // sample = latency >> lat_shift
    logic [7:0] drop_thresh;             // drop probability * 256
  } cfg_t;

  // Saturate a wide signed value into Q.12.
  function automatic fix_t sat_fix(input logic signed [47:0] v);
    if (v > 48'(FIX_MAX))      return FIX_MAX;
    else if (v < 48'(FIX_MIN)) return FIX_MIN;
    else                       return fix_t'(v);
  endfunction

  // Q.12 -> FP16, round to nearest, ties away from zero. Every non-zero Q.12
  // value is a normal FP16 number (2**-12 .. 2**11), so no subnormals arise.
  function automatic fp16_t fix_to_fp16(input fix_t v);
    logic        s;
    logic [23:0] m;
    logic [11:0] t;
    logic [11:0] r;
    int          p;
    logic [4:0]  e;
    s = v[23];
    m = s ? 24'(-v) : 24'(v);
    if (m == '0) return 16'h0000;
    p = 0;
    for (int i = 0; i < 24; i++) if (m[i]) p = i;
    t = 12'({m, 11'b0} >> p);            // leading one now at bit 11
    r = {1'b0, t[11:1]} + 12'(t[0]);     // 11-bit significand, rounded
    e = 5'(p + 3);                       // 2**(p-12), bias 15
    if (r[11]) begin
      e = e + 5'd1;
      r = r >> 1;
    end
    return {s, e, r[9:0]};
  endfunction

  // FP16 -> Q.12, magnitude truncated, saturating (Inf/NaN saturate too).
  function automatic fix_t fp16_to_fix(input fp16_t f);
    logic        s;
    logic [4:0]  e;
    logic [10:0] sig;
    logic [23:0] mag;
    s   = f[15];
    e   = f[14:10];
    sig = {1'b1, f[9:0]};
    if (e == 5'd0) mag = '0;             // subnormals are below 2**-12
    else if (e >= 5'd26) mag = 24'h7FFFFF;
    else if (e >= 5'd13) mag = 24'(sig) << (e - 5'd13);
    else mag = 24'(sig) >> (5'd13 - e);
    if (mag > 24'h7FFFFF) mag = 24'h7FFFFF;
    return s ? -fix_t'(mag) : fix_t'(mag);
  endfunction

endpackage
