// gru_cell -- one step of the 16-wide GRU layer of the memory-side defender.
//
// Standard GRU update (gate order r, z, n):
//   r  = sig(Wir x + bir + Whr h + bhr)
//   z  = sig(Wiz x + biz + Whz h + bhz)
//   n  = tanh(Win x + bin + r * (Whn h + bhn))
//   h' = (1 - z) * n + z * h  =  n + z * (h - n)
// Inputs x and state h arrive as FP16 and are converted to Q.12; products
// with the INT8 weights (2**-5 scale) are summed exactly and brought back to
// Q.12 with an arithmetic shift (floor). The sigmoid and tanh are the
// piecewise-linear "hard" forms, sig(v) = clamp(v/4 + 1/2, 0, 1) and
// tanh(v) = clamp(v, -1, 1), so the state stays within [-1, 1]. The new
// state is rounded to FP16, which is the format the published design keeps
// its GRU memory in; the hard activations and fixed-point internals are this
// design's own choices. Purely combinational.
//
// Ports: x[k], h[k] FP16; w_ih[g][k], w_hh[g][k] with g = gate*16 + j;
// b_ih[g], b_hh[g]; h_new[j] FP16.
module gru_cell
  import defender_pkg::*;
(
  input  fp16_t x     [HID],
  input  fp16_t h     [HID],
  input  q8_t   w_ih  [NGATE][HID],
  input  q8_t   b_ih  [NGATE],
  input  q8_t   w_hh  [NGATE][HID],
  input  q8_t   b_hh  [NGATE],
  output fp16_t h_new [HID]
);
  fix_t xf [HID];
  fix_t hf [HID];
  fix_t gi [NGATE];                      // input-side gate sums, Q.12
  fix_t gh [NGATE];                      // recurrent gate sums, Q.12

  function automatic fix_t hard_sig(input fix_t v);
    logic signed [24:0] t;
    t = 25'(v >>> 2) + 25'(FIX_ONE >>> 1);
    if (t < 0)                return '0;
    else if (t > 25'(FIX_ONE)) return FIX_ONE;
    else                      return fix_t'(t);
  endfunction

  function automatic fix_t hard_tanh(input fix_t v);
    if (v > FIX_ONE)       return FIX_ONE;
    else if (v < -FIX_ONE) return -FIX_ONE;
    else                   return v;
  endfunction

  always_comb begin
    for (int k = 0; k < HID; k++) begin
      xf[k] = fp16_to_fix(x[k]);
      hf[k] = fp16_to_fix(h[k]);
    end
    for (int g = 0; g < NGATE; g++) begin
      logic signed [47:0] ai, ah;
      ai = 48'(b_ih[g]) <<< FRAC;
      ah = 48'(b_hh[g]) <<< FRAC;
      for (int k = 0; k < HID; k++) begin
        ai += 48'(xf[k]) * 48'(w_ih[g][k]);
        ah += 48'(hf[k]) * 48'(w_hh[g][k]);
      end
      gi[g] = sat_fix(ai >>> WS);
      gh[g] = sat_fix(ah >>> WS);
    end
    for (int j = 0; j < HID; j++) begin
      fix_t r, z, n, hn;
      logic signed [47:0] t;
      r = hard_sig(sat_fix(48'(gi[j]) + 48'(gh[j])));
      z = hard_sig(sat_fix(48'(gi[HID + j]) + 48'(gh[HID + j])));
      t = (48'(r) * 48'(gh[2*HID + j])) >>> FRAC;
      n = hard_tanh(sat_fix(48'(gi[2*HID + j]) + t));
      t = (48'(z) * (48'(hf[j]) - 48'(n))) >>> FRAC;
      hn = sat_fix(48'(n) + t);
      h_new[j] = fix_to_fp16(hn);
    end
  end
endmodule
