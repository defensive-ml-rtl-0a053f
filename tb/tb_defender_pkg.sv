// tb_defender_pkg -- checks the Q.12 <-> FP16 conversions and the saturation
// helper of defender_pkg against the real-arithmetic reference, on corner
// values (zero, one LSB, rounding ties, largest magnitudes, Inf) and on
// random values.
module tb_defender_pkg;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic chk_pair(input fix_t v);
    fp16_t f, fr;
    fix_t  b;
    f  = fix_to_fp16(v);
    fr = from_q12(longint'(v));
    checks++;
    if (f !== fr) begin
      failures++;
      $display("fix_to_fp16(%0d) = %h, expected %h", v, f, fr);
    end
    b = fp16_to_fix(f);
    checks++;
    if (longint'(b) != to_q12(f)) begin
      failures++;
      $display("fp16_to_fix(%h) = %0d, expected %0d", f, b, to_q12(f));
    end
  endtask

  initial begin
    fix_t corner [] = '{0, 1, -1, 2, 4095, 4096, -4096, 4097, 2049, 2050, 2051,
                        6143, 6144, 8388607, -8388608, -8388607, 12'h7ff, 123456};
    foreach (corner[i]) chk_pair(corner[i]);
    for (int i = 0; i < 20000; i++) chk_pair(fix_t'($urandom));
    for (int i = 0; i < 4000; i++) chk_pair(fix_t'($signed($urandom_range(16384, 0)) - 8192));
    // FP16 special values saturate
    checks++;
    if (fp16_to_fix(16'h7C00) != FIX_MAX) failures++;
    checks++;
    if (fp16_to_fix(16'hFC00) != -FIX_MAX) failures++;
    checks++;
    if (fp16_to_fix(16'h0001) != 0) failures++;   // subnormal
    checks++;
    if (sat_fix(48'sd9000000) != FIX_MAX || sat_fix(-48'sd9000000) != FIX_MIN) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
