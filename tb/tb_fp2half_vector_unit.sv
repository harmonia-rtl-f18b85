// tb_fp2half_vector_unit -- self-checking test of the FP32 -> FP16 vector unit.
// Random FP32 inputs across and beyond the FP16 range.  Expected per lane:
// values inside the FP16 normal range are truncated toward zero (result no
// larger in magnitude and less than one FP16 ulp away), values above 65504
// saturate to +-65504, values below 2^-14 flush to zero.  The result and the
// tag must appear exactly one cycle after the input.
module tb_fp2half_vector_unit;
  import tb_fp_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [3:0] in_tag = 0, out_tag;
  logic [L-1:0][31:0] in_data = '0;
  logic [L-1:0][15:0] out_data;

  fp2half_vector_unit #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ok(real x, real y);
    real ax, ay, ulp;
    ax = rabs(x);
    ay = rabs(y);
    if (ax >= 65504.0) return y == (x < 0 ? -65504.0 : 65504.0);
    if (ax < pow2(-14)) return y == 0.0;
    if ((x < 0) != (y < 0) && y != 0.0) return 0;
    ulp = pow2(-24);
    while (ulp * 2048.0 <= ax) ulp = ulp * 2.0;
    return ay <= ax && ax - ay < ulp;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      logic [L-1:0][31:0] d;
      logic [3:0] tg;
      for (int i = 0; i < L; i++) begin
        d[i][31]    = 1'($urandom);
        d[i][30:23] = 8'($urandom_range(127 - 20, 127 + 18));
        d[i][22:0]  = 23'($urandom);
      end
      tg = 4'($urandom);
      @(negedge clk);
      in_valid = 1; in_data = d; in_tag = tg;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != tg) failures++;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (!ok(f32_to_real(d[i]), f16_to_real(out_data[i]))) begin
          failures++;
          if (failures < 10)
            $display("FAIL in=%g out=%g", f32_to_real(d[i]), f16_to_real(out_data[i]));
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
