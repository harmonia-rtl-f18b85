// tb_halfsub_vector_unit -- self-checking test of the HalfSub vector unit with
// 16 channels.  Loads random FP16 offsets for some channels (the others keep
// zero after 'clear'), then streams random FP16 beats with random channels and
// sub_en, and checks each lane one cycle later against x - offset[ch] computed
// in real arithmetic (truncated FP16: within one ulp, never larger in
// magnitude), or x unchanged when sub_en is low.
module tb_halfsub_vector_unit;
  import tb_fp_pkg::*;
  localparam int L = 8, CH = 16, CW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, off_valid = 0, in_valid = 0, sub_en = 0, out_valid;
  logic [CW-1:0] off_ch = 0, in_ch = 0;
  logic [15:0] off_val = 0;
  logic [L-1:0][15:0] in_data = '0, out_data;

  halfsub_vector_unit #(.LANES(L), .CHANNELS(CH)) dut (.*);

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
    if (ax < pow2(-14)) return ay < pow2(-14);
    if ((x < 0) != (y < 0) && y != 0.0) return 0;
    ulp = pow2(-24);
    while (ulp * 2048.0 <= ax) ulp = ulp * 2.0;
    return ay <= ax && ax - ay <= ulp;
  endfunction

  logic [15:0] offs [CH];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int c = 0; c < CH; c++) offs[c] = '0;
      for (int c = 0; c < CH; c++) if ($urandom_range(0, 2) != 0) begin
        @(negedge clk);
        off_valid = 1; off_ch = CW'(c); off_val = rand_f16(8, 22); offs[c] = off_val;
      end
      @(negedge clk);
      off_valid = 0;
      for (int n = 0; n < 300; n++) begin
        logic [L-1:0][15:0] d;
        logic [CW-1:0] ch;
        logic en;
        for (int i = 0; i < L; i++) d[i] = rand_f16(8, 22);
        ch = CW'($urandom_range(0, CH - 1));
        en = 1'($urandom);
        @(negedge clk);
        in_valid = 1; in_data = d; in_ch = ch; sub_en = en;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid) failures++;
        for (int i = 0; i < L; i++) begin
          checks++;
          if (en ? !ok(f16_to_real(d[i]) - f16_to_real(offs[ch]), f16_to_real(out_data[i]))
                 : out_data[i] != d[i]) begin
            failures++;
            if (failures < 10)
              $display("FAIL x=%g off=%g got=%g", f16_to_real(d[i]), f16_to_real(offs[ch]),
                       f16_to_real(out_data[i]));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
