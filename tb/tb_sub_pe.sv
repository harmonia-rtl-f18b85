// tb_sub_pe -- self-checking test of sub_pe.
// Random 32-lane dot products of 8-bit activation mantissas (sent as high then
// low nibble) with 4-bit magnitudes and random signs; the expected sum is
// computed here as sum((-1)^(sa^sw) * a * w).  Checks the sum, the exponent
// mux (Exp0 or Exp0+Exp1) and that the result appears exactly one cycle after
// the low-nibble beat.
module tb_sub_pe;
  import harmonia_pkg::*;
  localparam int L = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_hi = 0, in_first = 0, in_last = 0, use_w_exp = 0;
  logic [L-1:0][3:0] a_mag = '0, w_mag = '0;
  logic [L-1:0] a_sign = '0, w_sign = '0;
  logic [4:0] a_exp = '0, w_exp = '0;
  logic sum_valid, sum_first, sum_last;
  logic signed [17:0] sum_out;
  logic [5:0] exp_out;

  sub_pe #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] am [L];
  int ref_sum, ref_exp;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 300; t++) begin
      ref_sum = 0;
      use_w_exp = $urandom_range(0, 1);
      a_exp = 5'($urandom); w_exp = 5'($urandom);
      for (int i = 0; i < L; i++) begin
        am[i] = (t < 5) ? 8'hFF : 8'($urandom);
        w_mag[i] = (t < 5) ? 4'hF : 4'($urandom);
        a_sign[i] = (t < 5) ? 1'b0 : 1'($urandom);
        w_sign[i] = (t < 5) ? 1'b1 : 1'($urandom);
        ref_sum += ((a_sign[i] ^ w_sign[i]) ? -1 : 1) * int'(am[i]) * int'(w_mag[i]);
      end
      ref_exp = use_w_exp ? int'(a_exp) + int'(w_exp) : int'(a_exp);
      // high nibble
      @(negedge clk);
      in_valid = 1; in_hi = 1; in_first = (t % 3 == 0); in_last = (t % 3 == 2);
      for (int i = 0; i < L; i++) a_mag[i] = am[i][7:4];
      @(negedge clk);
      in_hi = 0;
      for (int i = 0; i < L; i++) a_mag[i] = am[i][3:0];
      @(negedge clk);
      in_valid = 0;
      // result must be valid now (one cycle after the low beat)
      checks++;
      if (!sum_valid || sum_out != 18'(ref_sum) || int'(exp_out) != ref_exp ||
          sum_first != (t % 3 == 0) || sum_last != (t % 3 == 2)) begin
        failures++;
        $display("FAIL t=%0d valid=%0b sum=%0d ref=%0d exp=%0d ref=%0d", t, sum_valid,
                 sum_out, ref_sum, exp_out, ref_exp);
      end
      @(negedge clk);
      checks++;
      if (sum_valid) begin
        failures++;
        $display("FAIL t=%0d: sum_valid longer than one cycle", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
