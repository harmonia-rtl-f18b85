// tb_shared_accumulator -- self-checking test of shared_accumulator.
// Feeds alternating wrapper results (as the PE does) for random K-step
// sequences in the three modes and compares Psum0/Psum1 with a real-number
// reference: sum over steps of (sa*2^(ea-bias) + sb*2^(eb-bias)) * scale, with
// the M8M8 high half weighted by 16.  Also checks that psum_valid rises exactly
// one cycle after the result carrying 'last'.
module tb_shared_accumulator;
  import harmonia_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e mode = M8W4;
  logic w0_valid = 0, w0_first = 0, w0_last = 0, w1_valid = 0, w1_first = 0, w1_last = 0;
  logic signed [17:0] w0_sum_a = 0, w0_sum_b = 0, w1_sum_a = 0, w1_sum_b = 0;
  logic [5:0] w0_exp_a = 0, w0_exp_b = 0, w1_exp_a = 0, w1_exp_b = 0;
  logic [15:0] scale0 = 0, scale1 = 0;
  logic [1:0] psum_valid;
  logic [31:0] psum0, psum1;

  shared_accumulator dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ref_v [2], ref_s [2];

  function automatic real term(int s, int e, int bias);
    real r;
    r = s;
    r = r * pow2(e - bias);
    return r;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int nsteps;
      mode   = mode_e'(t % 3);
      nsteps = $urandom_range(1, 6);
      ref_v[0] = 0; ref_v[1] = 0; ref_s[0] = 0; ref_s[1] = 0;
      for (int s = 0; s < nsteps; s++) begin
        for (int w = 0; w < 2; w++) begin
          logic signed [17:0] sa, sb;
          logic [5:0] ea, eb;
          logic [15:0] sc;
          int bias, tgt;
          real v;
          sa = 18'($signed($urandom_range(0, 200000)) - 100000);
          sb = 18'($signed($urandom_range(0, 200000)) - 100000);
          ea = (mode == M8W4) ? 6'($urandom_range(10, 17)) : 6'($urandom_range(28, 36));
          eb = (mode == M8W4) ? 6'($urandom_range(10, 17)) : 6'($urandom_range(28, 36));
          sc = {1'($urandom), 5'($urandom_range(11, 15)), 10'($urandom)};
          bias = (mode == M8W4) ? 22 : (mode == M8M4) ? 40 : ((w == 1) ? 44 : 40);
          v = term(int'(sa), int'(ea), bias) + term(int'(sb), int'(eb), bias);
          if (mode == M8W4) v = v * f16_to_real(sc);
          tgt = (mode == M8M8) ? 0 : w;
          ref_v[tgt] += v;
          ref_s[tgt] += rabs(term(int'(sa), int'(ea), bias)) + rabs(term(int'(sb), int'(eb), bias));
          if (mode == M8W4) ref_s[tgt] = ref_s[tgt] * 1.0;
          @(negedge clk);
          w0_valid = (w == 0); w1_valid = (w == 1);
          if (w == 0) begin
            w0_sum_a = sa; w0_sum_b = sb; w0_exp_a = ea; w0_exp_b = eb; scale0 = sc;
            w0_first = (s == 0); w0_last = (s == nsteps - 1);
          end else begin
            w1_sum_a = sa; w1_sum_b = sb; w1_exp_a = ea; w1_exp_b = eb; scale1 = sc;
            w1_first = (s == 0); w1_last = (s == nsteps - 1);
          end
          @(negedge clk);
          w0_valid = 0; w1_valid = 0;
          if (s == nsteps - 1 && !(mode == M8M8 && w == 0)) begin
            // psum_valid one cycle after the last result
            checks++;
            if (psum_valid != ((mode == M8M8) ? 2'b01 : (w == 0 ? 2'b01 : 2'b10))) begin
              failures++;
              $display("FAIL t=%0d psum_valid=%b", t, psum_valid);
            end else begin
              real got;
              int tgt2;
              tgt2 = (mode == M8M8) ? 0 : w;
              got = f32_to_real(tgt2 ? psum1 : psum0);
              checks++;
              if (!close(got, ref_v[tgt2], ref_s[tgt2] * ((mode == M8W4) ? 2.0 : 1.0), 0.01)) begin
                failures++;
                $display("FAIL t=%0d mode=%0d w=%0d got=%g ref=%g", t, mode, w, got, ref_v[tgt2]);
              end
            end
          end else begin
            checks++;
            if (psum_valid != 2'b00) begin
              failures++;
              $display("FAIL t=%0d early psum_valid", t);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
