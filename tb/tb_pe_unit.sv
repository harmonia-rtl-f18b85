// tb_pe_unit -- self-checking test of one reconfigurable PE.
// Runs random dot products of 1..4 K steps (64 elements per step) in each of
// the three modes.  The stimulus is drawn as plain numbers (8-bit activation
// mantissas with signs and per-group exponents, INT4 weights with an FP16
// scale, 4- or 8-bit KV mantissas with signs and exponents), packed into the
// activation beats and the two bus words, and the PE's FP32 outputs are
// compared with a real-number dot product.  The tolerance scales with the sum
// of the group magnitudes, as the PE rounds toward zero in FP16.  It also
// checks the latency: the result of wrapper 0 appears 4 cycles after the last
// high-plane beat enters, wrapper 1's (and the fused M8M8 result) 5 cycles after.
module tb_pe_unit;
  import harmonia_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e      mode = M8W4;
  act_beat_t  act_in = '0, act_out;
  wbus_t      wbus_in = '0;
  logic       res_valid;
  logic [31:0] res;

  pe_unit dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Captured results.
  real    got_v [$];
  int     got_c [$];
  always @(posedge clk) if (rst_n && res_valid) begin
    got_v.push_back(f32_to_real(res));
    got_c.push_back(cyc);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 90; t++) begin
      int nk, last_hi;
      real refv [2], refs [2];
      mode = mode_e'(t % 3);
      nk = $urandom_range(1, 4);
      refv = '{0.0, 0.0};
      refs = '{0.0, 0.0};
      got_v.delete();
      got_c.delete();
      for (int k = 0; k < nk; k++) begin
        logic [63:0][7:0] am;
        logic [63:0]      as;
        logic [1:0][4:0]  ae;
        logic [WORD_W-1:0] wd [2];
        real gsum [2][2];
        // activations
        for (int i = 0; i < 64; i++) begin
          am[i] = 8'($urandom);
          as[i] = 1'($urandom);
        end
        for (int g = 0; g < 2; g++)
          ae[g] = 5'((mode == M8W4) ? $urandom_range(12, 18) : $urandom_range(15, 19));
        // weights / KV and reference
        gsum = '{'{0.0, 0.0}, '{0.0, 0.0}};
        wd[0] = '0;
        wd[1] = '0;
        if (mode == M8W4) begin
          for (int w = 0; w < 2; w++) begin
            logic [15:0] sc;
            sc = rand_f16(13, 16);
            wd[w][271:256] = sc;
            for (int i = 0; i < 64; i++) begin
              int wv, av;
              logic [3:0] nib;
              nib = 4'($urandom);
              if (nib == 4'h8) nib = 4'h9;        // symmetric INT4 range
              wd[w][4*i +: 4] = nib;
              wv = int'($signed(nib));
              av = as[i] ? -int'(am[i]) : int'(am[i]);
              gsum[w][i/32] += real'(av * wv) * pow2(int'(ae[i/32]) - 22);
            end
            for (int g = 0; g < 2; g++) begin
              refv[w] += gsum[w][g] * f16_to_real(sc);
              refs[w] += rabs(gsum[w][g] * f16_to_real(sc));
            end
          end
        end else if (mode == M8M4) begin
          for (int w = 0; w < 2; w++) begin
            logic [1:0][4:0] we;
            for (int g = 0; g < 2; g++) we[g] = 5'($urandom_range(15, 19));
            wd[w][320 +: 5] = we[0];
            wd[w][325 +: 5] = we[1];
            for (int i = 0; i < 64; i++) begin
              logic [3:0] m;
              logic       s;
              int av;
              m = 4'($urandom);
              s = 1'($urandom);
              wd[w][4*i +: 4] = m;
              wd[w][256 + i]  = s;
              av = as[i] ? -int'(am[i]) : int'(am[i]);
              gsum[w][i/32] += real'(av * (s ? -int'(m) : int'(m)))
                               * pow2(int'(ae[i/32]) + int'(we[i/32]) - 40);
            end
            for (int g = 0; g < 2; g++) begin
              refv[w] += gsum[w][g];
              refs[w] += rabs(gsum[w][g]);
            end
          end
        end else begin
          logic [1:0][4:0] we;
          for (int g = 0; g < 2; g++) we[g] = 5'($urandom_range(15, 18));
          for (int w = 0; w < 2; w++) begin
            wd[w][320 +: 5] = we[0];
            wd[w][325 +: 5] = we[1];
          end
          for (int i = 0; i < 64; i++) begin
            logic [7:0] m;
            logic       s;
            int av;
            m = 8'($urandom);
            s = 1'($urandom);
            wd[0][4*i +: 4] = m[7:4];
            wd[1][4*i +: 4] = m[3:0];
            wd[0][256 + i]  = s;
            wd[1][256 + i]  = s;
            av = as[i] ? -int'(am[i]) : int'(am[i]);
            gsum[0][i/32] += real'(av * (s ? -int'(m[7:4]) : int'(m[7:4]))) * 16.0
                             * pow2(int'(ae[i/32]) + int'(we[i/32]) - 44);
            gsum[1][i/32] += real'(av * (s ? -int'(m[3:0]) : int'(m[3:0])))
                             * pow2(int'(ae[i/32]) + int'(we[i/32]) - 44);
          end
          for (int w = 0; w < 2; w++)
            for (int g = 0; g < 2; g++) begin
              refv[0] += gsum[w][g];
              refs[0] += rabs(gsum[w][g]);
            end
        end
        // drive: high plane with wrapper 0's word, then low plane with wrapper 1's
        for (int b = 0; b < 2; b++) begin
          @(negedge clk);
          act_in.valid = 1'b1;
          act_in.hi    = (b == 0);
          act_in.first = (k == 0);
          act_in.last  = (k == nk - 1);
          act_in.exp   = ae;
          act_in.sign  = as;
          for (int i = 0; i < 64; i++) act_in.mag[i] = b == 0 ? am[i][7:4] : am[i][3:0];
          wbus_in.valid = 1'b1;
          wbus_in.sel   = 1'(b);
          wbus_in.word  = wd[b];
          if (b == 0) last_hi = cyc;
        end
      end
      @(negedge clk);
      act_in  = '0;
      wbus_in = '0;
      repeat (8) @(posedge clk);
      // compare
      checks++;
      if (got_v.size() != ((mode == M8M8) ? 1 : 2)) begin
        failures++;
        $display("FAIL t=%0d mode=%0d: %0d results", t, mode, got_v.size());
      end else begin
        for (int w = 0; w < got_v.size(); w++) begin
          int lat;
          checks += 2;
          if (!close(got_v[w], refv[w], refs[w], 4.0e-3)) begin
            failures++;
            $display("FAIL t=%0d mode=%0d w=%0d got=%g ref=%g", t, mode, w, got_v[w], refv[w]);
          end
          lat = (mode == M8M8) ? 5 : 4 + w;
          if (got_c[w] - last_hi != lat) begin
            failures++;
            $display("FAIL t=%0d latency %0d, expected %0d", t, got_c[w] - last_hi, lat);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
