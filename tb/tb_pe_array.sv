// tb_pe_array -- self-checking test of the PE array at reduced size (3 x 4).
// All rows receive their activation beats in the same cycle; the testbench
// plays the weight dispatcher and delays column c's bus words by 2c cycles.
// Each run is a random M8W4 or M8M4 tile product of 1..3 K steps.  The
// outputs must leave the array as one beat per cycle in the order
// C[.][0], C[.][1], C[.][2], ... (column c gives output channels 2c and 2c+1),
// starting 4 cycles after the last high-plane beat, with every row's value
// matching a real-number dot product.
module tb_pe_array;
  import harmonia_pkg::*;
  import tb_fp_pkg::*;
  localparam int R = 3, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e                mode = M8W4;
  act_beat_t [R-1:0]    act_in = '0;
  wbus_t     [C-1:0]    wbus = '0;
  logic                 out_valid;
  logic [$clog2(C)-1:0] out_col;
  logic [R-1:0][31:0]   out_data;

  pe_array #(.ROWS(R), .COLS(C)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int c; int col; real v [R]; } obeat_t;
  obeat_t got [$];
  always @(posedge clk) if (rst_n && out_valid) begin
    obeat_t b;
    b.c = cyc;
    b.col = int'(out_col);
    for (int r = 0; r < R; r++) b.v[r] = f32_to_real(out_data[r]);
    got.push_back(b);
  end


  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int nk, last_hi, nb;
      real refv [R][2*C], refs [R][2*C];
      logic [WORD_W-1:0] wsched [C][8];
      act_beat_t         asched [R][8];
      mode = (t % 2) ? M8M4 : M8W4;
      nk = $urandom_range(1, 3);
      foreach (refv[r, j]) begin refv[r][j] = 0.0; refs[r][j] = 0.0; end
      got.delete();
      for (int k = 0; k < nk; k++) begin
        logic [R-1:0][63:0][7:0] am;
        logic [R-1:0][63:0]      as;
        logic [R-1:0][1:0][4:0]  ae;
        for (int r = 0; r < R; r++) begin
          for (int i = 0; i < 64; i++) begin am[r][i] = 8'($urandom); as[r][i] = 1'($urandom); end
          for (int g = 0; g < 2; g++) ae[r][g] = 5'($urandom_range(15, 18));
          for (int b = 0; b < 2; b++) begin
            asched[r][2*k+b] = '0;
            asched[r][2*k+b].valid = 1'b1;
            asched[r][2*k+b].hi    = (b == 0);
            asched[r][2*k+b].first = (k == 0);
            asched[r][2*k+b].last  = (k == nk - 1);
            asched[r][2*k+b].exp   = ae[r];
            asched[r][2*k+b].sign  = as[r];
            for (int i = 0; i < 64; i++)
              asched[r][2*k+b].mag[i] = (b == 0) ? am[r][i][7:4] : am[r][i][3:0];
          end
        end
        for (int c = 0; c < C; c++)
          for (int w = 0; w < 2; w++) begin
            logic [WORD_W-1:0] wd;
            logic [15:0] sc;
            logic [1:0][4:0] we;
            real gs [R][2];
            wd = '0;
            sc = rand_f16(13, 15);
            for (int g = 0; g < 2; g++) we[g] = 5'($urandom_range(15, 18));
            if (mode == M8W4) wd[271:256] = sc;
            else begin wd[320 +: 5] = we[0]; wd[325 +: 5] = we[1]; end
            foreach (gs[r, g]) gs[r][g] = 0.0;
            for (int i = 0; i < 64; i++) begin
              logic [3:0] nib;
              logic       s;
              int wv;
              nib = 4'($urandom);
              s   = 1'($urandom);
              if (mode == M8W4) begin
                if (nib == 4'h8) nib = 4'h7;
                wv = int'($signed(nib));
              end else begin
                wd[256 + i] = s;
                wv = s ? -int'(nib) : int'(nib);
              end
              wd[4*i +: 4] = nib;
              for (int r = 0; r < R; r++) begin
                int av;
                av = as[r][i] ? -int'(am[r][i]) : int'(am[r][i]);
                if (mode == M8W4)
                  gs[r][i/32] += real'(av * wv) * pow2(int'(ae[r][i/32]) - 22);
                else
                  gs[r][i/32] += real'(av * wv) * pow2(int'(ae[r][i/32]) + int'(we[i/32]) - 40);
              end
            end
            for (int r = 0; r < R; r++)
              for (int g = 0; g < 2; g++) begin
                real f;
                f = (mode == M8W4) ? f16_to_real(sc) : 1.0;
                refv[r][2*c+w] += gs[r][g] * f;
                refs[r][2*c+w] += rabs(gs[r][g] * f);
              end
            wsched[c][2*k+w] = wd;
          end
      end
      nb = 2 * nk;
      // drive: activations at cycle n, column c's word at cycle n + 2c
      for (int n = 0; n < nb + 2 * C; n++) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) act_in[r] = (n < nb) ? asched[r][n] : '0;
        for (int c = 0; c < C; c++) begin
          int m;
          m = n - 2 * c;
          wbus[c] = '0;
          if (m >= 0 && m < nb) begin
            wbus[c].valid = 1'b1;
            wbus[c].sel   = 1'(m % 2);
            wbus[c].word  = wsched[c][m];
          end
        end
        if (n == nb - 2) last_hi = cyc;
      end
      @(negedge clk);
      act_in = '0;
      wbus   = '0;
      repeat (6) @(posedge clk);
      checks++;
      if (got.size() != 2 * C) begin
        failures++;
        $display("FAIL t=%0d: %0d beats", t, got.size());
      end else begin
        for (int j = 0; j < 2 * C; j++) begin
          checks += 2;
          if (got[j].col != j / 2 || got[j].c - last_hi != 4 + j) begin
            failures++;
            $display("FAIL t=%0d beat %0d: col %0d at +%0d", t, j, got[j].col, got[j].c - last_hi);
          end
          for (int r = 0; r < R; r++)
            if (!close(got[j].v[r], refv[r][j], refs[r][j], 4.0e-3)) begin
              failures++;
              $display("FAIL t=%0d r=%0d j=%0d got=%g ref=%g", t, r, j, got[j].v[r], refv[r][j]);
            end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
