// tb_harmonia_top -- end-to-end test of the accelerator at reduced size
// (2 x 2 PE array, small SRAMs, 8 K channels with top-2 offsets).
//
// A behavioural external memory (random request stalls, in-order read data
// 1..3 cycles late) holds weight/KV and activation tiles in the layout the
// tile sequencer expects.  Each scenario starts the accelerator once and, when
// 'done' rises, compares every BFP word written back to external memory with a
// reference computed here:
//   1. real-number tile products (data chosen so every intermediate is exact in
//      FP16, hence the reference is exact, not a tolerance check),
//   2. for K: the per-channel maximum |K| over the window, top-k selection,
//      offset = max/2, subtraction,
//   3. BFP conversion along the output channels of each token (temporal path)
//      or along up to 32 tokens of each channel (spatial path, V), truncated
//      to 8 or 4 mantissa bits, masked tokens zero.
// Mechanisms counted (each must occur at least once): column-first and
// row-first loop order, the three PE modes, spatial (V) conversion, residual
// group (fewer token sub-tiles / masked tokens), K-offset generation, HalfSub
// with a non-zero offset, K-offset generator gated off while results stream,
// 4-bit and 8-bit conversion, external-memory stalls.
module tb_harmonia_top;
  import harmonia_pkg::*;
  import tb_fp_pkg::*;
  localparam int R = 2, C = 2, CH = 8, TK = 2, EXT_W = 660, EAW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, row_first = 0, k_window = 0, man4 = 0;
  mode_e mode = M8W4;
  logic [7:0] n_wtiles = 1, n_atiles = 1;
  logic [8:0] ksteps = 1;
  logic [4:0] w_sub = 1, a_sub = 1;
  logic [3:0] valid_rows = 4'(R);
  logic [1:0] act_kind = 0;
  logic [EAW-1:0] w_base = 0, a_base = 0, o_base = 0;
  logic busy, done;
  logic [15:0] w_loads, a_loads;
  logic ext_req_valid, ext_req_ready = 0, ext_req_we, ext_rsp_valid = 0;
  logic [EAW-1:0] ext_req_addr;
  logic [EXT_W-1:0] ext_req_wdata, ext_rsp_rdata = '0;

  harmonia_top #(.ROWS(R), .COLS(C), .W_DEPTH(64), .A_DEPTH(64), .O_DEPTH(256),
                 .T_DEPTH(64), .CHANNELS(CH), .TOPK(TK), .EXT_W(EXT_W), .EAW(EAW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- behavioural external memory ----------------
  logic [EXT_W-1:0] ext [int];
  typedef struct { int due; logic [EXT_W-1:0] d; } rsp_t;
  rsp_t pend [$];
  int cyc = 0, n_stall = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ext_req_valid && !ext_req_ready) n_stall++;
    if (ext_req_valid && ext_req_ready) begin
      if (ext_req_we) ext[int'(ext_req_addr)] = ext_req_wdata;
      else begin
        int due;
        due = cyc + $urandom_range(1, 3);
        if (pend.size() > 0 && pend[$].due >= due) due = pend[$].due + 1;
        pend.push_back('{due, ext.exists(int'(ext_req_addr)) ? ext[int'(ext_req_addr)] : '0});
      end
    end
  end
  always @(negedge clk) begin
    ext_req_ready = ($urandom_range(0, 3) != 0);
    ext_rsp_valid = 0;
    ext_rsp_rdata = '0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_t r;
      r = pend.pop_front();
      ext_rsp_valid = 1;
      ext_rsp_rdata = r.d;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_colfirst = 0, n_rowfirst = 0, n_mode [3] = '{0, 0, 0}, n_spatial = 0, n_resid = 0;
  int n_kgen = 0, n_hsub = 0, n_gated = 0, n_m4 = 0, n_m8 = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_kgen.done) n_kgen++;
    if (dut.hs_out_valid && dut.u_halfsub.table_q[dut.hs_ch] != 16'h0) n_hsub++;
    if (dut.h_valid && !dut.kg_enable) n_gated++;
  end

  // ---------------- reference helpers ----------------
  // exact real -> FP16 bits (the test data keep every value representable)
  function automatic logic [15:0] to_f16(real v);
    real a;
    int e;
    if (v == 0.0) return 16'h0;
    a = rabs(v);
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    return {v < 0.0, 5'(e + 15), 10'(int'((a / pow2(e) - 1.0) * 1024.0))};
  endfunction

  function automatic logic [7:0] bfp_man(logic [15:0] h, int emax, bit m4);
    int sig, d;
    if (h[14:10] == 0) return 0;
    sig = 1024 + int'(h[9:0]);
    d = emax - int'(h[14:10]);
    sig = (d > 10) ? 0 : sig >> d;
    return m4 ? 8'(sig >> 7) : 8'(sig >> 3);
  endfunction

  // tile data: act value [tile][token][k*64+i], weight value [tile][chan][k*64+i]
  real av [4][8][128];
  real wv [4][16][128];
  real offs [CH];

  task automatic build(int nw, int na, int ks, int ws, int as, int wbase, int abase);
    int beats;
    beats = (mode == M8M8) ? C : 2 * C;
    // activations: tile j, token sub-tile sa, row r, K step k, plane b
    for (int j = 0; j < na; j++)
      for (int sa = 0; sa < as; sa++)
        for (int k = 0; k < ks; k++) begin
          logic [R-1:0][WORD_W-1:0] hw, lw;
          for (int r = 0; r < R; r++) begin
            for (int g = 0; g < 2; g++) begin
              int e;
              e = $urandom_range(18, 22);
              hw[r][320 + 5*g +: 5] = 5'(e);
              lw[r][320 + 5*g +: 5] = 5'(e);
              for (int i = 32*g; i < 32*g + 32; i++) begin
                int v, m;
                logic s;
                v = $urandom_range(0, 2);
                s = 1'($urandom);
                m = v << (22 - e);
                hw[r][4*i +: 4] = 4'(m >> 4);
                lw[r][4*i +: 4] = 4'(m);
                hw[r][256 + i] = s;
                lw[r][256 + i] = s;
                av[j][sa*R + r][k*64 + i] = s ? -real'(v) : real'(v);
              end
            end
          end
          ext[abase + j*as*2*ks + sa*2*ks + 2*k]     = EXT_W'(hw);
          ext[abase + j*as*2*ks + sa*2*ks + 2*k + 1] = EXT_W'(lw);
        end
    // weights / KV: tile i, channel sub-tile sw, column c, K step k, wrapper w
    for (int t = 0; t < nw; t++)
      for (int sw = 0; sw < ws; sw++)
        for (int k = 0; k < ks; k++) begin
          logic [C-1:0][WORD_W-1:0] wd [2];
          wd[0] = '0;
          wd[1] = '0;
          for (int c = 0; c < C; c++) begin
            if (mode == M8M8) begin
              for (int g = 0; g < 2; g++) begin
                int e;
                e = ($urandom_range(0, 1) == 1) ? 18 : 22;
                wd[0][c][320 + 5*g +: 5] = 5'(e);
                wd[1][c][320 + 5*g +: 5] = 5'(e);
                for (int i = 32*g; i < 32*g + 32; i++) begin
                  int v, m;
                  logic s;
                  v = $urandom_range(0, 15);
                  s = 1'($urandom);
                  m = v << (22 - e);
                  wd[0][c][4*i +: 4] = 4'(m >> 4);
                  wd[1][c][4*i +: 4] = 4'(m);
                  wd[0][c][256 + i] = s;
                  wd[1][c][256 + i] = s;
                  wv[t][sw*beats + c][k*64 + i] = s ? -real'(v) : real'(v);
                end
              end
            end else begin
              for (int w = 0; w < 2; w++) begin
                int ch;
                real sc;
                ch = sw*beats + 2*c + w;
                if (mode == M8W4) begin
                  logic [15:0] sh;
                  sh = (($urandom_range(0, 2) == 0) ? 16'h3800 :
                        ($urandom_range(0, 1) == 0) ? 16'h3c00 : 16'h4000);
                  wd[w][c][271:256] = sh;
                  sc = f16_to_real(sh);
                  for (int i = 0; i < 64; i++) begin
                    int v;
                    v = $urandom_range(0, 4) - 2;
                    wd[w][c][4*i +: 4] = 4'(v);
                    wv[t][ch][k*64 + i] = real'(v) * sc;
                  end
                end else begin
                  for (int g = 0; g < 2; g++) begin
                    int e;
                    e = ($urandom_range(0, 1) == 1) ? 16 : 18;
                    wd[w][c][320 + 5*g +: 5] = 5'(e);
                    for (int i = 32*g; i < 32*g + 32; i++) begin
                      int v;
                      logic s;
                      v = $urandom_range(0, 2);
                      s = 1'($urandom);
                      wd[w][c][4*i +: 4] = 4'(v << (18 - e));
                      wd[w][c][256 + i] = s;
                      wv[t][ch][k*64 + i] = s ? -real'(v) : real'(v);
                    end
                  end
                end
              end
            end
          end
          for (int w = 0; w < 2; w++)
            ext[wbase + t*ws*2*ks + sw*2*ks + 2*k + w] = EXT_W'(wd[w]);
        end
  endtask

  // Run one scenario and check every stored output word.
  task automatic scenario(mode_e md, bit rf, int kind, bit kwin, bit m4, int nw, int na,
                          int ks, int ws, int as, int vr);
    int beats, nch, ntok, ob, wb, ab, t0;
    real y [4][4][8][CH];   // [wtile][atile][token][channel]
    mode = md;
    beats = (md == M8M8) ? C : 2 * C;
    nch = ws * beats;
    ntok = as * R;
    wb = 16; ab = 400; ob = 2000;
    build(nw, na, ks, ws, as, wb, ab);
    // products
    for (int t = 0; t < nw; t++)
      for (int j = 0; j < na; j++)
        for (int tok = 0; tok < ntok; tok++)
          for (int ch = 0; ch < nch; ch++) begin
            real s;
            s = 0.0;
            for (int e = 0; e < 64 * ks; e++) s += av[j][tok][e] * wv[t][ch][e];
            y[t][j][tok][ch] = s;
          end
    // K offsets of the window
    if (kind == 2 && kwin) begin
      real mx [CH];
      int sel [TK];
      for (int ch = 0; ch < CH; ch++) begin
        mx[ch] = 0.0;
        for (int tok = 0; tok < ntok; tok++)
          if (tok == 0 || rabs(y[0][0][tok][ch]) > rabs(mx[ch])) mx[ch] = y[0][0][tok][ch];
        offs[ch] = 0.0;
      end
      for (int k = 0; k < TK; k++) begin
        sel[k] = -1;
        for (int ch = 0; ch < CH; ch++) begin
          bit taken;
          taken = 0;
          for (int q = 0; q < k; q++) if (sel[q] == ch) taken = 1;
          if (!taken && (sel[k] < 0 || rabs(mx[ch]) > rabs(mx[sel[k]]))) sel[k] = ch;
        end
        offs[sel[k]] = mx[sel[k]] / 2.0;
      end
    end
    if (kind == 2)
      for (int t = 0; t < nw; t++)
        for (int j = 0; j < na; j++)
          for (int tok = 0; tok < ntok; tok++)
            for (int ch = 0; ch < nch; ch++) y[t][j][tok][ch] -= offs[ch];
    // start
    ext.delete(ob);
    @(negedge clk);
    row_first = rf; act_kind = 2'(kind); k_window = kwin; man4 = m4;
    n_wtiles = 8'(nw); n_atiles = 8'(na); ksteps = 9'(ks); w_sub = 5'(ws); a_sub = 5'(as);
    valid_rows = 4'(vr); w_base = EAW'(wb); a_base = EAW'(ab); o_base = EAW'(ob);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    $display("scenario mode=%0d rf=%0d kind=%0d kwin=%0d m4=%0d %0dx%0d tiles: %0d cycles",
             md, rf, kind, kwin, m4, nw, na, cyc - t0);
    if (rf) n_rowfirst++; else n_colfirst++;
    n_mode[int'(md)]++;
    if (kind == 1) n_spatial++;
    if (vr < R || (kind == 1 && as % 4 != 0)) n_resid++;
    if (m4) n_m4++; else n_m8++;
    checks++;
    if (w_loads != 16'(rf ? nw * na : nw) || a_loads != 16'(rf ? na : nw * na)) begin
      failures++;
      $display("FAIL load counts w=%0d a=%0d", w_loads, a_loads);
    end
    // expected output words
    for (int t = 0; t < nw; t++)
      for (int j = 0; j < na; j++) begin
        logic [R*14-1:0] exp_q [$];
        int base;
        if (kind != 1) begin
          for (int sa = 0; sa < as; sa++)
            for (int sw = 0; sw < ws; sw++) begin
              int emax [R];
              for (int r = 0; r < R; r++) begin
                emax[r] = 0;
                for (int b = 0; b < beats; b++)
                  if (int'(to_f16(y[t][j][sa*R + r][sw*beats + b])[14:10]) > emax[r])
                    emax[r] = int'(to_f16(y[t][j][sa*R + r][sw*beats + b])[14:10]);
              end
              for (int b = 0; b < beats; b++) begin
                logic [R-1:0][4:0] ee;
                logic [R-1:0] ss;
                logic [R-1:0][7:0] mm;
                for (int r = 0; r < R; r++) begin
                  logic [15:0] h;
                  bit on;
                  on = !(sa == as - 1 && r >= vr);
                  h = to_f16(y[t][j][sa*R + r][sw*beats + b]);
                  ee[r] = on ? 5'(emax[r]) : 5'd0;
                  ss[r] = on && h[15] && h[14:10] != 0;
                  mm[r] = on ? bfp_man(h, emax[r], m4) : 8'd0;
                end
                exp_q.push_back({ee, ss, mm});
              end
            end
        end else begin
          int nck;
          nck = (as + 3) / 4;
          for (int sw = 0; sw < ws; sw++)
            for (int ck = 0; ck < nck; ck++) begin
              int ql;
              ql = (as - 4*ck >= 4) ? 4 : as - 4*ck;
              for (int b = 0; b < beats; b++) begin
                int emax;
                emax = 0;
                for (int q = 0; q < ql; q++)
                  for (int r = 0; r < R; r++) begin
                    int sa;
                    sa = 4*ck + q;
                    if (!(sa == as - 1 && r >= vr) &&
                        int'(to_f16(y[t][j][sa*R + r][sw*beats + b])[14:10]) > emax)
                      emax = int'(to_f16(y[t][j][sa*R + r][sw*beats + b])[14:10]);
                  end
                for (int q = 0; q < ql; q++) begin
                  logic [R-1:0][4:0] ee;
                  logic [R-1:0] ss;
                  logic [R-1:0][7:0] mm;
                  for (int r = 0; r < R; r++) begin
                    logic [15:0] h;
                    bit on;
                    int sa;
                    sa = 4*ck + q;
                    on = !(sa == as - 1 && r >= vr);
                    h = to_f16(y[t][j][sa*R + r][sw*beats + b]);
                    ee[r] = on ? 5'(emax) : 5'd0;
                    ss[r] = on && h[15] && h[14:10] != 0;
                    mm[r] = on ? bfp_man(h, emax, m4) : 8'd0;
                  end
                  exp_q.push_back({ee, ss, mm});
                end
              end
            end
        end
        base = ob + (t * na + j) * exp_q.size();
        for (int n = 0; n < exp_q.size(); n++) begin
          logic [EXT_W-1:0] g;
          checks++;
          g = ext.exists(base + n) ? ext[base + n] : '1;
          if (g[R*14-1:0] !== exp_q[n]) begin
            failures++;
            if (failures < 12)
              $display("FAIL mode=%0d kind=%0d tile w%0d a%0d word %0d: got %h exp %h",
                       md, kind, t, j, n, g[R*14-1:0], exp_q[n]);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    //        mode  rf kind kwin m4 nw na ks ws as vr
    scenario(M8W4, 0, 0,   0,   0, 2, 2, 2, 2, 2, R);
    scenario(M8M4, 1, 0,   0,   1, 2, 2, 2, 2, 2, 1);
    scenario(M8M8, 0, 0,   0,   0, 1, 2, 1, 2, 1, R);
    scenario(M8W4, 1, 1,   0,   1, 1, 1, 2, 2, 3, 1);   // V, residual group
    scenario(M8W4, 0, 1,   0,   0, 1, 1, 1, 1, 4, R);   // V, full group
    scenario(M8W4, 0, 2,   1,   0, 1, 1, 2, 2, 4, R);   // K window: offsets
    scenario(M8W4, 0, 2,   0,   1, 1, 2, 1, 2, 2, R);   // K after window
    checks++;
    if (n_colfirst == 0 || n_rowfirst == 0 || n_mode[0] == 0 || n_mode[1] == 0 ||
        n_mode[2] == 0 || n_spatial == 0 || n_resid == 0 || n_kgen == 0 || n_hsub == 0 ||
        n_gated == 0 || n_m4 == 0 || n_m8 == 0 || n_stall == 0) failures++;
    $display("mechanisms: col-first %0d row-first %0d M8W4 %0d M8M4 %0d M8M8 %0d spatial %0d",
             n_colfirst, n_rowfirst, n_mode[0], n_mode[1], n_mode[2], n_spatial);
    $display("            residual %0d kgen %0d halfsub %0d gated %0d m4 %0d m8 %0d stalls %0d",
             n_resid, n_kgen, n_hsub, n_gated, n_m4, n_m8, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
