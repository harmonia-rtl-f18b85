// tb_activation_dispatcher -- self-checking test of the activation dispatcher
// with 3 rows.  A behavioural SRAM (one-cycle read latency) holds random row
// words.  For random bases and K-step counts it checks that every row gets
// 2*ksteps beats on consecutive cycles, 3 cycles after start, all rows in the
// same cycle (the rows are not skewed); that each beat unpacks its word into
// magnitudes [255:0], signs [319:256] and the two exponents [329:320]; that the
// beats alternate high plane / low plane; and that 'first' marks the first
// K step and 'last' the last one.
module tb_activation_dispatcher;
  import harmonia_pkg::*;
  localparam int R = 3, AW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, sram_re;
  logic [AW-1:0] base = 0, ksteps = 0, sram_raddr;
  logic [R-1:0][WORD_W-1:0] sram_rdata = '0;
  act_beat_t [R-1:0] act;

  activation_dispatcher #(.ROWS(R), .AW(AW)) dut (.*);

  logic [R-1:0][WORD_W-1:0] mem [512];
  always @(posedge clk) if (sram_re) sram_rdata <= mem[sram_raddr];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int c; act_beat_t b; } rec_t;
  rec_t seen [R][$];
  always @(posedge clk) if (rst_n)
    for (int r = 0; r < R; r++)
      if (act[r].valid) seen[r].push_back('{cyc, act[r]});

  initial begin
    for (int a = 0; a < 512; a++)
      for (int r = 0; r < R; r++)
        for (int i = 0; i < WORD_W; i += 32) mem[a][r][i +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int s, n;
      for (int r = 0; r < R; r++) seen[r].delete();
      @(negedge clk);
      base   = AW'($urandom_range(0, 400));
      ksteps = AW'($urandom_range(1, 40));
      n      = 2 * int'(ksteps);
      start  = 1;
      s      = cyc;
      @(negedge clk);
      start  = 0;
      wait (!busy);
      repeat (6) @(posedge clk);
      for (int r = 0; r < R; r++) begin
        checks++;
        if (seen[r].size() != n) begin
          failures++;
          $display("FAIL t=%0d row %0d: %0d beats", t, r, seen[r].size());
          continue;
        end
        for (int j = 0; j < n; j++) begin
          logic [WORD_W-1:0] w;
          act_beat_t b;
          w = mem[9'(int'(base) + j)][r];
          b = seen[r][j].b;
          checks++;
          if (seen[r][j].c != s + 3 + j || b.hi != (j % 2 == 0) ||
              b.first != (j / 2 == 0) || b.last != (j / 2 == n / 2 - 1) ||
              b.mag != w[255:0] || b.sign != w[319:256] || b.exp != w[329:320]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d row %0d beat %0d", t, r, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
