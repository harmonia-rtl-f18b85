// tb_weight_kv_dispatcher -- self-checking test of the weight/KV dispatcher
// with 4 columns.  A behavioural SRAM (one-cycle read latency) holds random
// column words.  For random base addresses and K-step counts it checks that
// the dispatcher reads 2*ksteps consecutive words, that every column bus
// carries exactly those words in order with sel alternating 0,1,0,1, that
// column c runs exactly 2c cycles behind column 0 (the skew that lines the
// weights up with the activations moving along the rows), and that column 0's
// first word appears 3 cycles after start.
module tb_weight_kv_dispatcher;
  import harmonia_pkg::*;
  localparam int C = 4, AW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, sram_re;
  logic [AW-1:0] base = 0, ksteps = 0, sram_raddr;
  logic [C-1:0][WORD_W-1:0] sram_rdata = '0;
  wbus_t [C-1:0] wbus;

  weight_kv_dispatcher #(.COLS(C), .AW(AW)) dut (.*);

  logic [C-1:0][WORD_W-1:0] mem [512];
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

  typedef struct { int c; logic sel; logic [WORD_W-1:0] w; } rec_t;
  rec_t seen [C][$];
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < C; c++)
      if (wbus[c].valid) seen[c].push_back('{cyc, wbus[c].sel, wbus[c].word});

  initial begin
    for (int a = 0; a < 512; a++)
      for (int c = 0; c < C; c++)
        for (int i = 0; i < WORD_W; i += 32) mem[a][c][i +: 32] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int s, n;
      for (int c = 0; c < C; c++) seen[c].delete();
      @(negedge clk);
      base   = AW'($urandom_range(0, 400));
      ksteps = AW'($urandom_range(1, 40));
      n      = 2 * int'(ksteps);
      start  = 1;
      s      = cyc;
      @(negedge clk);
      start  = 0;
      wait (!busy);
      repeat (2 * C + 6) @(posedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (seen[c].size() != n) begin
          failures++;
          $display("FAIL t=%0d col %0d: %0d words, expected %0d", t, c, seen[c].size(), n);
          continue;
        end
        for (int j = 0; j < n; j++) begin
          checks++;
          if (seen[c][j].w !== mem[9'(int'(base) + j)][c] || seen[c][j].sel != 1'(j % 2) ||
              seen[c][j].c != s + 3 + 2 * c + j) begin
            failures++;
            if (failures < 10)
              $display("FAIL t=%0d col %0d word %0d at %0d (start %0d)", t, c, j, seen[c][j].c, s);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
