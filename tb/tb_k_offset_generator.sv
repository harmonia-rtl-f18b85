// tb_k_offset_generator -- self-checking test of the K-offset generator with
// 16 channels and top-4 selection.  Each round streams a 32-token window of K
// (4 beats of 8 tokens per channel, channels in random order, with cycles of
// enable low and junk inputs in between that must be ignored), then raises
// window_done.  The reference takes, per channel, the element of largest
// magnitude, sorts the channels by it (earlier channel first on ties) and
// expects (channel, max/2) for the top 4 from the FIFO in that order, with
// 'done' no later than CHANNELS + TOPK + 8 cycles after window_done.
module tb_k_offset_generator;
  import tb_fp_pkg::*;
  localparam int L = 8, CH = 16, K = 4, CW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable = 1, in_valid = 0, in_first = 0, window_done = 0;
  logic [CW-1:0] in_ch = 0, off_ch;
  logic [L-1:0][15:0] in_data = '0;
  logic off_valid, off_ready = 1, done;
  logic [15:0] off_val;

  k_offset_generator #(.LANES(L), .CHANNELS(CH), .TOPK(K)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got_ch [$];
  logic [15:0] got_v [$];
  int done_at;
  always @(posedge clk) if (rst_n) begin
    if (off_valid && off_ready) begin got_ch.push_back(int'(off_ch)); got_v.push_back(off_val); end
    if (done) done_at = cyc;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 25; t++) begin
      logic [15:0] mx [CH];
      int order [CH];
      int sel [K];
      int wd;
      got_ch.delete();
      got_v.delete();
      done_at = -1;
      for (int c = 0; c < CH; c++) order[c] = c;
      order.shuffle();
      for (int n = 0; n < CH; n++) begin
        int c;
        c = order[n];
        for (int b = 0; b < 4; b++) begin
          logic [L-1:0][15:0] d;
          for (int i = 0; i < L; i++) d[i] = rand_f16(2, ($urandom_range(0, 5) == 0) ? 28 : 18);
          for (int i = 0; i < L; i++)
            if ((b == 0 && i == 0) || d[i][14:0] > mx[c][14:0]) mx[c] = d[i];
          @(negedge clk);
          enable = 1; in_valid = 1; in_first = (b == 0); in_ch = CW'(c); in_data = d;
          if ($urandom_range(0, 7) == 0) begin
            // clock gated: junk must be ignored
            @(negedge clk);
            enable = 0; in_first = 1;
            in_data = {L{16'h7bff}};
            @(negedge clk);
            enable = 1; in_valid = 0;
          end
        end
      end
      @(negedge clk);
      in_valid = 0;
      window_done = 1;
      wd = cyc;
      off_ready = 1'(t % 2);          // sometimes hold the FIFO back
      @(negedge clk);
      window_done = 0;
      // reference selection
      for (int k = 0; k < K; k++) begin
        sel[k] = -1;
        for (int c = 0; c < CH; c++) begin
          bit taken;
          taken = 0;
          for (int j = 0; j < k; j++) if (sel[j] == c) taken = 1;
          if (!taken && (sel[k] < 0 || mx[c][14:0] > mx[sel[k]][14:0])) sel[k] = c;
        end
      end
      repeat (CH + K + 12) @(posedge clk);
      @(negedge clk);
      off_ready = 1;
      repeat (K + 2) @(posedge clk);
      checks += 2;
      if (done_at < 0 || done_at - wd > CH + K + 8) begin
        failures++;
        $display("FAIL t=%0d done at +%0d", t, done_at - wd);
      end
      if (got_ch.size() != K) begin
        failures++;
        $display("FAIL t=%0d: %0d offsets", t, got_ch.size());
        continue;
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (got_ch[k] != sel[k] || f16_to_real(got_v[k]) != f16_to_real(mx[sel[k]]) / 2.0) begin
          failures++;
          $display("FAIL t=%0d k=%0d ch %0d/%0d val %g/%g", t, k, got_ch[k], sel[k],
                   f16_to_real(got_v[k]), f16_to_real(mx[sel[k]]) / 2.0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
