// tb_output_collector -- self-checking test of the output collector.  Streams
// random FP16 beats with gaps and checks, in the same cycle, the Temporary
// SRAM write (address wr_base + beat index, data = beat), the forwarding to the
// K-offset generator only while k_route is set (channel = ch_base + index)
// and the beat count, which 'start' clears.
module tb_output_collector;
  localparam int L = 8, AW = 9, CW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, k_route = 0, k_first = 0, in_valid = 0;
  logic [AW-1:0] wr_base = 0;
  logic [CW-1:0] ch_base = 0;
  logic [L-1:0][15:0] in_data = '0;
  logic mem_we, k_valid, k_first_o;
  logic [AW-1:0] mem_waddr;
  logic [L*16-1:0] mem_wdata;
  logic [CW-1:0] k_ch;
  logic [L-1:0][15:0] k_data;
  logic [AW:0] count;

  output_collector #(.LANES(L), .AW(AW), .CW(CW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int n, idx;
      @(negedge clk);
      start = 1;
      wr_base = AW'($urandom);
      ch_base = CW'($urandom);
      k_route = 1'($urandom);
      k_first = 1'($urandom);
      @(negedge clk);
      start = 0;
      checks++;
      if (count != 0) failures++;
      n = $urandom_range(1, 64);
      idx = 0;
      while (idx < n) begin
        @(negedge clk);
        in_valid = 1'($urandom);
        for (int i = 0; i < L; i++) in_data[i] = 16'($urandom);
        #1;
        checks++;
        if (mem_we != in_valid || (in_valid && (mem_waddr != AW'(int'(wr_base) + idx) ||
            mem_wdata != in_data)) || k_valid != (in_valid && k_route) ||
            (k_valid && (k_ch != CW'(int'(ch_base) + idx) || k_data != in_data ||
            k_first_o != k_first))) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d beat %0d", t, idx);
        end
        if (in_valid) idx++;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (count != (AW+1)'(n)) begin
        failures++;
        $display("FAIL t=%0d count %0d, expected %0d", t, count, n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
