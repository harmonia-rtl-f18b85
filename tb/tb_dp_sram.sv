// tb_dp_sram -- self-checking test of the dual-port SRAM model at its default
// size (330-bit words, 512 deep, the weight/KV bank word).  Writes random words
// to random addresses while reading others, and checks every read against a
// shadow copy one cycle after the read was issued (one-cycle read latency);
// a read of the address being written returns the old word, and the read
// register holds its word while 're' is low.
module tb_dp_sram;
  localparam int W = 330, D = 512, AW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = '0, rdata;

  dp_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] shadow [D];
  function automatic logic [W-1:0] rword();
    logic [W-1:0] w;
    for (int i = 0; i < W; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = rword(); shadow[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] expv;
      @(negedge clk);
      re    = 1;
      raddr = AW'($urandom_range(0, D - 1));
      expv  = shadow[raddr];
      we    = 1'($urandom);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : AW'($urandom_range(0, D - 1));
      wdata = rword();
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expv) begin
        failures++;
        if (failures < 5) $display("FAIL read addr %0d", raddr);
      end
    end
    // rdata holds while re is low
    @(negedge clk);
    re = 0; we = 0;
    begin
      logic [W-1:0] hold;
      hold = rdata;
      for (int n = 0; n < 20; n++) begin
        @(negedge clk);
        raddr = AW'($urandom_range(0, D - 1));
        @(posedge clk);
        #1;
        checks++;
        if (rdata !== hold) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
