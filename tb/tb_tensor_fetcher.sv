// tb_tensor_fetcher -- self-checking test of the tensor fetcher (DMA between
// external memory and the on-chip SRAMs) at reduced word widths.  A
// behavioural external memory accepts requests when its random 'ready' is
// high and returns read data in order 1..3 cycles later.  Random LOAD_W and
// LOAD_A commands must write ext[addr + i] to SRAM address base + i (the
// activation bank takes the low bits of the word); STORE commands must read
// the Output SRAM (one-cycle latency) and write it to ext[addr + i].  Each
// command must raise 'done' once, after its last word.
module tb_tensor_fetcher;
  import harmonia_pkg::*;
  localparam int EXT_W = 64, EAW = 10, W_W = 64, A_W = 32, O_W = 16, SAW = 6, LW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, done;
  tf_op_e cmd_op = TF_LOAD_W;
  logic [EAW-1:0] cmd_ext_addr = 0;
  logic [SAW-1:0] cmd_sram_addr = 0;
  logic [LW-1:0] cmd_len = 0;
  logic ext_req_valid, ext_req_ready = 0, ext_req_we, ext_rsp_valid;
  logic [EAW-1:0] ext_req_addr;
  logic [EXT_W-1:0] ext_req_wdata, ext_rsp_rdata;
  logic w_we, a_we, o_re;
  logic [SAW-1:0] w_waddr, a_waddr, o_raddr;
  logic [W_W-1:0] w_wdata;
  logic [A_W-1:0] a_wdata;
  logic [O_W-1:0] o_rdata = 0;

  tensor_fetcher #(.EXT_W(EXT_W), .EAW(EAW), .W_W(W_W), .A_W(A_W), .O_W(O_W),
                   .SAW(SAW), .LW(LW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural external memory with in-order, 1..3 cycle read latency
  logic [EXT_W-1:0] ext [1024];
  typedef struct { int due; logic [EXT_W-1:0] d; } rsp_t;
  rsp_t pend [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ext_req_valid && ext_req_ready) begin
      if (ext_req_we) ext[ext_req_addr] <= ext_req_wdata;
      else begin
        int due;
        due = cyc + $urandom_range(1, 3);
        if (pend.size() > 0 && pend[$].due >= due) due = pend[$].due + 1;
        pend.push_back('{due, ext[ext_req_addr]});
      end
    end
  end
  always @(negedge clk) begin
    ext_req_ready = 1'($urandom);
    ext_rsp_valid = 0;
    ext_rsp_rdata = '0;
    if (pend.size() > 0 && pend[0].due <= cyc) begin
      rsp_t r;
      r = pend.pop_front();
      ext_rsp_valid = 1;
      ext_rsp_rdata = r.d;
    end
  end

  // on-chip SRAM models
  logic [W_W-1:0] wmem [64];
  logic [A_W-1:0] amem [64];
  logic [O_W-1:0] omem [64];
  always @(posedge clk) begin
    if (w_we) wmem[w_waddr] <= w_wdata;
    if (a_we) amem[a_waddr] <= a_wdata;
    if (o_re) o_rdata <= omem[o_raddr];
  end
  int ndone = 0;
  always @(posedge clk) if (done) ndone <= ndone + 1;

  initial begin
    for (int a = 0; a < 1024; a++) ext[a] = {$urandom, $urandom};
    for (int a = 0; a < 64; a++) begin wmem[a] = '0; amem[a] = '0; omem[a] = 16'($urandom); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      tf_op_e op;
      int ea, sa, n, d0;
      logic [EXT_W-1:0] snap [1024];
      op = tf_op_e'(t % 3);
      ea = $urandom_range(0, 900);
      sa = $urandom_range(0, 63);
      n  = $urandom_range(1, 40);
      snap = ext;
      d0 = ndone;
      wait (cmd_ready);
      @(negedge clk);
      cmd_valid = 1; cmd_op = op; cmd_ext_addr = EAW'(ea); cmd_sram_addr = SAW'(sa);
      cmd_len = LW'(n);
      @(negedge clk);
      cmd_valid = 0;
      wait (done);
      repeat (2) @(posedge clk);
      checks++;
      if (ndone != d0 + 1) failures++;
      for (int i = 0; i < n; i++) begin
        checks++;
        case (op)
          TF_LOAD_W: if (wmem[6'(sa + i)] != snap[ea + i]) failures++;
          TF_LOAD_A: if (amem[6'(sa + i)] != snap[ea + i][A_W-1:0]) failures++;
          default:   if (ext[ea + i] != EXT_W'(omem[6'(sa + i)])) failures++;
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
