// tb_fdgf_controller -- self-checking test of the flexible dataflow controller.
// For random tile counts in both orders it acts as the tile sequencer (accepts
// commands after random delays and answers each COMPUTE with cmd_done some
// cycles later) and checks the command stream against a reference loop nest:
//   column-first (weight-stationary outer loop): LOAD_W w, then for every a:
//     LOAD_A a, COMPUTE (w, a);
//   row-first: LOAD_A a, then for every w: LOAD_W w, COMPUTE (w, a).
// It also checks the load counters: n_w + n_w*n_a (column-first) or
// n_a + n_w*n_a (row-first) tile loads, split between weights and activations.
module tb_fdgf_controller;
  import harmonia_pkg::*;
  localparam int IW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, row_first = 0, busy, done, cmd_valid, cmd_ready = 0, cmd_done = 0;
  logic [IW-1:0] n_wtiles = 0, n_atiles = 0, cmd_widx, cmd_aidx;
  fdgf_op_e cmd_op;
  logic [15:0] w_loads, a_loads;

  fdgf_controller #(.IW(IW)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { fdgf_op_e op; int w; int a; } cmd_t;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int nw, na, nexp;
      cmd_t expq [$];
      nw = $urandom_range(1, 6);
      na = $urandom_range(1, 6);
      expq.delete();
      if (t % 2 == 0) begin
        for (int w = 0; w < nw; w++) begin
          expq.push_back('{CMD_LOAD_W, w, 0});
          for (int a = 0; a < na; a++) begin
            expq.push_back('{CMD_LOAD_A, w, a});
            expq.push_back('{CMD_COMPUTE, w, a});
          end
        end
      end else begin
        for (int a = 0; a < na; a++) begin
          expq.push_back('{CMD_LOAD_A, 0, a});
          for (int w = 0; w < nw; w++) begin
            expq.push_back('{CMD_LOAD_W, w, a});
            expq.push_back('{CMD_COMPUTE, w, a});
          end
        end
      end
      nexp = expq.size();
      @(negedge clk);
      start = 1; row_first = 1'(t % 2); n_wtiles = IW'(nw); n_atiles = IW'(na);
      @(negedge clk);
      start = 0;
      while (busy) begin
        bit comp;
        comp = 0;
        @(negedge clk);
        cmd_ready = 1'($urandom);
        cmd_done  = 0;
        #1;
        if (cmd_valid && cmd_ready) begin
          cmd_t e;
          checks++;
          if (expq.size() == 0) begin
            failures++;
            $display("FAIL t=%0d: extra command", t);
          end else begin
            e = expq.pop_front();
            if (cmd_op != e.op || (e.op != CMD_LOAD_A && int'(cmd_widx) != e.w) ||
                (e.op != CMD_LOAD_W && int'(cmd_aidx) != e.a)) begin
              failures++;
              $display("FAIL t=%0d: cmd %s w%0d a%0d, expected %s w%0d a%0d", t, cmd_op.name(),
                       cmd_widx, cmd_aidx, e.op.name(), e.w, e.a);
            end
            comp = (e.op == CMD_COMPUTE);
          end
        end
        @(posedge clk);
        if (comp) begin
          @(negedge clk);
          cmd_ready = 0;
          repeat ($urandom_range(0, 4)) @(negedge clk);
          cmd_done = 1;
          @(negedge clk);
          cmd_done = 0;
        end
      end
      checks += 2;
      if (expq.size() != 0) begin
        failures++;
        $display("FAIL t=%0d: %0d commands missing of %0d", t, expq.size(), nexp);
      end
      if ((t % 2 == 0 && (w_loads != 16'(nw) || a_loads != 16'(nw * na))) ||
          (t % 2 == 1 && (a_loads != 16'(na) || w_loads != 16'(nw * na)))) begin
        failures++;
        $display("FAIL t=%0d: loads w=%0d a=%0d", t, w_loads, a_loads);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
