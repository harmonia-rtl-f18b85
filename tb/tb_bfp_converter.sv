// tb_bfp_converter -- self-checking test of the FP16-to-BFP converter.
//  1. A directed vector with exponents 15, 12 and 20 in one group: the shared
//     exponent is 20 and the mantissas are shifted right by 5, 8 and 0 before
//     truncation to 8 bits.
//  2. Temporal path: 8 lanes, each a 32-element group arriving one element per
//     cycle, converted to 8-bit or 4-bit mantissas.
//  3. Spatial path (V): 32-token groups arriving as 4 beats of 8 tokens into
//     random slots, plus residual groups of fewer beats and masked lanes.
// The reference finds each group's largest exponent field and computes
// (1.fraction * 2^10) >> (Emax - e), keeping the top 8 (or 4) of the 11 bits.
// The result must appear one cycle after each conversion-phase beat.
module tb_bfp_converter;
  localparam int L = 8, S = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, phase = 0, spatial = 0, first = 0, man4 = 0, out_valid;
  logic [4:0] slot = 0;
  logic [L-1:0] lane_mask = '1, out_sign;
  logic [L-1:0][15:0] in_data = '0;
  logic [L-1:0][7:0] out_man;
  logic [L-1:0][4:0] out_exp;

  bfp_converter #(.LANES(L), .SLOTS(S)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] ref_man(logic [15:0] h, int emax, bit m4);
    int sig, d;
    if (h[14:10] == 0) return 0;
    sig = 1024 + int'(h[9:0]);
    d = emax - int'(h[14:10]);
    sig = (d > 10) ? 0 : sig >> d;
    return m4 ? 8'(sig >> 7) : 8'(sig >> 3);
  endfunction

  // Drive one beat; in phase 1 check the outputs one cycle later.
  task automatic beat(logic ph, logic sp, logic [4:0] sl, logic fi, logic [L-1:0] mk,
                      logic [L-1:0][15:0] d, logic [L-1:0][4:0] emax, logic m4);
    @(negedge clk);
    in_valid = 1; phase = ph; spatial = sp; slot = sl; first = fi; lane_mask = mk;
    in_data = d; man4 = m4;
    @(negedge clk);
    in_valid = 0;
    if (ph) begin
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < L; i++) begin
        logic [7:0] em;
        logic es;
        em = mk[i] ? ref_man(d[i], int'(emax[i]), m4) : 8'd0;
        es = mk[i] && d[i][15] && d[i][14:10] != 0;
        checks++;
        if (out_man[i] != em || out_sign[i] != es || out_exp[i] != (mk[i] ? emax[i] : 5'd0)) begin
          failures++;
          if (failures < 10)
            $display("FAIL lane %0d in=%h emax=%0d: man %b/%b sign %b/%b exp %0d", i, d[i],
                     emax[i], out_man[i], em, out_sign[i], es, out_exp[i]);
        end
      end
    end else begin
      checks++;
      if (out_valid) failures++;
    end
  endtask

  function automatic logic [15:0] rnd(int elo, int ehi);
    return {1'($urandom), 5'($urandom_range(elo, ehi)), 10'($urandom)};
  endfunction

  initial begin
    logic [L-1:0][15:0] d;
    logic [L-1:0][4:0]  em;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. directed: 1.25*2^0 (e=15), -1.5*2^-3 (e=12), 1.75*2^5 (e=20) on one slot
    d = '0;
    d[0] = {1'b0, 5'd15, 10'b0100000000};
    d[1] = {1'b1, 5'd12, 10'b1000000000};
    d[2] = {1'b0, 5'd20, 10'b1100000000};
    em = {L{5'd20}};
    beat(0, 1, 5'd3, 1, '1, d, em, 0);
    beat(1, 1, 5'd3, 0, '1, d, em, 0);
    checks++;
    if (out_man[0] != 8'b00000101 || out_man[1] != 8'b00000000 || out_man[2] != 8'b11100000)
      failures++;
    // 2. temporal path
    for (int t = 0; t < 20; t++) begin
      logic [L-1:0][15:0] g [32];
      logic m4;
      m4 = 1'(t % 2);
      em = '0;
      for (int k = 0; k < 32; k++)
        for (int i = 0; i < L; i++) begin
          g[k][i] = rnd(3 + i, 12 + i);
          if (g[k][i][14:10] > em[i]) em[i] = g[k][i][14:10];
        end
      for (int k = 0; k < 32; k++) beat(0, 0, 0, k == 0, '1, g[k], em, m4);
      for (int k = 0; k < 32; k++) beat(1, 0, 0, 0, '1, g[k], em, m4);
    end
    // 3. spatial path with residual groups and masked tokens
    for (int t = 0; t < 60; t++) begin
      logic [L-1:0][15:0] g [4];
      logic [4:0] sl;
      logic [L-1:0] mk;
      logic [4:0] m;
      int nb;
      logic m4;
      sl = 5'($urandom_range(0, S - 1));
      nb = (t % 3 == 0) ? $urandom_range(1, 4) : 4;
      mk = (t % 5 == 0) ? L'($urandom) | L'(1) : '1;
      m4 = 1'($urandom);
      m  = 0;
      for (int k = 0; k < nb; k++)
        for (int i = 0; i < L; i++) begin
          g[k][i] = rnd(1, 30);
          if ((k < nb - 1 || mk[i]) && g[k][i][14:10] > m) m = g[k][i][14:10];
        end
      em = {L{m}};
      for (int k = 0; k < nb; k++) beat(0, 1, sl, k == 0, (k == nb - 1) ? mk : '1, g[k], em, m4);
      // another slot in between must not disturb this one
      beat(0, 1, sl + 5'd1, 1, '1, g[0], em, m4);
      for (int k = 0; k < nb; k++) beat(1, 1, sl, 0, (k == nb - 1) ? mk : '1, g[k], em, m4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
