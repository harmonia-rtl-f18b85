// pe_unit -- the reconfigurable PE of Harmonia (Fig. 13 of the design).
//
// Two sub-PE wrappers, each with two sub-PEs (LANES lanes each, so a wrapper
// takes one 64-element bus word = two BFP groups), share one accumulator.
// Activation beats (one nibble plane per cycle, high plane first) enter
// wrapper 0 through Reg File0, move to wrapper 1 through Reg File1 one cycle
// later, and leave for the next PE one cycle after that: neighbouring columns
// are two cycles apart.  The column's weight/KV bus carries wrapper 0's word in
// the cycle of the high-plane beat and wrapper 1's word in the next cycle; each
// wrapper latches its own word.
//
// Modes (static during an operation):
//   M8W4  both wrappers use INT4 weights (two's complement in the word, turned
//         into sign + magnitude here) of two different output channels and
//         their FP16 group scales; results in Psum0 and Psum1.
//   M8M4  same with 4-bit-mantissa KV (sign, magnitude, shared exponent).
//   M8M8  wrapper 0 gets the high and wrapper 1 the low KV nibble of one
//         8-bit-mantissa KV word; one result in Psum0.
//
// Timing: for a high beat at act_in in cycle t, wrapper 0's result reaches the
// accumulator at t+3 and wrapper 1's at t+4; res_valid/res follow one cycle
// later for the operation's last K step.
//
// From the paper: two wrappers of two sub-PEs, dual register files, shared
// accumulator, the three modes and the high/low nibble split.  Own choices: the
// cycle timing, word layout and per-wrapper weight registers.
module pe_unit
  import harmonia_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  act_beat_t   act_in,
  output act_beat_t   act_out,
  input  wbus_t       wbus_in,
  output logic        res_valid,
  output logic [31:0] res
);

  act_beat_t           areg0, areg1;     // Reg File0 / Reg File1
  logic [WORD_W-1:0]   wreg [2];
  logic [15:0]         scale_q [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      areg0      <= '0;
      areg1      <= '0;
      wreg[0]    <= '0;
      wreg[1]    <= '0;
      scale_q[0] <= '0;
      scale_q[1] <= '0;
    end else begin
      areg0 <= act_in;
      areg1 <= areg0;
      if (wbus_in.valid) wreg[wbus_in.sel] <= wbus_in.word;
      // The group scale is held with the result it belongs to.
      if (areg0.valid && !areg0.hi) scale_q[0] <= wreg[0][271:256];
      if (areg1.valid && !areg1.hi) scale_q[1] <= wreg[1][271:256];
    end
  end

  assign act_out = areg1;

  // Decode each wrapper's weight/KV word into sign + magnitude per lane.
  logic [1:0][BEAT_ELEM-1:0][3:0]  wmag;
  logic [1:0][BEAT_ELEM-1:0]       wsgn;
  logic [1:0][1:0][EXP_W-1:0]      wexp;

  always_comb begin
    for (int w = 0; w < 2; w++) begin
      for (int i = 0; i < BEAT_ELEM; i++) begin
        logic [3:0] nib;
        nib = wreg[w][4*i +: 4];
        if (mode == M8W4) begin
          wsgn[w][i] = nib[3];
          wmag[w][i] = nib[3] ? 4'(-nib) : nib;
        end else begin
          wsgn[w][i] = wreg[w][256 + i];
          wmag[w][i] = nib;
        end
      end
      wexp[w][0] = wreg[w][320 +: EXP_W];
      wexp[w][1] = wreg[w][325 +: EXP_W];
    end
  end

  // Four sub-PEs: index 2*w + g, wrapper w, group g.
  logic              sv [4];
  logic signed [17:0] ss [4];
  logic [EXP_W:0]    se [4];
  logic              sf [4];
  logic              sl [4];

  for (genvar w = 0; w < 2; w++) begin : g_wrap
    for (genvar g = 0; g < 2; g++) begin : g_sub
      act_beat_t a;
      assign a = (w == 0) ? areg0 : areg1;
      sub_pe #(.LANES(LANES)) u_sub (
        .clk, .rst_n,
        .in_valid (a.valid),
        .in_hi    (a.hi),
        .in_first (a.first),
        .in_last  (a.last),
        .a_mag    (a.mag [g*BEAT_ELEM/2 +: LANES]),
        .a_sign   (a.sign[g*BEAT_ELEM/2 +: LANES]),
        .a_exp    (a.exp[g]),
        .w_mag    (wmag[w][g*BEAT_ELEM/2 +: LANES]),
        .w_sign   (wsgn[w][g*BEAT_ELEM/2 +: LANES]),
        .w_exp    (wexp[w][g]),
        .use_w_exp(mode != M8W4),
        .sum_valid(sv[2*w+g]),
        .sum_out  (ss[2*w+g]),
        .exp_out  (se[2*w+g]),
        .sum_first(sf[2*w+g]),
        .sum_last (sl[2*w+g])
      );
    end
  end

  logic [1:0]  pv;
  logic [31:0] p0, p1;

  shared_accumulator u_acc (
    .clk, .rst_n, .mode,
    .w0_valid(sv[0]), .w0_first(sf[0]), .w0_last(sl[0]),
    .w0_sum_a(ss[0]), .w0_sum_b(ss[1]), .w0_exp_a(se[0]), .w0_exp_b(se[1]),
    .scale0  (scale_q[0]),
    .w1_valid(sv[2]), .w1_first(sf[2]), .w1_last(sl[2]),
    .w1_sum_a(ss[2]), .w1_sum_b(ss[3]), .w1_exp_a(se[2]), .w1_exp_b(se[3]),
    .scale1  (scale_q[1]),
    .psum_valid(pv), .psum0(p0), .psum1(p1)
  );

  assign res_valid = |pv;
  assign res       = pv[1] ? p1 : p0;

endmodule
