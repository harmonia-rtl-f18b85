// bfp_converter -- real-time FP16-to-BFP converter.
//
// Works in the two phases of BFP conversion.  In the scale phase (phase=0)
// it finds each group's largest exponent; in the conversion phase (phase=1)
// the same values are presented again and the shared aligner turns each into
// a sign and a mantissa aligned to that exponent.  Two scale paths exist:
//
//   temporal path (spatial=0, all activations except V): every lane is one
//     PE row whose 32 results arrive one per cycle; lane r has its own exponent
//     comparator cmp_r and Exp_max register, restarted by 'first'.
//   spatial path (spatial=1, V, grouped along tokens): the 8 lanes are 8
//     tokens of one channel; a 9-entry compare tree takes the 8 exponents plus
//     the running maximum of Exp_max register 'slot' (Tmp. max).  Four loops of
//     8 tokens give a 32-token group; fewer loops, or a lane_mask with zeros,
//     convert a residual V group on its current size (incremental grouping).
//
// Aligner (8 streams, shared by both paths): exp_diff = Exp_max - exp_i, the
// 11-bit significand (hidden bit + 10 fraction bits) is shifted right by
// exp_diff and the top 8 bits (or top 4 with man4=1) are kept: truncation.
// Inputs with exponent field 0 are flushed to zero.  Masked lanes output 0
// (sign, mantissa and exponent).
//
// Timing: one register stage; out_valid follows a conversion-phase beat by one
// cycle with the signs, mantissas and the shared exponent of every lane.
//
// From the paper (Fig. 14(c), Fig. 4): both paths, 9-entry compare tree,
// per-row comparators, Exp_max register files, broadcast to 8 streams, aligner
// with exponent offset and mantissa select, truncation.  Own choices: the
// two-pass protocol, slot addressing, FTZ, 4-bit truncation rule.
module bfp_converter #(
  parameter int unsigned LANES = 8,
  parameter int unsigned SLOTS = 32,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    phase,      // 0: scale generation, 1: conversion
  input  logic                    spatial,    // 1: V path
  input  logic [SW-1:0]           slot,
  input  logic                    first,
  input  logic [LANES-1:0]        lane_mask,
  input  logic                    man4,
  input  logic [LANES-1:0][15:0]  in_data,
  output logic                    out_valid,
  output logic [LANES-1:0]        out_sign,
  output logic [LANES-1:0][7:0]   out_man,
  output logic [LANES-1:0][4:0]   out_exp
);

  logic [4:0] t_max [LANES];   // temporal Exp_max register file
  logic [4:0] s_max [SLOTS];   // spatial Exp_max register file

  logic [LANES-1:0][4:0] e_in;
  logic [4:0]            tree_max;

  always_comb begin
    for (int i = 0; i < LANES; i++) e_in[i] = lane_mask[i] ? in_data[i][14:10] : 5'd0;
    // 9-entry compare: the running maximum plus the eight lanes.
    tree_max = first ? 5'd0 : s_max[slot];
    for (int i = 0; i < LANES; i++) if (e_in[i] > tree_max) tree_max = e_in[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++) t_max[i] <= '0;
      for (int s = 0; s < SLOTS; s++) s_max[s] <= '0;
    end else if (in_valid && !phase) begin
      if (spatial) s_max[slot] <= tree_max;
      else
        for (int i = 0; i < LANES; i++)
          if (lane_mask[i])
            t_max[i] <= (first || e_in[i] > t_max[i]) ? e_in[i] : t_max[i];
    end
  end

  // Aligner.
  logic [LANES-1:0][4:0]  emax;
  logic [LANES-1:0][7:0]  man_c;
  logic [LANES-1:0]       sgn_c;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic [10:0] sig, sh;
      logic [4:0]  diff;
      emax[i] = spatial ? s_max[slot] : t_max[i];
      sig     = (e_in[i] == 5'd0) ? 11'd0 : {1'b1, in_data[i][9:0]};
      diff    = emax[i] - e_in[i];                 // exponent offset
      sh      = (diff > 5'd10) ? 11'd0 : (sig >> diff);
      man_c[i] = man4 ? {4'd0, sh[10:7]} : sh[10:3]; // mantissa select
      sgn_c[i] = lane_mask[i] & in_data[i][15] & (e_in[i] != 5'd0);
      if (!lane_mask[i]) man_c[i] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sign  <= '0;
      out_man   <= '0;
      out_exp   <= '0;
    end else begin
      out_valid <= in_valid && phase;
      if (in_valid && phase) begin
        out_sign <= sgn_c;
        out_man  <= man_c;
        for (int i = 0; i < LANES; i++) out_exp[i] <= lane_mask[i] ? emax[i] : 5'd0;
      end
    end
  end

  // In the conversion phase no element may exceed its group's maximum.
  for (genvar i = 0; i < LANES; i++) begin : g_chk
    a_below_max : assert property (@(posedge clk) disable iff (!rst_n)
                                   (in_valid && phase) |-> (e_in[i] <= emax[i]));
  end

endmodule
