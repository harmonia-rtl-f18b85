// shared_accumulator -- FP accumulator shared by the two sub-PE wrappers of a PE.
//
// The two wrappers deliver their sub-PE results on alternate cycles (wrapper 1
// runs one cycle behind wrapper 0), so one set of FP operators serves both:
//   INT2Half0 / INT2Half1 turn the two sub-PE sums of the served wrapper
//   (Sub-PE0/Sub-PE2 and Sub-PE1/Sub-PE3, each a 32-element group with its own
//   exponent) into FP16; HalfAdd sums them (cross-group accumulation);
//   Half Mult scales by the wrapper's FP16 group weight factor S0/S1 in M8W4
//   and is bypassed in M8M4/M8M8; the FP32 Add accumulates into Psum Reg0 or
//   Psum Reg1, or starts from 0 on the first K step.
// In M8W4/M8M4 wrapper w owns Psum Reg w (two outputs per PE).  In M8M8 both
// wrappers work on one output: wrapper 0 has the high KV nibble, so its value
// is scaled by 2^4, and both add into Psum Reg0.
//
// INT2Half applies the BFP exponent bias: an 8-bit activation mantissa m with
// shared exponent E is worth m*2^(E-22); a 4-bit KV mantissa m*2^(E-18).
//
// Timing: one register stage.  psum_valid[w] pulses one cycle after the served
// wrapper's result that carried the 'last' tag; psum0/psum1 hold the results.
//
// From the paper (Fig. 13): INT2Half0/1 with their input muxes, HalfAdd, Half
// Mult with the S0/S1 mux, FP32 Add with a 0 mux, Psum0/Psum1 registers.
// Own choices: exponent bias encoding, truncating FP arithmetic, the 2^4
// fusion of the M8M8 halves, single pipeline stage.
module shared_accumulator
  import harmonia_pkg::*;
  import harmonia_fp_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  mode_e               mode,
  // wrapper 0 (Sub-PE0 = a, Sub-PE1 = b)
  input  logic                w0_valid,
  input  logic                w0_first,
  input  logic                w0_last,
  input  logic signed [17:0]  w0_sum_a,
  input  logic signed [17:0]  w0_sum_b,
  input  logic [EXP_W:0]      w0_exp_a,
  input  logic [EXP_W:0]      w0_exp_b,
  input  logic [15:0]         scale0,
  // wrapper 1 (Sub-PE2 = a, Sub-PE3 = b)
  input  logic                w1_valid,
  input  logic                w1_first,
  input  logic                w1_last,
  input  logic signed [17:0]  w1_sum_a,
  input  logic signed [17:0]  w1_sum_b,
  input  logic [EXP_W:0]      w1_exp_a,
  input  logic [EXP_W:0]      w1_exp_b,
  input  logic [15:0]         scale1,
  output logic [1:0]          psum_valid,
  output logic [31:0]         psum0,
  output logic [31:0]         psum1
);

  logic [31:0] psum_reg [2];

  // Served wrapper: the two never present a result in the same cycle.
  logic               sel;
  logic               v, first, last;
  logic signed [17:0] sa, sb;
  logic [EXP_W:0]     ea, eb;
  int                 bias;
  logic [15:0]        h0, h1, hsum, hscaled;
  logic               tgt;
  logic               first_eff;
  logic [31:0]        acc;

  always_comb begin
    sel   = w1_valid;
    v     = w0_valid | w1_valid;
    first = sel ? w1_first : w0_first;
    last  = sel ? w1_last  : w0_last;
    sa    = sel ? w1_sum_a : w0_sum_a;
    sb    = sel ? w1_sum_b : w0_sum_b;
    ea    = sel ? w1_exp_a : w0_exp_a;
    eb    = sel ? w1_exp_b : w0_exp_b;
    unique case (mode)
      M8W4:    bias = 22;
      M8M4:    bias = 40;
      default: bias = sel ? 44 : 40;   // M8M8: high-nibble half carries 2^4
    endcase
    h0      = int_to_f16(sa, int'(ea) - bias);
    h1      = int_to_f16(sb, int'(eb) - bias);
    hsum    = f16_add(h0, h1);
    hscaled = (mode == M8W4) ? f16_mul(hsum, sel ? scale1 : scale0) : hsum;
    tgt       = (mode == M8M8) ? 1'b0 : sel;
    first_eff = first && !(mode == M8M8 && sel);
    acc       = f32_add(first_eff ? 32'h0 : psum_reg[tgt], f16_to_f32(hscaled));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_reg[0] <= '0;
      psum_reg[1] <= '0;
      psum_valid  <= '0;
      psum0       <= '0;
      psum1       <= '0;
    end else begin
      psum_valid <= '0;
      if (v) begin
        psum_reg[tgt] <= acc;
        if (last && !(mode == M8M8 && !sel)) begin
          psum_valid[tgt] <= 1'b1;
          if (tgt) psum1 <= acc;
          else     psum0 <= acc;
        end
      end
    end
  end

  // The two wrappers are one cycle apart, so they never collide.
  a_no_collision : assert property (@(posedge clk) disable iff (!rst_n)
                                    !(w0_valid && w1_valid));

endmodule
