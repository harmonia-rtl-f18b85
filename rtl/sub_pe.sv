// sub_pe -- one sub-PE of the reconfigurable PE unit.
//
// Computes the dot product of LANES activation mantissas (8 bits, fed as two
// 4-bit nibble planes on consecutive beats) with LANES 4-bit weight or KV
// magnitudes.  Per beat: every lane multiplies its two 4-bit magnitudes (Int4
// Mult), the XOR of the two sign bits turns the product into two's complement,
// and a log2(LANES)-level adder tree (5 levels for 32 lanes) sums the lanes.
// The high-nibble beat loads the Int18 accumulator; the low-nibble beat adds
// the tree output to the accumulator shifted left by 4, which yields the full
// 8-bit x 4-bit dot product.  In parallel an Int5 adder forms Exp0 + Exp1;
// a mux outputs it for BFP x BFP modes or Exp0 alone for BFP x INT4.
//
// Interface / timing: in_valid with in_hi=1 (high nibble) must be followed by
// a beat with in_hi=0 (low nibble).  sum_valid pulses in the cycle after the
// low beat, with sum_out, exp_out and the first/last tags of that beat.
//
// From the paper (Fig. 13): XOR sign, two's complement, Int4 multipliers,
// 5-level add tree, Int18 add with 4-bit left shift, Int5 exponent add with a
// mux.  Own choices: high nibble first, registered exponent, tag pass-through.
module sub_pe
  import harmonia_pkg::*;
#(
  parameter int unsigned LANES = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_hi,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [LANES-1:0][3:0]   a_mag,
  input  logic [LANES-1:0]        a_sign,
  input  logic [EXP_W-1:0]        a_exp,
  input  logic [LANES-1:0][3:0]   w_mag,
  input  logic [LANES-1:0]        w_sign,
  input  logic [EXP_W-1:0]        w_exp,
  input  logic                    use_w_exp,
  output logic                    sum_valid,
  output logic signed [17:0]      sum_out,
  output logic [EXP_W:0]          exp_out,
  output logic                    sum_first,
  output logic                    sum_last
);

  localparam int unsigned LEVELS = $clog2(LANES);

  // Lane products and the adder tree.
  logic signed [13:0] tree [LEVELS+1][LANES];
  logic signed [13:0] tree_sum;

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < LANES; i++)
        tree[l][i] = '0;
    for (int i = 0; i < LANES; i++) begin
      logic [7:0] p;
      p = 8'(a_mag[i]) * 8'(w_mag[i]);
      tree[0][i] = (a_sign[i] ^ w_sign[i]) ? -14'(signed'({6'd0, p}))
                                           :  14'(signed'({6'd0, p}));
    end
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (LANES >> l); i++)
        tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
    tree_sum = tree[LEVELS][0];
  end

  logic signed [17:0] acc;
  logic [EXP_W:0]     exp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      exp_q     <= '0;
      sum_valid <= 1'b0;
      sum_out   <= '0;
      exp_out   <= '0;
      sum_first <= 1'b0;
      sum_last  <= 1'b0;
    end else begin
      sum_valid <= 1'b0;
      if (in_valid) begin
        if (in_hi) begin
          // First beat: the mux selects 0, so the accumulator takes the tree.
          acc   <= 18'(tree_sum);
          exp_q <= use_w_exp ? ({1'b0, a_exp} + {1'b0, w_exp}) : {1'b0, a_exp};
        end else begin
          sum_out   <= (acc <<< 4) + 18'(tree_sum);
          exp_out   <= exp_q;
          sum_valid <= 1'b1;
          sum_first <= in_first;
          sum_last  <= in_last;
        end
      end
    end
  end

endmodule
