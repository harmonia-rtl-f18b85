// fp2half_vector_unit -- LANES parallel FP32-to-FP16 converters.
//
// Turns the FP32 accumulator results that leave the PE array (one 8 x 32b beat
// per cycle) into FP16 for the Temporary SRAM and the BFP converter.  One
// register stage; the column tag travels along.  Conversion truncates the
// mantissa, flushes results below the FP16 normal range to zero and saturates
// above it (this design's choice; the paper gives only the unit's function).
module fp2half_vector_unit
  import harmonia_fp_pkg::*;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned TAG_W = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic [LANES-1:0][31:0]  in_data,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic [LANES-1:0][15:0]  out_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tag <= in_tag;
        for (int i = 0; i < LANES; i++) out_data[i] <= f32_to_f16(in_data[i]);
      end
    end
  end

endmodule
