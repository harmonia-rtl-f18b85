// halfsub_vector_unit -- applies the online per-channel K offset.
//
// Holds an offset table of CHANNELS FP16 entries.  'clear' zeroes it; each
// off_valid beat from the K-offset generator's Top-k FIFO writes one entry
// (channels not written keep offset 0).  A data beat carries LANES FP16 values
// of one channel (LANES tokens); with sub_en set every lane computes
// value - offset[channel] (eight FP16 subtractors), otherwise the beat passes
// unchanged, which is the bypass for non-K activations.  One register stage.
//
// From the paper: a HalfSub vector unit fed by the Top-k FIFO, and the rule
// that subtracting a per-channel offset from K leaves softmax unchanged.  Own
// choices: the table, truncating FP16 subtraction, the one-cycle latency.
module halfsub_vector_unit
  import harmonia_fp_pkg::*;
#(
  parameter int unsigned LANES    = 8,
  parameter int unsigned CHANNELS = 128,
  localparam int unsigned CW      = $clog2(CHANNELS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    off_valid,
  input  logic [CW-1:0]           off_ch,
  input  logic [15:0]             off_val,
  input  logic                    in_valid,
  input  logic                    sub_en,
  input  logic [CW-1:0]           in_ch,
  input  logic [LANES-1:0][15:0]  in_data,
  output logic                    out_valid,
  output logic [LANES-1:0][15:0]  out_data
);

  logic [15:0] table_q [CHANNELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CHANNELS; c++) table_q[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < CHANNELS; c++) table_q[c] <= '0;
    end else if (off_valid) begin
      table_q[off_ch] <= off_val;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++)
          out_data[i] <= sub_en ? f16_sub(in_data[i], table_q[in_ch]) : in_data[i];
    end
  end

endmodule
