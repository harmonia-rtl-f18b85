// output_collector -- gathers the FP16 result stream of the PE array.
//
// Each input beat holds LANES FP16 results (one per PE row) of one array
// column output, arriving in output-channel order.  The collector writes the
// beats to consecutive Temporary SRAM addresses from wr_base (restarted by
// 'start') and counts them.  When k_route is set (K activations of the
// initial window) it also forwards each beat, tagged with its channel
// ch_base + beat index, to the K-offset generator; k_first marks the first
// visit of the window's channels so the generator restarts their maxima.
// Zero-latency: the write and the forward happen in the beat's cycle, so the
// write data and the forwarded data are the input beat's wires, unregistered.
//
// From the paper: the block's name and position (between the FP2Half unit and
// the Temporary SRAM / K-offset generator).  Everything else is this design's.
module output_collector #(
  parameter int unsigned LANES = 8,
  parameter int unsigned AW    = 9,
  parameter int unsigned CW    = 7
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [AW-1:0]           wr_base,
  input  logic [CW-1:0]           ch_base,
  input  logic                    k_route,
  input  logic                    k_first,
  input  logic                    in_valid,
  input  logic [LANES-1:0][15:0]  in_data,
  output logic                    mem_we,
  output logic [AW-1:0]           mem_waddr,
  output logic [LANES*16-1:0]     mem_wdata,
  output logic                    k_valid,
  output logic                    k_first_o,
  output logic [CW-1:0]           k_ch,
  output logic [LANES-1:0][15:0]  k_data,
  output logic [AW:0]             count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        count <= '0;
    else if (start)    count <= '0;
    else if (in_valid) count <= count + 1'b1;
  end

  assign mem_we    = in_valid;
  assign mem_waddr = wr_base + count[AW-1:0];
  assign mem_wdata = in_data;
  assign k_valid   = in_valid && k_route;
  assign k_first_o = k_first;
  assign k_ch      = ch_base + CW'(count);
  assign k_data    = in_data;

endmodule
