// pe_array -- ROWS x COLS output-stationary array of reconfigurable PEs.
//
// Each row receives activation beats at column 0; every PE passes them to its
// right-hand neighbour two cycles later (systolic propagation along the row).
// Each column has one weight/KV bus broadcast to all its rows; the dispatcher
// delays column c by 2c cycles so that weights meet their activations.
// Because the rows are not skewed, all PEs of a column finish in the same
// cycle, and column c's two results (Psum0, Psum1) appear two cycles after
// column c-1's.  The results leave along each row: a chain of muxes passes the
// finished PE's value towards the array edge, giving one 8 x 32b beat per cycle
// (FP32 results C[r][2c] then C[r][2c+1]).  out_col tells which column it was.
//
// From the paper: 8 x 16 size, weights broadcast across rows, activations
// propagating across columns, output-stationary accumulation, column-by-column
// output order (Fig. 14(a)).  Own choice: the combinational output chain.
module pe_array
  import harmonia_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned COLS  = 16,
  parameter int unsigned LANES = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  mode_e                     mode,
  input  act_beat_t [ROWS-1:0]      act_in,
  input  wbus_t     [COLS-1:0]      wbus,
  output logic                      out_valid,
  output logic [$clog2(COLS)-1:0]   out_col,
  output logic [ROWS-1:0][31:0]     out_data
);

  act_beat_t         act [ROWS][COLS+1];
  logic              rv  [ROWS][COLS];
  logic [31:0]       rd  [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign act[r][0] = act_in[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe_unit #(.LANES(LANES)) u_pe (
        .clk, .rst_n, .mode,
        .act_in   (act[r][c]),
        .act_out  (act[r][c+1]),
        .wbus_in  (wbus[c]),
        .res_valid(rv[r][c]),
        .res      (rd[r][c])
      );
    end
  end

  // Row-wise output chain: the valid PE's result propagates to the edge.
  always_comb begin
    out_valid = 1'b0;
    out_col   = '0;
    for (int r = 0; r < ROWS; r++) begin
      out_data[r] = '0;
      for (int c = 0; c < COLS; c++)
        if (rv[r][c]) out_data[r] = rd[r][c];
    end
    for (int c = 0; c < COLS; c++)
      if (rv[0][c]) begin
        out_valid = 1'b1;
        out_col   = ($clog2(COLS))'(c);
      end
  end

  // The unused activation beats leaving the last column are not needed.
  logic unused_tail;
  always_comb begin
    unused_tail = 1'b0;
    for (int r = 0; r < ROWS; r++) unused_tail ^= ^act[r][COLS];
  end

  // All rows of a column finish together.
  for (genvar c = 0; c < COLS; c++) begin : g_chk
    logic [ROWS-1:0] col_v;
    for (genvar r = 0; r < ROWS; r++) begin : g_cv
      assign col_v[r] = rv[r][c];
    end
    a_col_sync : assert property (@(posedge clk) disable iff (!rst_n)
                                  (col_v == '0) || (col_v == '1));
  end

endmodule
