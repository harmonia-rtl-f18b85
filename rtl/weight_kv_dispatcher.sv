// weight_kv_dispatcher -- streams Weight/KV SRAM words into the PE columns.
//
// On start it reads 2*ksteps consecutive words from base: for every K step a
// word for wrapper 0 (sel=0) and then one for wrapper 1 (sel=1).  Each word
// holds COLS slices of 256b + 74b, one per column; the slice of column c is
// delayed by 2c cycles (skew buffer) so that it meets the activation beat that
// reaches column c two cycles per column later, and is broadcast to every row
// of that column.  The SRAM has a one-cycle read latency; the column-0 slice
// leaves the dispatcher two cycles after the read is issued, in step with the
// activation dispatcher.
//
// From the paper: the 16 x (256b + 74b) bus and the cross-row broadcast.
// Own choices: address order (base + 2*step + sel), the 2-cycle skew, start/busy.
module weight_kv_dispatcher
  import harmonia_pkg::*;
#(
  parameter int unsigned COLS = 16,
  parameter int unsigned AW   = 9
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [AW-1:0]                 base,
  input  logic [AW-1:0]                 ksteps,
  output logic                          busy,
  // SRAM read port
  output logic                          sram_re,
  output logic [AW-1:0]                 sram_raddr,
  input  logic [COLS-1:0][WORD_W-1:0]   sram_rdata,
  // column buses
  output wbus_t [COLS-1:0]              wbus
);

  logic [AW:0] cnt, total;
  logic        rd_v, rd_sel, sel_q;
  logic        sel_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      total <= '0;
      rd_v  <= 1'b0;
      sel_q <= 1'b0;
    end else begin
      rd_v  <= sram_re;
      sel_q <= sel_d;
      if (start && !busy) begin
        busy  <= (ksteps != '0);
        cnt   <= '0;
        total <= {ksteps, 1'b0};
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (cnt + 1'b1 == total) busy <= 1'b0;
      end
    end
  end

  assign sram_re    = busy;
  assign sram_raddr = base + cnt[AW-1:0];
  assign sel_d      = cnt[0];
  assign rd_sel     = sel_q;

  // Skew buffers: column c is delayed by 2c cycles after the SRAM output
  // register stage.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    localparam int unsigned D = 2 * c;
    wbus_t line [D+1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) line[0] <= '0;
      else        line[0] <= '{valid: rd_v, sel: rd_sel, word: sram_rdata[c]};
    end
    for (genvar k = 1; k <= D; k++) begin : g_dly
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) line[k] <= '0;
        else        line[k] <= line[k-1];
      end
    end
    assign wbus[c]   = line[D];
  end

endmodule
