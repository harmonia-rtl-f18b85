// activation_dispatcher -- streams Activation SRAM words into the PE rows.
//
// On start it reads 2*ksteps consecutive words from base.  Each K step of 64
// activations per row is stored as two words: the high nibble plane (with the
// signs and the two shared exponents) and then the low nibble plane.  Word
// slices are unpacked into one act_beat_t per row, tagged with hi (even word),
// first (first K step) and last (last K step).  All rows are fed in the same
// cycle, two cycles after the read is issued (one SRAM cycle, one register).
//
// From the paper: the 8 x (256b + 74b) bus and systolic propagation across
// columns.  Own choices: the nibble-plane storage order, tags and start/busy.
module activation_dispatcher
  import harmonia_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned AW   = 9
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [AW-1:0]                 base,
  input  logic [AW-1:0]                 ksteps,
  output logic                          busy,
  output logic                          sram_re,
  output logic [AW-1:0]                 sram_raddr,
  input  logic [ROWS-1:0][WORD_W-1:0]   sram_rdata,
  output act_beat_t [ROWS-1:0]          act
);

  logic [AW:0] cnt, total;
  logic        rd_v, rd_hi, rd_first, rd_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= '0;
      total    <= '0;
      rd_v     <= 1'b0;
      rd_hi    <= 1'b0;
      rd_first <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      rd_v     <= sram_re;
      rd_hi    <= ~cnt[0];
      rd_first <= (cnt[AW:1] == '0);
      rd_last  <= (cnt[AW:1] == total[AW:1] - 1'b1);
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

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) act[r] <= '0;
      else begin
        act[r].valid <= rd_v;
        act[r].hi    <= rd_hi;
        act[r].first <= rd_first;
        act[r].last  <= rd_last;
        act[r].mag   <= sram_rdata[r][255:0];
        act[r].sign  <= sram_rdata[r][319:256];
        act[r].exp   <= sram_rdata[r][329:320];
      end
    end
  end

endmodule
