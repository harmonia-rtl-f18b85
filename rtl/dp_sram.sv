// dp_sram -- dual-port on-chip SRAM (one write port, one read port).
//
// Models the compiler-generated dual-port macros of the accelerator (the
// 330 KB Weight/KV SRAM, 146 KB Activation SRAM, 42 KB Output SRAM and 8 KB
// Temporary SRAM) as a synthesizable memory array.  A write and a read may
// happen in the same cycle; the read data appears one cycle after re, and a
// read of the address being written returns the old word.  Contents are not
// reset, like a real SRAM; the read register is.
//
// The capacities come from the paper; word widths, depths and the port
// protocol are this design's choice (depth = capacity / width).
module dp_sram #(
  parameter int unsigned WIDTH = 330,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

endmodule
