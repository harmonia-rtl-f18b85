// fdgf_controller -- flexible data generation flow (FDGF) controller.
//
// Walks the tile loop nest of C = A x B (A: M x K activations, B: K x N
// weights) in one of two orders, selected by row_first:
//   column-first: for i < N/n { load weight tile i;
//                               for j < M/m { load activation tile j; compute C(i,j) } }
//   row-first:    for i < M/m { load activation tile i;
//                               for j < N/n { load weight tile j; compute C(j,i) } }
// n_wtiles = N/n and n_atiles = M/m.  Commands go out with valid/ready; the
// executor raises cmd_ready only when it can start the command, and the
// controller waits for cmd_done of a COMPUTE before it moves on.  It counts
// the tile loads it issues (off-chip traffic, in tiles): column-first gives
// N/n weight loads and (N/n)(M/m) activation loads, row-first the reverse,
// which is the EMA formula of the paper at tile granularity.
//
// From the paper (Fig. 15, Sec. IV-D): both loop nests and the runtime switch.
// Own choices: command encoding, handshake, the load counters.
module fdgf_controller
  import harmonia_pkg::*;
#(
  parameter int unsigned IW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          row_first,
  input  logic [IW-1:0] n_wtiles,
  input  logic [IW-1:0] n_atiles,
  output logic          busy,
  output logic          done,
  output logic          cmd_valid,
  input  logic          cmd_ready,
  output fdgf_op_e      cmd_op,
  output logic [IW-1:0] cmd_widx,
  output logic [IW-1:0] cmd_aidx,
  input  logic          cmd_done,
  output logic [15:0]   w_loads,
  output logic [15:0]   a_loads
);

  typedef enum logic [2:0] {S_IDLE, S_OUTER, S_INNER, S_COMP, S_WAIT} state_e;
  state_e        state;
  logic          rf;
  logic [IW-1:0] oi, ii, n_outer, n_inner;

  assign n_outer  = rf ? n_atiles : n_wtiles;
  assign n_inner  = rf ? n_wtiles : n_atiles;
  assign busy     = (state != S_IDLE);
  assign cmd_valid = (state == S_OUTER) || (state == S_INNER) || (state == S_COMP);

  always_comb begin
    cmd_op = CMD_COMPUTE;
    if (state == S_OUTER) cmd_op = rf ? CMD_LOAD_A : CMD_LOAD_W;
    if (state == S_INNER) cmd_op = rf ? CMD_LOAD_W : CMD_LOAD_A;
    cmd_widx = rf ? ii : oi;
    cmd_aidx = rf ? oi : ii;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rf      <= 1'b0;
      oi      <= '0;
      ii      <= '0;
      done    <= 1'b0;
      w_loads <= '0;
      a_loads <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rf      <= row_first;
          oi      <= '0;
          ii      <= '0;
          w_loads <= '0;
          a_loads <= '0;
          if (n_wtiles != '0 && n_atiles != '0) state <= S_OUTER;
          else done <= 1'b1;
        end
        S_OUTER: if (cmd_ready) begin
          if (rf) a_loads <= a_loads + 1'b1; else w_loads <= w_loads + 1'b1;
          state <= S_INNER;
        end
        S_INNER: if (cmd_ready) begin
          if (rf) w_loads <= w_loads + 1'b1; else a_loads <= a_loads + 1'b1;
          state <= S_COMP;
        end
        S_COMP: if (cmd_ready) state <= S_WAIT;
        default: if (cmd_done) begin   // S_WAIT
          if (ii + 1'b1 < n_inner) begin
            ii    <= ii + 1'b1;
            state <= S_INNER;
          end else if (oi + 1'b1 < n_outer) begin
            ii    <= '0;
            oi    <= oi + 1'b1;
            state <= S_OUTER;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      endcase
    end
  end

endmodule
