// k_offset_generator -- online channel-wise K-offset generator.
//
// Part of the online outlier smoothing of the K cache.  While the K values of
// the initial 32-token window leave the array (beats of LANES tokens of one
// channel), the Max Selector keeps, per channel, the element of largest
// magnitude (with its sign).  On window_done the per-channel maxima are
// streamed through the Max FIFO into the Top-k Selector, which keeps the TOPK
// largest in a sorted insertion list.  It then pushes (channel, max/2) for
// those TOPK channels into the Top-k FIFO, from which the HalfSub vector unit
// loads its offset table; all other channels keep offset 0.
//
// 'enable' stands for the clock gate: with enable low nothing changes state.
// Timing: one beat per cycle in; after window_done, CHANNELS cycles to drain
// the maxima, then TOPK pushes; done pulses when the last offset is queued.
//
// From the paper: the per-channel maximum |K| over the first 32 tokens, top-k
// selection, half of the maximum as offset, zero elsewhere, and the four
// sub-blocks Max Selector, Max FIFO, Top-k Selector, Top-k FIFO.  Own choices:
// TOPK, CHANNELS, FIFO depths, keeping the sign of the maximum, tie order.
module k_offset_generator
  import harmonia_fp_pkg::*;
#(
  parameter int unsigned LANES    = 8,
  parameter int unsigned CHANNELS = 128,
  parameter int unsigned TOPK     = 8,
  localparam int unsigned CW      = $clog2(CHANNELS),
  localparam int unsigned KW      = (TOPK > 1) ? $clog2(TOPK) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enable,
  input  logic                    in_valid,
  input  logic                    in_first,     // first beat of this channel
  input  logic [CW-1:0]           in_ch,
  input  logic [LANES-1:0][15:0]  in_data,
  input  logic                    window_done,
  output logic                    off_valid,
  input  logic                    off_ready,
  output logic [CW-1:0]           off_ch,
  output logic [15:0]             off_val,
  output logic                    done
);

  // ---------------- Max Selector ----------------
  logic [15:0] maxtab [CHANNELS];
  logic [15:0] beat_max;

  always_comb begin
    beat_max = in_data[0];
    for (int i = 1; i < LANES; i++)
      if (in_data[i][14:0] > beat_max[14:0]) beat_max = in_data[i];
  end

  typedef enum logic [1:0] {S_COLLECT, S_DRAIN, S_EMIT} state_e;
  state_e      state;
  logic [CW:0] drain_cnt, pop_cnt;
  logic [$clog2(TOPK+1)-1:0] emit_cnt;

  // ---------------- Max FIFO ----------------
  logic                 mf_in_valid, mf_in_ready, mf_out_valid, mf_out_ready;
  logic [CW+15:0]       mf_in_data, mf_out_data;

  assign mf_in_valid = enable && (state == S_DRAIN) && (drain_cnt < (CW+1)'(CHANNELS));
  assign mf_in_data  = {drain_cnt[CW-1:0], maxtab[drain_cnt[CW-1:0]]};

  sync_fifo #(.WIDTH(CW+16), .DEPTH(4)) u_max_fifo (
    .clk, .rst_n,
    .in_valid(mf_in_valid), .in_ready(mf_in_ready), .in_data(mf_in_data),
    .out_valid(mf_out_valid), .out_ready(mf_out_ready), .out_data(mf_out_data)
  );

  // ---------------- Top-k Selector ----------------
  typedef struct packed {
    logic          v;
    logic [CW-1:0] ch;
    logic [15:0]   val;
  } entry_t;

  entry_t list_q [TOPK];
  entry_t list_d [TOPK];
  entry_t cand;

  assign mf_out_ready = enable && (state == S_DRAIN);
  assign cand         = '{v: 1'b1, ch: mf_out_data[CW+15:16], val: mf_out_data[15:0]};

  function automatic logic beats(entry_t a, entry_t b);
    return !b.v || (a.val[14:0] > b.val[14:0]);
  endfunction

  always_comb begin
    for (int i = 0; i < TOPK; i++) begin
      if (!beats(cand, list_q[i]))            list_d[i] = list_q[i];
      else if (i == 0 || !beats(cand, list_q[i-1])) list_d[i] = cand;
      else                                    list_d[i] = list_q[i-1];
    end
  end

  // ---------------- Top-k FIFO ----------------
  logic          tf_in_valid, tf_in_ready;
  logic [CW+15:0] tf_in_data, tf_out_data;
  entry_t        emit_e;

  assign emit_e      = (32'(emit_cnt) < TOPK) ? list_q[emit_cnt[KW-1:0]] : '0;
  assign tf_in_valid = enable && (state == S_EMIT) && (32'(emit_cnt) < TOPK) && emit_e.v;
  assign tf_in_data  = {emit_e.ch, f16_half(emit_e.val)};

  sync_fifo #(.WIDTH(CW+16), .DEPTH(TOPK)) u_topk_fifo (
    .clk, .rst_n,
    .in_valid(tf_in_valid), .in_ready(tf_in_ready), .in_data(tf_in_data),
    .out_valid(off_valid), .out_ready(off_ready), .out_data(tf_out_data)
  );
  assign off_ch  = tf_out_data[CW+15:16];
  assign off_val = tf_out_data[15:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_COLLECT;
      drain_cnt <= '0;
      pop_cnt   <= '0;
      emit_cnt  <= '0;
      done      <= 1'b0;
      for (int c = 0; c < CHANNELS; c++) maxtab[c] <= '0;
      for (int i = 0; i < TOPK; i++) list_q[i] <= '0;
    end else if (enable) begin
      done <= 1'b0;
      unique case (state)
        S_COLLECT: begin
          if (in_valid &&
              (in_first || beat_max[14:0] > maxtab[in_ch][14:0]))
            maxtab[in_ch] <= beat_max;
          if (window_done) begin
            state     <= S_DRAIN;
            drain_cnt <= '0;
            pop_cnt   <= '0;
            for (int i = 0; i < TOPK; i++) list_q[i] <= '0;
          end
        end
        S_DRAIN: begin
          if (mf_in_valid && mf_in_ready) drain_cnt <= drain_cnt + 1'b1;
          if (mf_out_valid) begin
            for (int i = 0; i < TOPK; i++) list_q[i] <= list_d[i];
            pop_cnt <= pop_cnt + 1'b1;
            if (pop_cnt == (CW+1)'(CHANNELS - 1)) begin
              state    <= S_EMIT;
              emit_cnt <= '0;
            end
          end
        end
        default: begin // S_EMIT
          if (32'(emit_cnt) >= TOPK || !emit_e.v) begin
            state <= S_COLLECT;
            done  <= 1'b1;
          end else if (tf_in_ready) begin
            emit_cnt <= emit_cnt + 1'b1;
          end
        end
      endcase
    end
  end

endmodule
