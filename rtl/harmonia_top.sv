// harmonia_top -- the Harmonia BFP accelerator.
//
// Data path (all blocks of the architecture, in flow order):
//   tensor_fetcher  -> Weight/KV SRAM (330 KB, 16 x 330b words)
//                   -> Activation SRAM (146 KB, 8 x 330b words)
//   weight_kv_dispatcher / activation_dispatcher -> 8 x 16 pe_array
//   pe_array (8 x 32b FP32 per cycle) -> fp2half_vector_unit -> output_collector
//   output_collector -> Temporary SRAM (8 KB) and, for K of the initial window,
//                    -> k_offset_generator -> (Top-k FIFO) -> halfsub_vector_unit
//   Temporary SRAM -> [direct | halfsub_vector_unit] MUX -> bfp_converter
//   bfp_converter -> Output SRAM (42 KB) -> tensor_fetcher -> external memory
// The fdgf_controller walks the tile loop nest (column-first or row-first) and
// the tile sequencer in this module executes its commands:
//   LOAD_W i : weight tile i  = w_sub 32-channel sub-tiles x 2*ksteps words
//   LOAD_A j : activation tile j = a_sub 8-token sub-tiles x 2*ksteps words
//   COMPUTE  : for every (token sub-tile, channel sub-tile) one array pass of
//              ksteps K steps (64 elements each); results to Temporary SRAM;
//              for K in the initial window, offsets are generated and loaded;
//              then every group is converted in two passes (scale, convert)
//              on the temporal path (per-token groups of one pass's outputs)
//              or the spatial path (V: groups of up to 32 tokens per channel,
//              with valid_rows masking a residual group), written to Output
//              SRAM and stored at o_base + (widx * n_atiles + aidx) * words.
//
// External memory word: EXT_W bits; tile (i) of weights is at
// w_base + i*w_sub*2*ksteps, of activations at a_base + j*a_sub*2*ksteps.
// Limits: a_sub*w_sub passes must fit the Temporary SRAM (16 passes of 32
// beats) and the output words the Output SRAM.
//
// Timing: the steps of a command do not overlap.  A pass starts when the
// previous pass's results are collected, conversion starts after the last
// pass, and the next command starts after the store.  Within a pass the array
// runs at its full rate (one 64-element K step per two cycles per PE, one
// output beat per cycle).
//
// Block structure and sizes follow the paper; the sequencer, the memory maps
// and all handshakes are this design's choices.  The external memory is not
// part of the design: its request/response port is brought out.
module harmonia_top
  import harmonia_pkg::*;
#(
  parameter int unsigned ROWS     = 8,
  parameter int unsigned COLS     = 16,
  parameter int unsigned LANES    = 32,
  parameter int unsigned W_DEPTH  = 512,
  parameter int unsigned A_DEPTH  = 453,
  parameter int unsigned O_DEPTH  = 3072,
  parameter int unsigned T_DEPTH  = 512,
  parameter int unsigned CHANNELS = 128,
  parameter int unsigned TOPK     = 8,
  parameter int unsigned EXT_W    = 5280,
  parameter int unsigned EAW      = 24,
  localparam int unsigned CW      = $clog2(CHANNELS),
  localparam int unsigned SAW     = 12,
  localparam int unsigned W_W     = COLS * WORD_W,
  localparam int unsigned A_W     = ROWS * WORD_W,
  localparam int unsigned O_W     = ROWS * 14
) (
  input  logic             clk,
  input  logic             rst_n,
  // run configuration (held stable while busy)
  input  logic             start,
  input  mode_e            mode,
  input  logic             row_first,
  input  logic [7:0]       n_wtiles,
  input  logic [7:0]       n_atiles,
  input  logic [8:0]       ksteps,
  input  logic [4:0]       w_sub,
  input  logic [4:0]       a_sub,
  input  logic [3:0]       valid_rows,   // tokens valid in the last sub-tile (1..8)
  input  logic [1:0]       act_kind,     // 0 other, 1 V (spatial path), 2 K
  input  logic             k_window,     // K tile is the initial 32-token window
  input  logic             man4,         // convert to 4-bit mantissas
  input  logic [EAW-1:0]   w_base,
  input  logic [EAW-1:0]   a_base,
  input  logic [EAW-1:0]   o_base,
  output logic             busy,
  output logic             done,
  output logic [15:0]      w_loads,
  output logic [15:0]      a_loads,
  // external memory port
  output logic             ext_req_valid,
  input  logic             ext_req_ready,
  output logic             ext_req_we,
  output logic [EAW-1:0]   ext_req_addr,
  output logic [EXT_W-1:0] ext_req_wdata,
  input  logic             ext_rsp_valid,
  input  logic [EXT_W-1:0] ext_rsp_rdata
);

  localparam logic [1:0] KIND_V = 2'd1;
  localparam logic [1:0] KIND_K = 2'd2;

  // ------------------------------------------------------------------
  // FDGF controller
  // ------------------------------------------------------------------
  logic       f_cmd_valid, f_cmd_ready, f_cmd_done;
  fdgf_op_e   f_cmd_op;
  logic [7:0] f_widx, f_aidx;
  logic       f_busy;

  fdgf_controller #(.IW(8)) u_fdgf (
    .clk, .rst_n, .start, .row_first, .n_wtiles, .n_atiles,
    .busy(f_busy), .done,
    .cmd_valid(f_cmd_valid), .cmd_ready(f_cmd_ready), .cmd_op(f_cmd_op),
    .cmd_widx(f_widx), .cmd_aidx(f_aidx), .cmd_done(f_cmd_done),
    .w_loads, .a_loads
  );
  assign busy = f_busy;

  // ------------------------------------------------------------------
  // Tensor fetcher and SRAMs
  // ------------------------------------------------------------------
  logic             tf_cmd_valid, tf_cmd_ready, tf_done;
  tf_op_e           tf_op;
  logic [EAW-1:0]   tf_ext_addr;
  logic [SAW-1:0]   tf_sram_addr;
  logic [12:0]      tf_len;
  logic             w_we, a_we, o_re_tf;
  logic [SAW-1:0]   w_waddr, a_waddr, o_raddr_tf;
  logic [W_W-1:0]   w_wdata;
  logic [A_W-1:0]   a_wdata;
  logic [O_W-1:0]   o_rdata;

  tensor_fetcher #(.EXT_W(EXT_W), .EAW(EAW), .W_W(W_W), .A_W(A_W), .O_W(O_W),
                   .SAW(SAW), .LW(13)) u_fetch (
    .clk, .rst_n,
    .cmd_valid(tf_cmd_valid), .cmd_ready(tf_cmd_ready), .cmd_op(tf_op),
    .cmd_ext_addr(tf_ext_addr), .cmd_sram_addr(tf_sram_addr), .cmd_len(tf_len),
    .done(tf_done),
    .ext_req_valid, .ext_req_ready, .ext_req_we, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_rdata,
    .w_we, .w_waddr, .w_wdata, .a_we, .a_waddr, .a_wdata,
    .o_re(o_re_tf), .o_raddr(o_raddr_tf), .o_rdata
  );

  localparam int unsigned WAW = $clog2(W_DEPTH);
  localparam int unsigned AAW = $clog2(A_DEPTH);
  localparam int unsigned OAW = $clog2(O_DEPTH);
  localparam int unsigned TAW = $clog2(T_DEPTH);

  logic             wd_re, ad_re;
  logic [WAW-1:0]   wd_raddr;
  logic [AAW-1:0]   ad_raddr;
  logic [W_W-1:0]   w_rdata;
  logic [A_W-1:0]   a_rdata;

  dp_sram #(.WIDTH(W_W), .DEPTH(W_DEPTH)) u_wkv_sram (
    .clk, .rst_n, .we(w_we), .waddr(w_waddr[WAW-1:0]), .wdata(w_wdata),
    .re(wd_re), .raddr(wd_raddr), .rdata(w_rdata)
  );
  dp_sram #(.WIDTH(A_W), .DEPTH(A_DEPTH)) u_act_sram (
    .clk, .rst_n, .we(a_we), .waddr(a_waddr[AAW-1:0]), .wdata(a_wdata),
    .re(ad_re), .raddr(ad_raddr), .rdata(a_rdata)
  );

  // ------------------------------------------------------------------
  // Dispatchers and PE array
  // ------------------------------------------------------------------
  logic                 disp_start, wd_busy, ad_busy;
  logic [WAW-1:0]       wd_base;
  logic [AAW-1:0]       ad_base;
  wbus_t [COLS-1:0]     wbus;
  act_beat_t [ROWS-1:0] act;

  weight_kv_dispatcher #(.COLS(COLS), .AW(WAW)) u_wdisp (
    .clk, .rst_n, .start(disp_start), .base(wd_base), .ksteps(WAW'(ksteps)),
    .busy(wd_busy), .sram_re(wd_re), .sram_raddr(wd_raddr), .sram_rdata(w_rdata),
    .wbus
  );
  activation_dispatcher #(.ROWS(ROWS), .AW(AAW)) u_adisp (
    .clk, .rst_n, .start(disp_start), .base(ad_base), .ksteps(AAW'(ksteps)),
    .busy(ad_busy), .sram_re(ad_re), .sram_raddr(ad_raddr), .sram_rdata(a_rdata),
    .act
  );

  logic                        arr_valid;
  logic [$clog2(COLS)-1:0]     arr_col;
  logic [ROWS-1:0][31:0]       arr_data;

  pe_array #(.ROWS(ROWS), .COLS(COLS), .LANES(LANES)) u_array (
    .clk, .rst_n, .mode, .act_in(act), .wbus,
    .out_valid(arr_valid), .out_col(arr_col), .out_data(arr_data)
  );

  // ------------------------------------------------------------------
  // FP2Half, output collector, Temporary SRAM, K-offset generator
  // ------------------------------------------------------------------
  logic                     h_valid;
  logic [$clog2(COLS)-1:0]  h_col;
  logic [ROWS-1:0][15:0]    h_data;

  fp2half_vector_unit #(.LANES(ROWS), .TAG_W($clog2(COLS))) u_fp2half (
    .clk, .rst_n, .in_valid(arr_valid), .in_tag(arr_col), .in_data(arr_data),
    .out_valid(h_valid), .out_tag(h_col), .out_data(h_data)
  );

  logic                  col_start, k_route, k_first;
  logic [CW-1:0]         col_ch_base;
  logic                  t_we;
  logic [TAW-1:0]        t_waddr;
  logic [ROWS*16-1:0]    t_wdata;
  logic                  kg_in_valid, kg_in_first;
  logic [CW-1:0]         kg_in_ch;
  logic [ROWS-1:0][15:0] kg_in_data;
  logic [TAW:0]          col_count;

  output_collector #(.LANES(ROWS), .AW(TAW), .CW(CW)) u_collect (
    .clk, .rst_n, .start(col_start), .wr_base('0), .ch_base(col_ch_base),
    .k_route, .k_first, .in_valid(h_valid), .in_data(h_data),
    .mem_we(t_we), .mem_waddr(t_waddr), .mem_wdata(t_wdata),
    .k_valid(kg_in_valid), .k_first_o(kg_in_first), .k_ch(kg_in_ch),
    .k_data(kg_in_data), .count(col_count)
  );

  logic               t_re;
  logic [TAW-1:0]     t_raddr;
  logic [ROWS*16-1:0] t_rdata;

  dp_sram #(.WIDTH(ROWS*16), .DEPTH(T_DEPTH)) u_tmp_sram (
    .clk, .rst_n, .we(t_we), .waddr(t_waddr), .wdata(t_wdata),
    .re(t_re), .raddr(t_raddr), .rdata(t_rdata)
  );

  logic          kg_enable, kg_window_done, kg_done;
  logic          off_valid;
  logic [CW-1:0] off_ch;
  logic [15:0]   off_val;

  k_offset_generator #(.LANES(ROWS), .CHANNELS(CHANNELS), .TOPK(TOPK)) u_kgen (
    .clk, .rst_n, .enable(kg_enable),
    .in_valid(kg_in_valid), .in_first(kg_in_first), .in_ch(kg_in_ch), .in_data(kg_in_data),
    .window_done(kg_window_done),
    .off_valid, .off_ready(1'b1), .off_ch, .off_val, .done(kg_done)
  );

  // ------------------------------------------------------------------
  // HalfSub unit, converter input MUX, BFP converter, Output SRAM
  // ------------------------------------------------------------------
  logic                  hs_clear, hs_in_valid, hs_out_valid;
  logic [CW-1:0]         hs_ch;
  logic [ROWS-1:0][15:0] hs_out;
  logic                  use_hs;

  halfsub_vector_unit #(.LANES(ROWS), .CHANNELS(CHANNELS)) u_halfsub (
    .clk, .rst_n, .clear(hs_clear),
    .off_valid, .off_ch, .off_val,
    .in_valid(hs_in_valid), .sub_en(1'b1), .in_ch(hs_ch), .in_data(t_rdata),
    .out_valid(hs_out_valid), .out_data(hs_out)
  );

  // Read-side control travels with the data: stage 1 = SRAM output,
  // stage 2 = HalfSub output / direct-path register.
  typedef struct packed {
    logic            v;
    logic            phase;
    logic            first;
    logic [4:0]      slot;
    logic [ROWS-1:0] mask;
    logic [CW-1:0]   ch;
  } rdctl_t;
  rdctl_t                rd0, rd1, rd2;
  logic [ROWS-1:0][15:0] direct_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd1      <= '0;
      rd2      <= '0;
      direct_q <= '0;
    end else begin
      rd1      <= rd0;
      rd2      <= rd1;
      direct_q <= t_rdata;
    end
  end
  assign hs_in_valid = rd1.v && use_hs;

  logic [ROWS-1:0][15:0] conv_in;
  assign conv_in = use_hs ? hs_out : direct_q;     // the MUX of the block diagram

  logic                  cv_valid;
  logic [ROWS-1:0]       cv_sign;
  logic [ROWS-1:0][7:0]  cv_man;
  logic [ROWS-1:0][4:0]  cv_exp;

  bfp_converter #(.LANES(ROWS), .SLOTS(32)) u_conv (
    .clk, .rst_n, .in_valid(rd2.v), .phase(rd2.phase), .spatial(act_kind == KIND_V),
    .slot(rd2.slot), .first(rd2.first), .lane_mask(rd2.mask), .man4, .in_data(conv_in),
    .out_valid(cv_valid), .out_sign(cv_sign), .out_man(cv_man), .out_exp(cv_exp)
  );

  logic [OAW-1:0] o_waddr;
  logic           o_re;
  logic [OAW-1:0] o_raddr;

  dp_sram #(.WIDTH(O_W), .DEPTH(O_DEPTH)) u_out_sram (
    .clk, .rst_n, .we(cv_valid), .waddr(o_waddr), .wdata({cv_exp, cv_sign, cv_man}),
    .re(o_re), .raddr(o_raddr), .rdata(o_rdata)
  );
  assign o_re    = o_re_tf;
  assign o_raddr = o_raddr_tf[OAW-1:0];

  // ------------------------------------------------------------------
  // Tile sequencer
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    Q_IDLE, Q_LOAD, Q_PASS, Q_PASS_WAIT, Q_KGEN, Q_KWAIT, Q_CONV, Q_DRAIN,
    Q_STORE, Q_STORE_WAIT
  } seq_e;
  seq_e seq;

  logic [5:0]     beats;          // outputs per row per pass
  logic [4:0]     p_sa, p_sw;     // pass counters
  logic [4:0]     c_o, c_ck, c_q; // conversion counters
  logic [4:0]     c_osa, c_osw;   // token / channel sub-tile of pass c_o
  logic           c_ph;
  logic [5:0]     c_b;
  logic [4:0]     n_chunks, q_lim, q_rem;
  logic [9:0]     pass_words;
  logic [TAW:0]   pass_target;
  logic [12:0]    out_words;
  logic [7:0]     cur_w, cur_a;

  assign beats      = (mode == M8M8) ? 6'(COLS) : 6'(2 * COLS);
  assign pass_words = {ksteps, 1'b0};
  assign n_chunks   = (a_sub + 5'd3) >> 2;
  assign q_rem      = a_sub - 5'(c_ck * 4);
  assign q_lim      = (q_rem >= 5'd4) ? 5'd4 : q_rem;
  assign use_hs     = (act_kind == KIND_K);
  assign kg_enable  = (act_kind == KIND_K) && k_window;

  // Conversion read address and tags.
  logic [4:0] c_sa, c_pass;
  logic       last_row_sub;
  always_comb begin
    c_sa   = (act_kind == KIND_V) ? 5'(c_ck * 4 + c_q) : 5'd0;
    c_pass = (act_kind == KIND_V) ? 5'(c_sa * w_sub + c_o) : c_o;
    last_row_sub = (act_kind == KIND_V) ? (c_sa == a_sub - 1'b1)
                                        : (c_osa == a_sub - 1'b1);
    rd0 = '0;
    if (seq == Q_CONV) begin
      rd0.v     = 1'b1;
      rd0.phase = c_ph;
      rd0.first = (act_kind == KIND_V) ? (c_q == '0) : (c_b == '0);
      rd0.slot  = c_b[4:0];
      rd0.mask  = last_row_sub ? ROWS'((1 << valid_rows) - 1) : '1;
      // channel of the beat being read (K uses the temporal path: c_o is a pass)
      rd0.ch    = CW'(c_osw * beats + 11'(c_b));
    end
    t_re    = (seq == Q_CONV);
    t_raddr = TAW'(c_pass * beats + 11'(c_b));
  end
  assign hs_ch = rd1.ch;   // travels with the SRAM read data

  // Pass bookkeeping for the K-offset channel tags.
  assign col_ch_base = CW'(p_sw * beats) - CW'(pass_target - (TAW+1)'(beats));
  assign k_route     = kg_enable && (seq == Q_PASS_WAIT);
  assign k_first     = (p_sa == '0);

  always_comb begin
    tf_cmd_valid = 1'b0;
    tf_op        = TF_LOAD_W;
    tf_ext_addr  = '0;
    tf_sram_addr = '0;
    tf_len       = '0;
    if (seq == Q_IDLE && f_cmd_valid && f_cmd_op != CMD_COMPUTE) begin
      tf_cmd_valid = 1'b1;
      if (f_cmd_op == CMD_LOAD_W) begin
        tf_op       = TF_LOAD_W;
        tf_len      = 13'(w_sub * pass_words);
        tf_ext_addr = w_base + EAW'(f_widx) * EAW'(tf_len);
      end else begin
        tf_op       = TF_LOAD_A;
        tf_len      = 13'(a_sub * pass_words);
        tf_ext_addr = a_base + EAW'(f_aidx) * EAW'(tf_len);
      end
    end
    if (seq == Q_STORE) begin
      tf_cmd_valid = 1'b1;
      tf_op        = TF_STORE;
      tf_len       = out_words;
      tf_ext_addr  = o_base + (EAW'(cur_w) * EAW'(n_atiles) + EAW'(cur_a)) * EAW'(out_words);
    end
  end

  assign f_cmd_ready = (seq == Q_IDLE) &&
                       ((f_cmd_op == CMD_COMPUTE) ? 1'b1 : tf_cmd_ready);
  assign disp_start  = (seq == Q_PASS);
  assign wd_base     = WAW'(p_sw * pass_words);
  assign ad_base     = AAW'(p_sa * pass_words);
  assign col_start   = (seq == Q_IDLE);
  assign hs_clear    = (seq == Q_IDLE) && f_cmd_valid && f_cmd_op == CMD_COMPUTE && kg_enable;
  assign kg_window_done = (seq == Q_KGEN);

  logic last_b, last_q, last_ph, last_ck, last_o;
  always_comb begin
    last_b  = (c_b == beats - 1'b1);
    last_q  = (act_kind != KIND_V) || (c_q == q_lim - 1'b1);
    last_ph = c_ph;
    last_ck = (act_kind != KIND_V) || (c_ck == n_chunks - 1'b1);
    last_o  = (act_kind == KIND_V) ? (c_o == w_sub - 1'b1)
                                   : (c_o == 5'(a_sub * w_sub) - 1'b1);
  end

  logic [3:0] drain_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq        <= Q_IDLE;
      f_cmd_done <= 1'b0;
      p_sa       <= '0;
      p_sw       <= '0;
      c_o        <= '0;
      c_osa      <= '0;
      c_osw      <= '0;
      c_ck       <= '0;
      c_q        <= '0;
      c_ph       <= 1'b0;
      c_b        <= '0;
      pass_target <= '0;
      o_waddr    <= '0;
      out_words  <= '0;
      cur_w      <= '0;
      cur_a      <= '0;
      drain_cnt  <= '0;
    end else begin
      f_cmd_done <= 1'b0;
      if (cv_valid) o_waddr <= o_waddr + 1'b1;
      unique case (seq)
        Q_IDLE: if (f_cmd_valid && f_cmd_ready) begin
          if (f_cmd_op == CMD_COMPUTE) begin
            cur_w       <= f_widx;
            cur_a       <= f_aidx;
            p_sa        <= '0;
            p_sw        <= '0;
            pass_target <= (TAW+1)'(beats);
            seq         <= Q_PASS;
          end else seq <= Q_LOAD;
        end
        Q_LOAD: if (tf_done) begin
          f_cmd_done <= 1'b1;
          seq        <= Q_IDLE;
        end
        Q_PASS: seq <= Q_PASS_WAIT;
        Q_PASS_WAIT: if (col_count == pass_target) begin
          pass_target <= pass_target + (TAW+1)'(beats);
          if (p_sw + 1'b1 < w_sub) begin
            p_sw <= p_sw + 1'b1;
            seq  <= Q_PASS;
          end else if (p_sa + 1'b1 < a_sub) begin
            p_sw <= '0;
            p_sa <= p_sa + 1'b1;
            seq  <= Q_PASS;
          end else begin
            c_o <= '0; c_osa <= '0; c_osw <= '0;
            c_ck <= '0; c_q <= '0; c_ph <= 1'b0; c_b <= '0;
            o_waddr <= '0;
            seq <= kg_enable ? Q_KGEN : Q_CONV;
          end
        end
        Q_KGEN: seq <= Q_KWAIT;
        Q_KWAIT: if (kg_done) seq <= Q_CONV;
        Q_CONV: begin
          // innermost: q (tokens sub-tiles of a V chunk), then beat, phase,
          // chunk, outer (pass or channel sub-tile)
          if (!last_q) c_q <= c_q + 1'b1;
          else begin
            c_q <= '0;
            if (!last_b) c_b <= c_b + 1'b1;
            else begin
              c_b <= '0;
              if (!last_ph) c_ph <= 1'b1;
              else begin
                c_ph <= 1'b0;
                if (!last_ck) c_ck <= c_ck + 1'b1;
                else begin
                  c_ck <= '0;
                  if (!last_o) begin
                    c_o <= c_o + 1'b1;
                    if (c_osw + 1'b1 < w_sub) c_osw <= c_osw + 1'b1;
                    else begin
                      c_osw <= '0;
                      c_osa <= c_osa + 1'b1;
                    end
                  end else begin
                    seq       <= Q_DRAIN;
                    drain_cnt <= '0;
                  end
                end
              end
            end
          end
        end
        Q_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 4'd5) begin
            out_words <= 13'(o_waddr);
            seq       <= Q_STORE;
          end
        end
        Q_STORE: if (tf_cmd_ready) seq <= Q_STORE_WAIT;
        default: if (tf_done) begin   // Q_STORE_WAIT
          f_cmd_done <= 1'b1;
          seq        <= Q_IDLE;
        end
      endcase
    end
  end

endmodule
