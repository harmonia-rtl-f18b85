// tensor_fetcher -- DMA engine between external memory and the on-chip SRAMs.
//
// TF_LOAD_W / TF_LOAD_A read 'len' consecutive external words starting at
// ext_addr and write them to consecutive Weight/KV or Activation SRAM
// addresses starting at sram_addr (the low bits of each external word).
// TF_STORE reads 'len' Output SRAM words and writes them to external memory.
//
// External port: a request (valid/ready, we, addr, wdata) per word; read data
// return in order on rsp_valid/rsp_rdata, any number of cycles later.  The
// external word is EXT_W bits wide, the width of one Weight/KV SRAM word
// (5280 bits per cycle at 300 MHz is about 198 GB/s, below the 256 GB/s HBM2
// bandwidth the paper assumes).  cmd_ready is high when idle; done pulses when
// the last word has been written.  Loads are not buffered: the SRAM write data
// are the external read data, wired straight through.  A store registers the
// Output SRAM word and zero-extends it, so most external write bits are 0.
//
// From the paper: a tensor fetcher that loads INT4 weights and BFP activations
// from external memory and returns converted results.  The protocol, widths
// and the one-word-at-a-time store are this design's choices.
module tensor_fetcher
  import harmonia_pkg::*;
#(
  parameter int unsigned EXT_W  = 5280,
  parameter int unsigned EAW    = 24,
  parameter int unsigned W_W    = 5280,
  parameter int unsigned A_W    = 2640,
  parameter int unsigned O_W    = 112,
  parameter int unsigned SAW    = 12,
  parameter int unsigned LW     = 13
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  tf_op_e           cmd_op,
  input  logic [EAW-1:0]   cmd_ext_addr,
  input  logic [SAW-1:0]   cmd_sram_addr,
  input  logic [LW-1:0]    cmd_len,
  output logic             done,
  // external memory
  output logic             ext_req_valid,
  input  logic             ext_req_ready,
  output logic             ext_req_we,
  output logic [EAW-1:0]   ext_req_addr,
  output logic [EXT_W-1:0] ext_req_wdata,
  input  logic             ext_rsp_valid,
  input  logic [EXT_W-1:0] ext_rsp_rdata,
  // Weight/KV SRAM and Activation SRAM write ports
  output logic             w_we,
  output logic [SAW-1:0]   w_waddr,
  output logic [W_W-1:0]   w_wdata,
  output logic             a_we,
  output logic [SAW-1:0]   a_waddr,
  output logic [A_W-1:0]   a_wdata,
  // Output SRAM read port (one-cycle latency)
  output logic             o_re,
  output logic [SAW-1:0]   o_raddr,
  input  logic [O_W-1:0]   o_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WAIT, S_ST_WR} state_e;
  state_e         state;
  tf_op_e         op;
  logic [EAW-1:0] eaddr;
  logic [SAW-1:0] saddr;
  logic [LW-1:0]  len, req_cnt, rsp_cnt;
  logic [O_W-1:0] st_data;

  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    ext_req_valid = 1'b0;
    ext_req_we    = 1'b0;
    ext_req_addr  = eaddr + EAW'(req_cnt);
    ext_req_wdata = '0;
    if (state == S_LOAD && req_cnt < len) ext_req_valid = 1'b1;
    if (state == S_ST_WR) begin
      ext_req_valid = 1'b1;
      ext_req_we    = 1'b1;
      ext_req_wdata = EXT_W'(st_data);
    end
  end

  assign w_we    = (state == S_LOAD) && ext_rsp_valid && (op == TF_LOAD_W);
  assign a_we    = (state == S_LOAD) && ext_rsp_valid && (op == TF_LOAD_A);
  assign w_waddr = saddr + SAW'(rsp_cnt);
  assign a_waddr = saddr + SAW'(rsp_cnt);
  assign w_wdata = ext_rsp_rdata[W_W-1:0];
  assign a_wdata = ext_rsp_rdata[A_W-1:0];
  assign o_re    = (state == S_ST_RD);
  assign o_raddr = saddr + SAW'(req_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op      <= TF_LOAD_W;
      eaddr   <= '0;
      saddr   <= '0;
      len     <= '0;
      req_cnt <= '0;
      rsp_cnt <= '0;
      st_data <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          op      <= cmd_op;
          eaddr   <= cmd_ext_addr;
          saddr   <= cmd_sram_addr;
          len     <= cmd_len;
          req_cnt <= '0;
          rsp_cnt <= '0;
          if (cmd_len == '0)            done  <= 1'b1;
          else if (cmd_op == TF_STORE)  state <= S_ST_RD;
          else                          state <= S_LOAD;
        end
        S_LOAD: begin
          if (ext_req_valid && ext_req_ready) req_cnt <= req_cnt + 1'b1;
          if (ext_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt + 1'b1 == len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_ST_RD:   state <= S_ST_WAIT;
        S_ST_WAIT: begin
          st_data <= o_rdata;
          state   <= S_ST_WR;
        end
        default: if (ext_req_ready) begin  // S_ST_WR
          req_cnt <= req_cnt + 1'b1;
          if (req_cnt + 1'b1 == len) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_ST_RD;
        end
      endcase
    end
  end

endmodule
