// Cluster DMA engine for one- and two-dimensional block transfers.
//
// A transfer copies reps+1 rows of len bytes, row r starting at
// src + r*src_stride and going to dst + r*dst_stride (reps = 0 is a plain 1D
// copy). Either direction is possible: system memory to scratchpad or
// scratchpad to system memory (to_ext). Data moves in 512-bit beats, one
// 64-byte line per beat, so addresses, lengths and strides must be
// multiples of 64 bytes.
//
// The engine has a read side and a write side decoupled by a beat FIFO.
// The read side issues a read whenever the FIFO has room for its response,
// counting reads still in flight, so it tolerates any read latency of the
// system port (ext_rvalid_i, in order); the scratchpad answers one cycle
// after its grant. The write side writes the FIFO head as soon as it is
// there. With both ports always granting and a system read latency below
// FIFO_DEPTH cycles, the engine moves one beat per cycle after the first
// response.
// busy_o is high from start_i until the last write has been granted.
//
// 1D/2D transfers and the 512-bit width follow the paper; the 64-byte
// granularity, the simple request/grant ports and the FIFO depth are this
// design's choices.
module cluster_dma
  import occamy_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  dma_cfg_t          cfg_i,
  input  logic              start_i,
  output logic              busy_o,
  // system (512-bit) port
  output wide_req_t         ext_req_o,
  input  logic              ext_gnt_i,
  input  logic              ext_rvalid_i,
  input  logic [WIDE_W-1:0] ext_rdata_i,
  // scratchpad (512-bit) port
  output wide_req_t         spm_req_o,
  input  logic              spm_gnt_i,
  input  logic [WIDE_W-1:0] spm_rdata_i,
  // statistics
  output logic [31:0]       beats_o
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  dma_cfg_t    cfg_q;
  logic        busy_q;
  logic [31:0] r_off_q, w_off_q;      // byte offset within row
  logic [15:0] r_row_q, w_row_q;
  logic        r_done_q, w_done_q;
  logic [31:0] r_row_base_q, w_row_base_q;
  logic [PW:0] inflight_q;
  logic        spm_rvalid_q;

  logic             f_push, f_pop, f_full, f_empty;
  logic [WIDE_W-1:0] f_wdata, f_rdata;
  logic [PW:0]      f_usage;

  sync_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(WIDE_W)) i_fifo (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i(f_push), .wdata_i(f_wdata), .pop_i(f_pop),
    .rdata_o(f_rdata), .full_o(f_full), .empty_o(f_empty), .usage_o(f_usage)
  );

  logic rd_want, wr_want, rd_go, wr_go, rd_gnt, wr_gnt, rsp_valid;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  assign rd_addr = r_row_base_q + r_off_q;
  assign wr_addr = w_row_base_q + w_off_q;
  assign rd_want = busy_q && !r_done_q && ({1'b0, f_usage} + {1'b0, inflight_q} < (PW+2)'(FIFO_DEPTH));
  assign wr_want = busy_q && !w_done_q && !f_empty;

  always_comb begin
    ext_req_o = '0;
    spm_req_o = '0;
    if (cfg_q.to_ext) begin
      spm_req_o.req   = rd_want;
      spm_req_o.addr  = rd_addr;
      ext_req_o.req   = wr_want;
      ext_req_o.we    = 1'b1;
      ext_req_o.addr  = wr_addr;
      ext_req_o.wdata = f_rdata;
      rd_gnt    = spm_gnt_i;
      wr_gnt    = ext_gnt_i;
      rsp_valid = spm_rvalid_q;
      f_wdata   = spm_rdata_i;
    end else begin
      ext_req_o.req   = rd_want;
      ext_req_o.addr  = rd_addr;
      spm_req_o.req   = wr_want;
      spm_req_o.we    = 1'b1;
      spm_req_o.addr  = wr_addr;
      spm_req_o.wdata = f_rdata;
      rd_gnt    = ext_gnt_i;
      wr_gnt    = spm_gnt_i;
      rsp_valid = ext_rvalid_i;
      f_wdata   = ext_rdata_i;
    end
  end
  assign rd_go  = rd_want && rd_gnt;
  assign wr_go  = wr_want && wr_gnt;
  assign f_push = rsp_valid;
  assign f_pop  = wr_go;
  assign busy_o = busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q        <= '0;
      busy_q       <= 1'b0;
      r_off_q      <= '0;
      w_off_q      <= '0;
      r_row_q      <= '0;
      w_row_q      <= '0;
      r_done_q     <= 1'b1;
      w_done_q     <= 1'b1;
      r_row_base_q <= '0;
      w_row_base_q <= '0;
      inflight_q   <= '0;
      spm_rvalid_q <= 1'b0;
      beats_o      <= '0;
    end else begin
      spm_rvalid_q <= cfg_q.to_ext && rd_go;
      inflight_q   <= inflight_q + {{PW{1'b0}}, rd_go} - {{PW{1'b0}}, rsp_valid};
      if (start_i && !busy_q) begin
        cfg_q        <= cfg_i;
        busy_q       <= (cfg_i.len != 0);
        r_off_q      <= '0;
        w_off_q      <= '0;
        r_row_q      <= '0;
        w_row_q      <= '0;
        r_done_q     <= (cfg_i.len == 0);
        w_done_q     <= (cfg_i.len == 0);
        r_row_base_q <= cfg_i.src;
        w_row_base_q <= cfg_i.dst;
      end else begin
        if (rd_go) begin
          if (r_off_q + 64 >= cfg_q.len) begin
            r_off_q <= '0;
            r_row_base_q <= r_row_base_q + cfg_q.src_stride;
            r_row_q <= r_row_q + 1'b1;
            if (r_row_q == cfg_q.reps) r_done_q <= 1'b1;
          end else begin
            r_off_q <= r_off_q + 64;
          end
        end
        if (wr_go) begin
          beats_o <= beats_o + 1;
          if (w_off_q + 64 >= cfg_q.len) begin
            w_off_q <= '0;
            w_row_base_q <= w_row_base_q + cfg_q.dst_stride;
            w_row_q <= w_row_q + 1'b1;
            if (w_row_q == cfg_q.reps) begin
              w_done_q <= 1'b1;
              busy_q   <= 1'b0;
            end
          end else begin
            w_off_q <= w_off_q + 64;
          end
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (start_i && !busy_o) |-> (cfg_i.src[5:0] == 0 && cfg_i.dst[5:0] == 0 && cfg_i.len[5:0] == 0))
    else $error("DMA transfer not 64-byte aligned");
endmodule
