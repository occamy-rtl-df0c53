// Sparsity-capable streaming unit (SU).
//
// A streamer maps one FP register (ft0, ft1 or ft2) onto a stream of
// scratchpad accesses, so that FP instructions read or write memory without
// load/store instructions. It owns one 64-bit scratchpad port, a data FIFO
// and an address generator that works in one of three modes:
//
//  * affine:   up to four nested loops; element address = base + sum over the
//              dimensions of (loop counter * byte stride). Counters and
//              partial offsets are kept incrementally, so no multiplier is
//              needed.
//  * indirect: (HAS_INDIR) the streamer first reads 64-bit words of an index
//              array (8-, 16- or 32-bit indices, unpacked from each word) and
//              then accesses base + (index << idx_shift) for each index. The
//              port is shared between index and value accesses, so a stream
//              of n values costs n + ceil(n * idx_bits / 64) accesses and,
//              as the index word is fetched only once the previous one is
//              used up, about three cycles per index word (fetch, response,
//              unpack) in which no value is requested.
//  * compare:  (HAS_INDIR, cmp_en_i) as indirect, but the streamer exposes
//              its head index to the index comparator and waits for its
//              command: ADV fetches the value, SKIP drops the index, ZERO
//              pushes a zero value and keeps the index (used for union).
//
// With HAS_IOUT the streamer additionally accepts joint indices from the
// comparator and writes them, one sub-word write each, to iout_base onward.
//
// Reads: an element is requested only when the FIFO has room for it
// counting the response in flight, so the FIFO can never overflow. Read data
// arrives one cycle after the grant. Writes: the FP side pushes data into the
// FIFO; the streamer writes each word to the next address. busy_o is high
// from start_i until the last element has been issued and answered.
// The modes and the register interface follow the paper; the command set of
// the comparator port, the FIFO depth and the port sharing are this design's
// own choices.
module su_streamer
  import occamy_pkg::*;
#(
  parameter int unsigned DEPTH     = 4,
  parameter bit          HAS_INDIR = 1'b1,
  parameter bit          HAS_IOUT  = 1'b0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // configuration
  input  su_cfg_t     cfg_i,
  input  logic        start_i,
  input  logic        cmp_en_i,
  output logic        busy_o,
  // scratchpad port
  output mem_req_t    mem_req_o,
  input  logic        mem_gnt_i,
  input  logic [63:0] mem_rdata_i,
  // register interface (read streams)
  output logic        rd_valid_o,
  output logic [63:0] rd_data_o,
  input  logic        rd_pop_i,
  // register interface (write streams)
  output logic        wr_ready_o,
  input  logic        wr_valid_i,
  input  logic [63:0] wr_data_i,
  // comparator interface
  output logic        cmp_head_valid_o,
  output logic [31:0] cmp_head_o,
  output logic        cmp_exh_o,
  output logic        cmp_ready_o,
  input  su_cmd_e     cmp_cmd_i,
  input  logic        cmp_fire_i,
  input  logic        cmp_done_i,
  // joint index input (HAS_IOUT)
  input  logic        iout_valid_i,
  input  logic [31:0] iout_idx_i,
  output logic        iout_ready_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef enum logic [1:0] {RSP_NONE, RSP_VAL, RSP_IDX, RSP_ZERO} rsp_e;

  su_cfg_t     cfg_q;
  logic        active_q, cmp_q;
  logic        indir;
  assign indir = HAS_INDIR && cfg_q.indir;

  // ---------------- affine address generator ----------------
  logic [3:0][15:0]       cnt_q;
  logic [3:0][ADDR_W-1:0] off_q;
  logic                   aff_done_q;
  logic [ADDR_W-1:0]      aff_addr;
  logic                   aff_adv;
  assign aff_addr = cfg_q.base + off_q[0] + off_q[1] + off_q[2] + off_q[3];

  // ---------------- index fetch and unpack ----------------
  logic [16:0]       j_q;            // indices consumed
  logic [63:0]       iw_q;           // buffered index word
  logic              iw_valid_q;
  logic [ADDR_W-1:0] iw_waddr_q;
  logic [ADDR_W-1:0] j_baddr, j_waddr;
  logic [31:0]       head;
  logic              head_valid, idx_exh, idx_consume;
  logic [63:0]       iw_shift;

  assign j_baddr = cfg_q.idx_base + (ADDR_W'(j_q) << cfg_q.idx_size);
  assign j_waddr = {j_baddr[ADDR_W-1:3], 3'b000};
  assign idx_exh = indir && (j_q > {1'b0, cfg_q.num_idx});
  assign head_valid = active_q && indir && !idx_exh && iw_valid_q && (iw_waddr_q == j_waddr);
  assign iw_shift = iw_q >> {j_baddr[2:0], 3'b000};
  always_comb begin
    unique case (cfg_q.idx_size)
      IDX8:    head = {24'b0, iw_shift[7:0]};
      IDX16:   head = {16'b0, iw_shift[15:0]};
      default: head = iw_shift[31:0];
    endcase
  end

  // ---------------- pending indirect element ----------------
  logic              pend_valid_q, pend_zero_q;
  logic [ADDR_W-1:0] pend_addr_q;
  logic              pend_go;        // pending element leaves this cycle
  logic              pend_load_adv, pend_load_zero;

  // ---------------- data FIFO ----------------
  logic        f_push, f_pop, f_full, f_empty;
  logic [63:0] f_wdata, f_rdata;
  logic [PW:0] f_usage;
  rsp_e        rsp_q;
  logic [ADDR_W-1:0] rsp_addr_q;

  sync_fifo #(.DEPTH(DEPTH), .WIDTH(64)) i_fifo (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .push_i(f_push), .wdata_i(f_wdata), .pop_i(f_pop),
    .rdata_o(f_rdata), .full_o(f_full), .empty_o(f_empty), .usage_o(f_usage)
  );

  logic credit;   // room for one more read response
  assign credit = ({1'b0, f_usage} + ((rsp_q == RSP_VAL || rsp_q == RSP_ZERO) ? 1 : 0)) < (PW+2)'(DEPTH);

  // ---------------- element source ----------------
  logic              src_valid, src_zero;
  logic [ADDR_W-1:0] src_addr;
  always_comb begin
    if (indir) begin
      src_valid = pend_valid_q;
      src_zero  = pend_zero_q;
      src_addr  = pend_addr_q;
    end else begin
      src_valid = active_q && !aff_done_q;
      src_zero  = 1'b0;
      src_addr  = aff_addr;
    end
  end

  // ---------------- iout buffer ----------------
  logic              ib_valid_q;
  logic [31:0]       ib_idx_q;
  logic [15:0]       ib_k_q;
  logic [ADDR_W-1:0] ib_addr;
  assign ib_addr      = cfg_q.iout_base + (ADDR_W'(ib_k_q) << cfg_q.idx_size);
  assign iout_ready_o = HAS_IOUT && !ib_valid_q;

  // ---------------- port arbitration ----------------
  logic want_val, want_zero, want_idx, want_iout;
  logic go_val, go_idx, go_iout;
  logic [7:0] size_be;
  always_comb begin
    unique case (cfg_q.idx_size)
      IDX8:    size_be = 8'h01;
      IDX16:   size_be = 8'h03;
      default: size_be = 8'h0f;
    endcase
  end

  assign want_zero = src_valid && src_zero && !cfg_q.write && credit;
  assign want_val  = src_valid && !src_zero && (cfg_q.write ? !f_empty : credit);
  assign want_idx  = active_q && indir && !idx_exh && !head_valid && (rsp_q != RSP_IDX);
  assign want_iout = HAS_IOUT && ib_valid_q;

  always_comb begin
    mem_req_o = '0;
    if (want_val) begin
      mem_req_o.req   = 1'b1;
      mem_req_o.we    = cfg_q.write;
      mem_req_o.addr  = src_addr;
      mem_req_o.be    = 8'hff;
      mem_req_o.wdata = f_rdata;
    end else if (!want_zero && want_idx) begin
      mem_req_o.req  = 1'b1;
      mem_req_o.addr = j_waddr;
    end else if (!want_zero && want_iout) begin
      mem_req_o.req   = 1'b1;
      mem_req_o.we    = 1'b1;
      mem_req_o.addr  = ib_addr;
      mem_req_o.be    = size_be << ib_addr[2:0];
      mem_req_o.wdata = {32'b0, ib_idx_q} << {ib_addr[2:0], 3'b000};
    end
  end
  assign go_val  = want_val && mem_gnt_i;
  assign go_idx  = !want_val && !want_zero && want_idx && mem_gnt_i;
  assign go_iout = !want_val && !want_zero && !want_idx && want_iout && mem_gnt_i;
  assign pend_go = indir && (go_val || want_zero);
  assign aff_adv = !indir && go_val;

  // ---------------- comparator handshake ----------------
  assign cmp_head_valid_o = head_valid;
  assign cmp_head_o       = head;
  assign cmp_exh_o        = idx_exh;
  assign cmp_ready_o      = !pend_valid_q || pend_go;
  always_comb begin
    pend_load_adv  = 1'b0;
    pend_load_zero = 1'b0;
    idx_consume    = 1'b0;
    if (cmp_q) begin
      if (cmp_fire_i) begin
        pend_load_adv  = (cmp_cmd_i == CMD_ADV);
        pend_load_zero = (cmp_cmd_i == CMD_ZERO);
        idx_consume    = (cmp_cmd_i == CMD_ADV) || (cmp_cmd_i == CMD_SKIP);
      end
    end else if (head_valid && (!pend_valid_q || pend_go)) begin
      pend_load_adv = 1'b1;
      idx_consume   = 1'b1;
    end
  end

  // ---------------- FIFO connections ----------------
  always_comb begin
    if (cfg_q.write) begin
      f_push  = wr_valid_i && !f_full;
      f_wdata = wr_data_i;
      f_pop   = go_val;
    end else begin
      f_push  = (rsp_q == RSP_VAL) || (rsp_q == RSP_ZERO);
      f_wdata = (rsp_q == RSP_VAL) ? mem_rdata_i : 64'b0;
      f_pop   = rd_pop_i && !f_empty;
    end
  end
  assign rd_valid_o = !cfg_q.write && !f_empty;
  assign rd_data_o  = f_rdata;
  assign wr_ready_o = cfg_q.write && !f_full;

  // ---------------- termination ----------------
  logic src_done;
  assign src_done = indir ? ((idx_exh || (cmp_q && cmp_done_i)) && !pend_valid_q && !pend_load_adv && !pend_load_zero)
                          : aff_done_q;
  logic wr_drained;
  assign wr_drained = !cfg_q.write || f_empty;
  assign busy_o = active_q || (HAS_IOUT && ib_valid_q);

  // ---------------- state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q        <= '0;
      active_q     <= 1'b0;
      cmp_q        <= 1'b0;
      cnt_q        <= '0;
      off_q        <= '0;
      aff_done_q   <= 1'b1;
      j_q          <= '0;
      iw_q         <= '0;
      iw_valid_q   <= 1'b0;
      iw_waddr_q   <= '0;
      pend_valid_q <= 1'b0;
      pend_zero_q  <= 1'b0;
      pend_addr_q  <= '0;
      rsp_q        <= RSP_NONE;
      rsp_addr_q   <= '0;
      ib_valid_q   <= 1'b0;
      ib_idx_q     <= '0;
      ib_k_q       <= '0;
    end else begin
      // response pipeline (fixed one-cycle latency)
      rsp_q <= RSP_NONE;
      if (go_val && !cfg_q.write) rsp_q <= RSP_VAL;
      if (want_zero && !want_val) rsp_q <= RSP_ZERO;
      if (go_idx) begin
        rsp_q      <= RSP_IDX;
        rsp_addr_q <= j_waddr;
      end
      if (rsp_q == RSP_IDX) begin
        iw_q       <= mem_rdata_i;
        iw_valid_q <= 1'b1;
        iw_waddr_q <= rsp_addr_q;
      end

      if (start_i && !active_q) begin
        cfg_q        <= cfg_i;
        active_q     <= 1'b1;
        cmp_q        <= cmp_en_i && HAS_INDIR;
        cnt_q        <= '0;
        off_q        <= '0;
        aff_done_q   <= 1'b0;
        j_q          <= '0;
        iw_valid_q   <= 1'b0;
        pend_valid_q <= 1'b0;
        ib_k_q       <= '0;
      end else if (active_q) begin
        // affine counters
        if (aff_adv) begin
          logic carry;
          carry = 1'b1;
          for (int d = 0; d < 4; d++) begin
            if (carry) begin
              if (cnt_q[d] == cfg_q.bound[d] || d > int'(cfg_q.dims)) begin
                cnt_q[d] <= '0;
                off_q[d] <= '0;
              end else begin
                cnt_q[d] <= cnt_q[d] + 1'b1;
                off_q[d] <= off_q[d] + ADDR_W'(signed'(cfg_q.stride[d]));
                carry = 1'b0;
              end
            end
          end
          if (carry) aff_done_q <= 1'b1;
        end
        // indirect
        if (idx_consume) j_q <= j_q + 1'b1;
        if (pend_load_adv) begin
          pend_valid_q <= 1'b1;
          pend_zero_q  <= 1'b0;
          pend_addr_q  <= cfg_q.base + (ADDR_W'(head) << cfg_q.idx_shift);
        end else if (pend_load_zero) begin
          pend_valid_q <= 1'b1;
          pend_zero_q  <= 1'b1;
        end else if (pend_go) begin
          pend_valid_q <= 1'b0;
        end
        if (src_done && wr_drained && rsp_q != RSP_VAL && rsp_q != RSP_ZERO &&
            !(go_val || want_zero))
          active_q <= 1'b0;
      end
      // joint index output (never used without HAS_IOUT: iout_ready_o is low)
      if (go_iout) begin
        ib_valid_q <= 1'b0;
        ib_k_q     <= ib_k_q + 1'b1;
      end
      if (iout_valid_i && iout_ready_o) begin
        ib_valid_q <= 1'b1;
        ib_idx_q   <= iout_idx_i;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (!cfg_q.write && rsp_q inside {RSP_VAL, RSP_ZERO}) |-> !f_full)
    else $error("read response into full FIFO");
endmodule
