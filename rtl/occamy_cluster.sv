// Compute cluster: eight worker cores' FP datapaths and a DMA around a
// 128 KiB, 32-bank scratchpad.
//
// Each worker has a loop buffer (frep_sequencer) feeding an FP subsystem
// with three streaming units. The 24 streamer ports and the data ports of
// the nine integer cores (eight workers and the DMA-control core) share the
// scratchpad through the single-cycle logarithmic interconnect; the DMA
// reaches it through a 512-bit port covering eight banks at once, and the
// rest of the system through a 512-bit port of its own.
//
// The integer cores are not part of this RTL: their offload channels, the
// stream and DMA configuration they would write, and their data ports are
// ports of the cluster, so a testbench (or a core model) drives them.
// Master numbering at the interconnect: worker w's streamer s is master
// 3*w + s, integer core c is master 24 + c.
// Organisation and sizes follow the paper; port protocols are this design's.
module occamy_cluster
  import occamy_pkg::*;
#(
  parameter int unsigned N_W        = N_WORKERS,
  parameter int unsigned NB         = N_BANKS,
  parameter int unsigned WORDS      = BANK_WORDS,
  parameter int unsigned LOOP_DEPTH = 16,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned N_C       = N_W + 1,
  localparam int unsigned N_MST     = N_W * N_SU + N_C
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // integer-core data ports
  input  mem_req_t [N_C-1:0]           core_req_i,
  output logic     [N_C-1:0]           core_gnt_o,
  output logic     [N_C-1:0][63:0]     core_rdata_o,
  // FP instruction offload from the worker cores
  input  logic     [N_W-1:0]           off_valid_i,
  input  logic     [N_W-1:0][31:0]     off_instr_i,
  input  logic     [N_W-1:0][31:0]     off_op_i,
  output logic     [N_W-1:0]           off_ready_o,
  // stream configuration per worker
  input  logic     [N_W-1:0]           ssr_en_i,
  input  su_cfg_t  [N_W-1:0][N_SU-1:0] su_cfg_i,
  input  logic     [N_W-1:0][N_SU-1:0] su_start_i,
  input  cmp_mode_e [N_W-1:0]          cmp_mode_i,
  output logic     [N_W-1:0][N_SU-1:0] su_busy_o,
  output logic     [N_W-1:0]           looping_o,
  // DMA descriptor from the DMA-control core
  input  dma_cfg_t                     dma_cfg_i,
  input  logic                         dma_start_i,
  output logic                         dma_busy_o,
  // 512-bit system port
  output wide_req_t                    ext_req_o,
  input  logic                         ext_gnt_i,
  input  logic                         ext_rvalid_i,
  input  logic [WIDE_W-1:0]            ext_rdata_i,
  // observation
  input  logic     [4:0]               dbg_raddr_i,
  output logic     [N_W-1:0][63:0]     dbg_rdata_o,
  output logic     [N_W-1:0][31:0]     fp_ops_o,
  output logic     [N_W-1:0][31:0]     stall_cycles_o,
  output logic     [N_W-1:0][31:0]     cmp_count_o,
  output logic     [31:0]              dma_beats_o,
  output logic     [31:0]              bank_conflicts_o
);
  localparam int unsigned AW = $clog2(WORDS);

  mem_req_t [N_MST-1:0]       m_req;
  logic     [N_MST-1:0]       m_gnt;
  logic     [N_MST-1:0][63:0] m_rdata;

  for (genvar w = 0; w < N_W; w++) begin : g_worker
    logic        seq_valid, seq_ready;
    logic [31:0] seq_instr;
    logic [31:0] illegal;

    frep_sequencer #(.DEPTH(LOOP_DEPTH)) i_seq (
      .clk_i, .rst_ni,
      .in_valid_i(off_valid_i[w]), .in_instr_i(off_instr_i[w]), .in_op_i(off_op_i[w]),
      .in_ready_o(off_ready_o[w]),
      .out_valid_o(seq_valid), .out_instr_o(seq_instr), .out_ready_i(seq_ready),
      .looping_o(looping_o[w])
    );

    fp_subsystem #(.FIFO_DEPTH(FIFO_DEPTH)) i_fpss (
      .clk_i, .rst_ni,
      .instr_valid_i(seq_valid), .instr_i(seq_instr), .instr_ready_o(seq_ready),
      .ssr_en_i(ssr_en_i[w]), .su_cfg_i(su_cfg_i[w]), .su_start_i(su_start_i[w]),
      .cmp_mode_i(cmp_mode_i[w]), .su_busy_o(su_busy_o[w]),
      .mem_req_o(m_req[N_SU*w +: N_SU]), .mem_gnt_i(m_gnt[N_SU*w +: N_SU]),
      .mem_rdata_i(m_rdata[N_SU*w +: N_SU]),
      .dbg_raddr_i, .dbg_rdata_o(dbg_rdata_o[w]),
      .fp_ops_o(fp_ops_o[w]), .stall_cycles_o(stall_cycles_o[w]), .cmp_count_o(cmp_count_o[w]),
      .illegal_o(illegal)
    );
  end

  assign m_req[N_W*N_SU +: N_C] = core_req_i;
  assign core_gnt_o   = m_gnt[N_W*N_SU +: N_C];
  assign core_rdata_o = m_rdata[N_W*N_SU +: N_C];

  wide_req_t         w_req;
  logic              w_gnt;
  logic [WIDE_W-1:0] w_rdata;

  cluster_dma i_dma (
    .clk_i, .rst_ni, .cfg_i(dma_cfg_i), .start_i(dma_start_i), .busy_o(dma_busy_o),
    .ext_req_o, .ext_gnt_i, .ext_rvalid_i, .ext_rdata_i,
    .spm_req_o(w_req), .spm_gnt_i(w_gnt), .spm_rdata_i(w_rdata),
    .beats_o(dma_beats_o)
  );

  logic [NB-1:0]         b_req, b_we;
  logic [NB-1:0][AW-1:0] b_addr;
  logic [NB-1:0][7:0]    b_be;
  logic [NB-1:0][63:0]   b_wdata, b_rdata;

  tcdm_interconnect #(.N_MST(N_MST), .NB(NB), .WORDS(WORDS)) i_xbar (
    .clk_i, .rst_ni,
    .m_req_i(m_req), .m_gnt_o(m_gnt), .m_rdata_o(m_rdata),
    .w_req_i(w_req), .w_gnt_o(w_gnt), .w_rdata_o(w_rdata),
    .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr), .b_be_o(b_be),
    .b_wdata_o(b_wdata), .b_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    spm_bank #(.WORDS(WORDS), .DATA_W(64)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .be_i(b_be[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b])
    );
  end

  // Count cycles in which at least one narrow request waited for a bank.
  logic any_wait;
  always_comb begin
    any_wait = 1'b0;
    for (int m = 0; m < N_MST; m++) if (m_req[m].req && !m_gnt[m]) any_wait = 1'b1;
  end
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) bank_conflicts_o <= '0;
    else if (any_wait) bank_conflicts_o <= bank_conflicts_o + 1;
  end
endmodule
