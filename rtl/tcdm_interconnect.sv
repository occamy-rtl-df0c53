// Single-cycle logarithmic interconnect between the cluster's masters and
// its scratchpad banks.
//
// Narrow masters issue 64-bit requests by byte address. The banks are word
// interleaved: bits [7:3] of the address select one of 32 banks, the bits
// above select the word in the bank. Each bank grants one master per cycle,
// chosen round-robin among those that request it; the grant is returned in
// the request cycle and read data follows in the next cycle. A master that
// is not granted keeps its request up.
//
// The DMA uses a separate 512-bit port that reaches eight adjacent banks at
// once (one 64-byte line). A wide request has priority over narrow requests
// on those eight banks and is always granted.
//
// Word interleaving, round-robin arbitration and the priority of the wide
// port are this design's choices; the paper specifies a single-cycle
// interconnect between cores and 32 banks.
module tcdm_interconnect
  import occamy_pkg::*;
#(
  parameter int unsigned N_MST = 33,
  parameter int unsigned NB    = 32,
  parameter int unsigned WORDS = 512,
  localparam int unsigned BW   = $clog2(NB),
  localparam int unsigned WW   = $clog2(WORDS),
  localparam int unsigned MW   = (N_MST > 1) ? $clog2(N_MST) : 1
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // narrow masters
  input  mem_req_t [N_MST-1:0]     m_req_i,
  output logic     [N_MST-1:0]     m_gnt_o,
  output logic     [N_MST-1:0][63:0] m_rdata_o,
  // wide master
  input  wide_req_t                w_req_i,
  output logic                     w_gnt_o,
  output logic [WIDE_W-1:0]        w_rdata_o,
  // banks
  output logic     [NB-1:0]        b_req_o,
  output logic     [NB-1:0]        b_we_o,
  output logic     [NB-1:0][WW-1:0] b_addr_o,
  output logic     [NB-1:0][7:0]   b_be_o,
  output logic     [NB-1:0][63:0]  b_wdata_o,
  input  logic     [NB-1:0][63:0]  b_rdata_i
);
  localparam int unsigned LINE_BANKS = WIDE_W / 64;   // 8
  localparam int unsigned NLINES     = NB / LINE_BANKS;
  localparam int unsigned LW         = (NLINES > 1) ? $clog2(NLINES) : 1;

  logic [N_MST-1:0][BW-1:0] m_bank;
  for (genvar m = 0; m < N_MST; m++) begin : g_dec
    assign m_bank[m] = m_req_i[m].addr[3 +: BW];
  end

  logic [LW-1:0] w_line;
  assign w_line  = w_req_i.addr[6 +: LW];
  assign w_gnt_o = w_req_i.req;

  logic [NB-1:0][MW-1:0] rr_q;        // round-robin pointer per bank
  logic [NB-1:0][MW-1:0] win;         // granted master per bank
  logic [NB-1:0]         win_valid;
  logic [NB-1:0]         wide_bank;   // bank taken by the wide port

  always_comb begin
    m_gnt_o   = '0;
    win       = '0;
    win_valid = '0;
    wide_bank = '0;
    for (int b = 0; b < NB; b++) begin
      wide_bank[b] = w_req_i.req && (b / LINE_BANKS == int'(w_line));
      b_req_o[b]   = 1'b0;
      b_we_o[b]    = 1'b0;
      b_addr_o[b]  = '0;
      b_be_o[b]    = '0;
      b_wdata_o[b] = '0;
      if (wide_bank[b]) begin
        b_req_o[b]   = 1'b1;
        b_we_o[b]    = w_req_i.we;
        b_addr_o[b]  = w_req_i.addr[3 + BW +: WW];
        b_be_o[b]    = 8'hff;
        b_wdata_o[b] = w_req_i.wdata[64 * (b % LINE_BANKS) +: 64];
      end else begin
        for (int k = 0; k < N_MST; k++) begin
          if (!win_valid[b] && m_req_i[(int'(rr_q[b]) + k) % N_MST].req &&
              m_bank[(int'(rr_q[b]) + k) % N_MST] == BW'(b)) begin
            win_valid[b] = 1'b1;
            win[b]       = MW'((int'(rr_q[b]) + k) % N_MST);
          end
        end
        if (win_valid[b]) begin
          b_req_o[b]   = 1'b1;
          b_we_o[b]    = m_req_i[win[b]].we;
          b_addr_o[b]  = m_req_i[win[b]].addr[3 + BW +: WW];
          b_be_o[b]    = m_req_i[win[b]].be;
          b_wdata_o[b] = m_req_i[win[b]].wdata;
          m_gnt_o[win[b]] = 1'b1;
        end
      end
    end
  end

  // Response routing: remember which bank each granted master used.
  logic [N_MST-1:0][BW-1:0] rsp_bank_q;
  logic [LW-1:0] w_line_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q       <= '0;
      rsp_bank_q <= '0;
      w_line_q   <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (win_valid[b]) rr_q[b] <= (int'(win[b]) == N_MST - 1) ? '0 : win[b] + 1'b1;
      for (int m = 0; m < N_MST; m++)
        if (m_gnt_o[m]) rsp_bank_q[m] <= m_bank[m];
      if (w_req_i.req) w_line_q <= w_line;
    end
  end

  for (genvar m = 0; m < N_MST; m++) begin : g_rsp
    assign m_rdata_o[m] = b_rdata_i[rsp_bank_q[m]];
  end
  for (genvar j = 0; j < LINE_BANKS; j++) begin : g_wrsp
    assign w_rdata_o[64*j +: 64] = b_rdata_i[int'(w_line_q) * LINE_BANKS + j];
  end
endmodule
