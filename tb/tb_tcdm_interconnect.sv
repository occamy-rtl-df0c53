// Self-checking testbench of tcdm_interconnect with banks modelled in the
// testbench. Random narrow masters read and write random words while a wide
// master occasionally takes a line; every read is compared with a flat
// reference memory, each bank must grant at most one master per cycle,
// a granted request must target that bank, and no waiting master may wait
// longer than N_MST cycles (round-robin fairness).
module tb_tcdm_interconnect;
  import occamy_pkg::*;
  localparam int N = 6, NB = 32, WORDS = 16, WW = 4;
  logic clk = 0, rst_n = 0;
  mem_req_t [N-1:0] mreq;
  logic [N-1:0] mgnt;
  logic [N-1:0][63:0] mrdata;
  wide_req_t wreq;
  logic wgnt;
  logic [511:0] wrdata;
  logic [NB-1:0] breq, bwe;
  logic [NB-1:0][WW-1:0] baddr;
  logic [NB-1:0][7:0] bbe;
  logic [NB-1:0][63:0] bwdata, brdata;
  logic [63:0] bank_mem [NB][WORDS];
  logic [63:0] ref_mem [NB*WORDS];
  int checks = 0, failures = 0, conflicts = 0, wide_ops = 0;
  int wait_cnt [N];

  tcdm_interconnect #(.N_MST(N), .NB(NB), .WORDS(WORDS)) dut (.clk_i(clk), .rst_ni(rst_n),
    .m_req_i(mreq), .m_gnt_o(mgnt), .m_rdata_o(mrdata), .w_req_i(wreq), .w_gnt_o(wgnt), .w_rdata_o(wrdata),
    .b_req_o(breq), .b_we_o(bwe), .b_addr_o(baddr), .b_be_o(bbe), .b_wdata_o(bwdata), .b_rdata_i(brdata));

  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // bank models
  always @(posedge clk) for (int b = 0; b < NB; b++) if (breq[b]) begin
    if (bwe[b]) begin
      for (int k = 0; k < 8; k++) if (bbe[b][k]) bank_mem[b][baddr[b]][8*k +: 8] <= bwdata[b][8*k +: 8];
    end else brdata[b] <= bank_mem[b][baddr[b]];
  end

  logic [N-1:0] pend_rd;
  logic [N-1:0][63:0] pend_exp;
  logic w_pend; logic [511:0] w_exp;

  initial begin
    for (int b = 0; b < NB; b++) for (int w = 0; w < WORDS; w++) begin bank_mem[b][w] = 0; end
    for (int i = 0; i < NB*WORDS; i++) ref_mem[i] = 0;
    for (int m = 0; m < N; m++) wait_cnt[m] = 0;
    mreq = '0; wreq = '0; pend_rd = '0; w_pend = 0; brdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // drive at negedge: keep ungranted requests, new random ones otherwise
      for (int m = 0; m < N; m++) if (!mreq[m].req && $urandom_range(0, 1)) begin
        mreq[m].req = 1; mreq[m].we = 1'($urandom);
        mreq[m].addr = 32'($urandom_range(0, 3)) * 8 + 32'($urandom_range(0, WORDS-1)) * 256;  // few banks: conflicts
        mreq[m].be = 8'($urandom); mreq[m].wdata = {$urandom, $urandom};
      end
      wreq.req = ($urandom_range(0, 15) == 0); wreq.we = 1'($urandom);
      wreq.addr = 32'($urandom_range(0, NB*WORDS*8/64 - 1)) * 64; wreq.wdata = {16{$urandom}};
      @(posedge clk);
      // check grants (before the edge's updates are visible to requests)
      for (int b = 0; b < NB; b++) begin
        int n; n = 0;
        for (int m = 0; m < N; m++) if (mgnt[m] && mreq[m].addr[7:3] == 5'(b)) n++;
        checks++; if (n > 1) begin failures++; $display("bank %0d granted %0d", b, n); end
      end
      for (int m = 0; m < N; m++) begin
        if (mreq[m].req && !mgnt[m]) begin conflicts++; wait_cnt[m]++; end else wait_cnt[m] = 0;
        checks++; if (wait_cnt[m] > N) begin failures++; $display("master %0d starves", m); end
        if (mgnt[m] && wreq.req && (mreq[m].addr[7:6] == wreq.addr[7:6])) begin failures++; $display("narrow won over wide"); end
      end
      // reference update in grant order: wide first (its banks exclude narrow)
      if (wreq.req) begin
        int base; base = int'(wreq.addr[31:6]) * 8;
        wide_ops++;
        w_pend = !wreq.we;
        for (int j = 0; j < 8; j++) begin
          int flat; flat = int'(wreq.addr[3 +: 5]) + j + int'(wreq.addr[8 +: 4]) * NB;
          if (wreq.we) ref_mem[flat] = wreq.wdata[64*j +: 64]; else w_exp[64*j +: 64] = ref_mem[flat];
        end
      end else w_pend = 0;
      for (int m = 0; m < N; m++) begin
        pend_rd[m] = 0;
        if (mgnt[m]) begin
          int flat; flat = int'(mreq[m].addr[7:3]) + int'(mreq[m].addr[11:8]) * NB;
          if (mreq[m].we) begin
            for (int k = 0; k < 8; k++) if (mreq[m].be[k]) ref_mem[flat][8*k +: 8] = mreq[m].wdata[8*k +: 8];
          end else begin pend_rd[m] = 1; pend_exp[m] = ref_mem[flat]; end
        end
      end
      @(negedge clk);
      for (int m = 0; m < N; m++) begin
        if (pend_rd[m]) begin
          checks++; if (mrdata[m] !== pend_exp[m]) begin failures++; $display("m%0d read %h exp %h", m, mrdata[m], pend_exp[m]); end
        end
        if (mgnt[m] || pend_rd[m]) ;
      end
      if (w_pend) begin checks++; if (wrdata !== w_exp) begin failures++; $display("wide read mismatch"); end end
      for (int m = 0; m < N; m++) if (pend_rd[m] || (mreq[m].req && mreq[m].we && !wait_cnt[m])) mreq[m].req = 0;
      for (int m = 0; m < N; m++) if (wait_cnt[m] == 0) mreq[m].req = 0;
    end
    checks++; if (conflicts == 0 || wide_ops == 0) failures++;
    $display("conflict cycles %0d, wide ops %0d", conflicts, wide_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
