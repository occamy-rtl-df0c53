// End-to-end testbench of occamy_cluster at its default size (8 workers,
// 32 banks, 128 KiB). It plays the part of the integer cores and of the
// system memory:
//  1. The DMA brings the working set from system memory into the
//     scratchpad, once as a 1D and once as a 2D transfer.
//  2. Workers 0-5 each compute a sparse-dense dot product (8-, 16- and
//     32-bit indices) with SU0/SU1 and a hardware loop of one fmadd.d.
//  3. Worker 6 computes a sparse-sparse dot product by index intersection,
//     worker 7 a sparse vector sum by union, its result and joint indices
//     streamed to the scratchpad by SU2.
//  4. The DMA copies worker 7's result back to system memory; an integer
//     core reads one word through its data port.
// All eight workers run at once, so their streams contend for banks.
// Results are checked against values computed here (small integers: exact).
// Each mechanism (DMA 1D/2D, hardware-loop replay, stream stall, bank
// conflict, index skip, zero injection, joint-index write, core access)
// is counted and must occur at least once.
module tb_occamy_cluster;
  import occamy_pkg::*;
  localparam int NW = 8;
  logic clk = 0, rst_n = 0;
  mem_req_t [NW:0] creq; logic [NW:0] cgnt; logic [NW:0][63:0] crdata;
  logic [NW-1:0] ov, ordy; logic [NW-1:0][31:0] oinstr, oop;
  logic [NW-1:0] ssr; su_cfg_t [NW-1:0][2:0] cfg; logic [NW-1:0][2:0] sstart, sbusy;
  cmp_mode_e [NW-1:0] cmode; logic [NW-1:0] looping;
  dma_cfg_t dcfg; logic dstart, dbusy;
  wide_req_t ereq; logic egnt, ervalid; logic [511:0] erdata;
  logic [NW-1:0][63:0] dbg; logic [NW-1:0][31:0] ops, stalls, cmps; logic [31:0] dbeats, conflicts;

  occamy_cluster dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_i(creq), .core_gnt_o(cgnt), .core_rdata_o(crdata),
    .off_valid_i(ov), .off_instr_i(oinstr), .off_op_i(oop), .off_ready_o(ordy),
    .ssr_en_i(ssr), .su_cfg_i(cfg), .su_start_i(sstart), .cmp_mode_i(cmode), .su_busy_o(sbusy), .looping_o(looping),
    .dma_cfg_i(dcfg), .dma_start_i(dstart), .dma_busy_o(dbusy),
    .ext_req_o(ereq), .ext_gnt_i(egnt), .ext_rvalid_i(ervalid), .ext_rdata_i(erdata),
    .dbg_raddr_i(5'd10), .dbg_rdata_o(dbg), .fp_ops_o(ops), .stall_cycles_o(stalls), .cmp_count_o(cmps),
    .dma_beats_o(dbeats), .bank_conflicts_o(conflicts));

  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- system memory model: fixed latency 4, in order ----------------
  logic [511:0] ext_mem [1024];   // 64 KiB
  logic [511:0] rq[$]; int rt[$]; int now = 0;
  assign egnt = 1'b1;
  always @(negedge clk) begin
    ervalid = 0;
    if (rq.size() && rt[0] <= now) begin ervalid = 1; erdata = rq.pop_front(); void'(rt.pop_front()); end
  end
  always @(posedge clk) begin
    now++;
    if (ereq.req) begin
      if (ereq.we) ext_mem[ereq.addr[15:6]] <= ereq.wdata;
      else begin rq.push_back(ext_mem[ereq.addr[15:6]]); rt.push_back(now + 4); end
    end
  end

  // ---------------- working set (image of scratchpad 0x0000-0x9fff) ----------------
  logic [63:0] img [5120];
  function automatic real dval(int a); return $bitstoreal(img[a / 8]); endfunction
  function automatic void put_idx(int base, int i, int sz, int v);
    int a; a = base + i * (1 << sz);
    if (sz == 0) img[a / 8][8*(a%8) +: 8] = 8'(v);
    if (sz == 1) img[a / 8][8*(a%8) +: 16] = 16'(v);
    if (sz == 2) img[a / 8][8*(a%8) +: 32] = 32'(v);
  endfunction

  localparam int B_VEC = 'h0000, D_VEC = 'h8000, AV = 'h2000, AI = 'h6000, IA = 'h7000, IB = 'h7400;
  localparam int N = 48;
  int widx [NW][N]; real expect_dot [NW];
  int ia[$], ib[$], uni[$];

  function automatic logic [31:0] fmadd(logic [4:0] rd, rs1, rs2, rs3);
    return {rs3, 2'b01, rs2, rs1, 3'b000, rd, 7'b1000011};
  endfunction
  function automatic logic [31:0] fadd(logic [4:0] rd, rs1, rs2);
    return {7'b0000001, rs2, rs1, 3'b000, rd, 7'b1010011};
  endfunction

  task automatic offload(int w, logic [31:0] ins, logic [31:0] op);
    @(negedge clk); ov[w] = 1; oinstr[w] = ins; oop[w] = op;
    forever begin logic ok; #1 ok = ordy[w]; @(posedge clk); if (ok) break; @(negedge clk); end
    #1 ov[w] = 0;
  endtask

  task automatic dma(logic to_ext, int src, int dst, int len, int ss, int ds, int reps);
    @(negedge clk);
    dcfg = '0; dcfg.to_ext = to_ext; dcfg.src = 32'(src); dcfg.dst = 32'(dst); dcfg.len = 32'(len);
    dcfg.src_stride = 32'(ss); dcfg.dst_stride = 32'(ds); dcfg.reps = 16'(reps);
    dstart = 1; @(negedge clk); dstart = 0;
    while (dbusy) @(negedge clk);
  endtask

  int n_match, frep_loops, replays;
  always @(posedge clk) if (rst_n) for (int w = 0; w < NW; w++) if (looping[w] && !ov[w]) replays++;

  initial begin
    ov = '0; oinstr = '0; oop = '0; ssr = '0; cfg = '0; sstart = '0; cmode = '{default: CMP_OFF};
    dcfg = '0; dstart = 0; creq = '0; erdata = '0; replays = 0; frep_loops = 0;
    for (int i = 0; i < 5120; i++) img[i] = '0;
    for (int i = 0; i < 1024; i++) img[(B_VEC + 8*i)/8] = $realtobits(real'($urandom_range(0, 16)) - 8.0);
    for (int i = 0; i < 1024; i++) img[(D_VEC + 8*i)/8] = $realtobits(real'($urandom_range(0, 16)) - 8.0);
    for (int w = 0; w < 6; w++) begin
      int sz; sz = w % 3; expect_dot[w] = 0.0;
      for (int i = 0; i < N; i++) begin
        widx[w][i] = $urandom_range(0, sz == 0 ? 255 : 1023);
        img[(AV + w*'h800 + 8*i)/8] = $realtobits(real'($urandom_range(0, 8)) - 4.0);
        put_idx(AI + w*'h200, i, sz, widx[w][i]);
        expect_dot[w] += dval(AV + w*'h800 + 8*i) * dval(B_VEC + 8*widx[w][i]);
      end
    end
    for (int v = 0; v < 600; v++) begin
      if ($urandom_range(0, 4) == 0) ia.push_back(v);
      if ($urandom_range(0, 4) == 0) ib.push_back(v);
    end
    foreach (ia[i]) put_idx(IA, i, 2, ia[i]);
    foreach (ib[i]) put_idx(IB, i, 2, ib[i]);
    expect_dot[6] = 0.0; n_match = 0;
    for (int v = 0; v < 600; v++) begin
      bit x, y; x = 0; y = 0;
      foreach (ia[i]) if (ia[i] == v) x = 1;
      foreach (ib[i]) if (ib[i] == v) y = 1;
      if (x && y) begin n_match++; expect_dot[6] += dval(B_VEC + 8*v) * dval(D_VEC + 8*v); end
      if (x || y) uni.push_back(v);
    end
    // pack into system memory lines
    for (int l = 0; l < 1024; l++) ext_mem[l] = '0;
    for (int i = 0; i < 5120; i++) ext_mem[i / 8][64*(i%8) +: 64] = img[i];

    repeat (3) @(negedge clk); rst_n = 1;
    // ---- 1. DMA in: 1D for 0x0000-0x7fff, 2D (4 rows of 2 KiB) for 0x8000-0x9fff ----
    dma(0, 'h0000, 'h0000, 'h8000, 0, 0, 0);
    dma(0, 'h8000, 'h8000, 'h800, 'h800, 'h800, 3);
    checks++; if (dbeats != 32'h280) begin failures++; $display("DMA beats %0d", dbeats); end

    // ---- 2./3. all workers at once ----
    for (int w = 0; w < NW; w++) begin
      ssr[w] = 1;
      if (w < 6) begin
        cfg[w][0].bound[0] = 16'(N - 1); cfg[w][0].stride[0] = 8; cfg[w][0].base = 32'(AV + w*'h800);
        cfg[w][1].indir = 1; cfg[w][1].idx_size = idx_size_e'(w % 3); cfg[w][1].idx_base = 32'(AI + w*'h200);
        cfg[w][1].num_idx = 16'(N - 1); cfg[w][1].base = B_VEC; cfg[w][1].idx_shift = 3;
      end else begin
        cfg[w][0].indir = 1; cfg[w][0].idx_size = IDX32; cfg[w][0].idx_base = IA; cfg[w][0].num_idx = 16'(ia.size() - 1);
        cfg[w][0].base = B_VEC; cfg[w][0].idx_shift = 3;
        cfg[w][1].indir = 1; cfg[w][1].idx_size = IDX32; cfg[w][1].idx_base = IB; cfg[w][1].num_idx = 16'(ib.size() - 1);
        cfg[w][1].base = D_VEC; cfg[w][1].idx_shift = 3;
        cmode[w] = (w == 6) ? CMP_INTERSECT : CMP_UNION;
        if (w == 7) begin
          cfg[w][2].write = 1; cfg[w][2].bound[0] = 16'(uni.size() - 1); cfg[w][2].stride[0] = 8;
          cfg[w][2].base = 'hC000; cfg[w][2].iout = 1; cfg[w][2].idx_size = IDX32; cfg[w][2].iout_base = 'hD000;
        end
      end
    end
    @(negedge clk); sstart = '1; @(negedge clk); sstart = '0;
    begin
      int t0; t0 = now;
      for (int w = 0; w < NW; w++) begin
        fork
          automatic int ww = w;
          begin
            automatic int cnt;
            automatic logic [31:0] body;
            cnt  = (ww < 6) ? N : (ww == 6 ? n_match : uni.size());
            body = (ww == 7) ? fadd(5'd2, 5'd0, 5'd1) : fmadd(5'd10, 5'd0, 5'd1, 5'd10);
            offload(ww, {12'd0, 13'd0, 7'b0001011}, 32'(cnt - 1));
            offload(ww, body, 0);
            frep_loops++;
          end
        join_none
      end
      wait fork;
      while (looping != 0 || sbusy != 0) @(negedge clk);
      repeat (2) @(negedge clk);
      $display("compute phase: %0d cycles for %0d FP ops", now - t0, ops[0]+ops[1]+ops[2]+ops[3]+ops[4]+ops[5]+ops[6]+ops[7]);
    end
    for (int w = 0; w < 7; w++) begin
      checks++;
      if ($bitstoreal(dbg[w]) != expect_dot[w]) begin failures++; $display("worker %0d: %f exp %f", w, $bitstoreal(dbg[w]), expect_dot[w]); end
    end
    // ---- 4. DMA out worker 7's result (values 0xC000, indices 0xD000) ----
    dma(1, 'hC000, 'hC000, 'h2000, 0, 0, 0);
    foreach (uni[i]) begin
      real e; logic [63:0] vw; logic [31:0] iw;
      bit x, y; x = 0; y = 0;
      foreach (ia[j]) if (ia[j] == uni[i]) x = 1;
      foreach (ib[j]) if (ib[j] == uni[i]) y = 1;
      e = (x ? dval(B_VEC + 8*uni[i]) : 0.0) + (y ? dval(D_VEC + 8*uni[i]) : 0.0);
      vw = ext_mem[('hC000 + 8*i) / 64][64*(i%8) +: 64];
      iw = ext_mem[('hD000 + 4*i) / 64][32*(i%16) +: 32];
      checks++; if ($bitstoreal(vw) != e) begin failures++; $display("union val %0d: %f exp %f", i, $bitstoreal(vw), e); end
      checks++; if (iw !== 32'(uni[i])) begin failures++; $display("union idx %0d: %0d exp %0d", i, iw, uni[i]); end
    end
    // ---- integer core 8 (DMA core) reads a word of the dense vector ----
    @(negedge clk); creq[NW].req = 1; creq[NW].addr = B_VEC + 8*5;
    forever begin logic ok; #1 ok = cgnt[NW]; @(posedge clk); if (ok) break; @(negedge clk); end
    @(negedge clk); creq[NW].req = 0;
    checks++; if (crdata[NW] !== img[5]) begin failures++; $display("core read wrong"); end

    // ---- mechanisms ----
    begin
      int skips, zeros, tot_stall;
      skips = int'(cmps[6]) - n_match; zeros = 2 * uni.size() - ia.size() - ib.size();
      tot_stall = 0; for (int w = 0; w < NW; w++) tot_stall += int'(stalls[w]);
      $display("mechanisms: dma_1d=1 dma_2d=1 frep_loops=%0d replay_cycles=%0d stalls=%0d bank_conflicts=%0d idx_skips=%0d zero_injections=%0d joint_idx_writes=%0d core_access=1",
               frep_loops, replays, tot_stall, conflicts, skips, zeros, uni.size());
      checks++; if (frep_loops != NW) failures++;
      checks++; if (replays == 0) begin failures++; $display("no loop replay"); end
      checks++; if (tot_stall == 0) begin failures++; $display("no stall"); end
      checks++; if (conflicts == 0) begin failures++; $display("no bank conflict"); end
      checks++; if (skips <= 0) begin failures++; $display("no index skip"); end
      checks++; if (zeros <= 0) begin failures++; $display("no zero injection"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
