// Self-checking testbench of fp_subsystem with a testbench scratchpad that
// answers its three streamer ports (random grants, one-cycle reads).
//  1. sparse-dense dot product: ft0 = a_vals (affine), ft1 = b[a_idcs]
//     (indirect, 16-bit indices), fmadd.d fa0, ft0, ft1, fa0 per element.
//  2. sparse-sparse product with intersection: only matching indices reach
//     the FPU; fmul.d ft2, ft0, ft1 streams products out through SU2, which
//     also writes the joint indices.
//  3. sparse vector sum with union: fadd.d ft2, ft0, ft1 per joint index,
//     the missing side contributing a zero.
// Values are small integers so every sum is exact and the reference is
// independent of rounding order. Also counts stalls and index comparisons.
module tb_fp_subsystem;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  logic iv, ir, ssr_en;
  logic [31:0] instr;
  su_cfg_t [2:0] cfg;
  logic [2:0] start, busy, gnt;
  cmp_mode_e cmode;
  mem_req_t [2:0] req;
  logic [2:0][63:0] rdata;
  logic [63:0] dbg;
  logic [31:0] ops, stalls, cmps, illegal;
  logic [63:0] mem [8192];
  int checks = 0, failures = 0;

  fp_subsystem dut (.clk_i(clk), .rst_ni(rst_n), .instr_valid_i(iv), .instr_i(instr), .instr_ready_o(ir),
    .ssr_en_i(ssr_en), .su_cfg_i(cfg), .su_start_i(start), .cmp_mode_i(cmode), .su_busy_o(busy),
    .mem_req_o(req), .mem_gnt_i(gnt), .mem_rdata_i(rdata), .dbg_raddr_i(5'd10), .dbg_rdata_o(dbg),
    .fp_ops_o(ops), .stall_cycles_o(stalls), .cmp_count_o(cmps), .illegal_o(illegal));

  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) for (int p = 0; p < 3; p++) gnt[p] = ($urandom_range(0, 4) != 0);
  always @(posedge clk) for (int p = 0; p < 3; p++) if (req[p].req && gnt[p]) begin
    if (req[p].we) begin
      for (int k = 0; k < 8; k++) if (req[p].be[k]) mem[req[p].addr[15:3]][8*k +: 8] <= req[p].wdata[8*k +: 8];
    end else rdata[p] <= mem[req[p].addr[15:3]];
  end

  function automatic logic [31:0] r4(logic [6:0] opc, logic [4:0] rd, rs1, rs2, rs3);
    return {rs3, 2'b01, rs2, rs1, 3'b000, rd, opc};
  endfunction
  function automatic logic [31:0] opfp(logic [6:0] f7, logic [4:0] rd, rs1, rs2);
    return {f7, rs2, rs1, 3'b000, rd, 7'b1010011};
  endfunction
  task automatic issue(logic [31:0] ins);
    @(negedge clk); iv = 1; instr = ins;
    forever begin logic ok; #1 ok = ir; @(posedge clk); if (ok) break; @(negedge clk); end
    #1 iv = 0;
  endtask
  task automatic go(logic [2:0] which);
    @(negedge clk); start = which; @(negedge clk); start = 0;
  endtask
  function automatic real rd_real(int addr); return $bitstoreal(mem[addr / 8]); endfunction

  int ai[$], bi[$];
  initial begin
    real expc;
    iv = 0; instr = 0; ssr_en = 0; cfg = '0; start = 0; cmode = CMP_OFF; rdata = '0;
    for (int i = 0; i < 8192; i++) mem[i] = $realtobits(real'($urandom_range(0, 20)) - 10.0);
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- 1. sparse-dense dot product (indices 16 bit) ----
    begin
      int n; n = 50; expc = 0.0;
      for (int i = 0; i < n; i++) begin
        int idx; idx = $urandom_range(0, 511);
        mem[(16'h4000 + 2*i) / 8][16*(i%4) +: 16] = 16'(idx);
      end
      for (int i = 0; i < n; i++)
        expc += rd_real(16'h1000 + 8*i) * rd_real(16'h2000 + 8*int'(mem[(16'h4000 + 2*i) / 8][16*(i%4) +: 16]));
      cfg = '0;
      cfg[0].bound[0] = 16'(n - 1); cfg[0].stride[0] = 8; cfg[0].base = 32'h1000;
      cfg[1].indir = 1; cfg[1].idx_size = IDX16; cfg[1].idx_base = 32'h4000; cfg[1].num_idx = 16'(n - 1);
      cfg[1].base = 32'h2000; cfg[1].idx_shift = 3;
      ssr_en = 1; go(3'b011);
      for (int i = 0; i < n; i++) issue(r4(OPC_FMADD, 5'd10, 5'd0, 5'd1, 5'd10));
      @(negedge clk);
      checks++;
      if ($bitstoreal(dbg) != expc) begin failures++; $display("dot %f exp %f", $bitstoreal(dbg), expc); end
      checks++; if (ops != 32'(n)) failures++;
    end

    // ---- 2. intersection, products streamed out with joint indices ----
    begin
      int na, nb, nm, k; int match_a[$], match_b[$];
      ai = {}; bi = {};
      for (int v = 0; v < 300; v++) begin
        if ($urandom_range(0, 3) == 0) ai.push_back(v);
        if ($urandom_range(0, 3) == 0) bi.push_back(v);
      end
      na = ai.size(); nb = bi.size();
      for (int i = 0; i < na; i++) mem[(16'h5000 + 4*i) / 8][32*(i%2) +: 32] = 32'(ai[i]);
      for (int i = 0; i < nb; i++) mem[(16'h5800 + 4*i) / 8][32*(i%2) +: 32] = 32'(bi[i]);
      // dense value arrays indexed by the index itself
      k = 0;
      for (int i = 0; i < na; i++) for (int j = 0; j < nb; j++) if (ai[i] == bi[j]) begin match_a.push_back(ai[i]); end
      nm = match_a.size();
      cfg = '0;
      cfg[0].indir = 1; cfg[0].idx_size = IDX32; cfg[0].idx_base = 32'h5000; cfg[0].num_idx = 16'(na - 1);
      cfg[0].base = 32'h1000; cfg[0].idx_shift = 3;
      cfg[1].indir = 1; cfg[1].idx_size = IDX32; cfg[1].idx_base = 32'h5800; cfg[1].num_idx = 16'(nb - 1);
      cfg[1].base = 32'h2000; cfg[1].idx_shift = 3;
      cfg[2].write = 1; cfg[2].bound[0] = 16'(nm - 1); cfg[2].stride[0] = 8; cfg[2].base = 32'h8000;
      cfg[2].iout = 1; cfg[2].idx_size = IDX32; cfg[2].iout_base = 32'h9000;
      cmode = CMP_INTERSECT; go(3'b111);
      for (int i = 0; i < nm; i++) issue(opfp(7'b0001001, 5'd2, 5'd0, 5'd1));
      while (busy != 0) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int i = 0; i < nm; i++) begin
        real e; e = rd_real(16'h1000 + 8*match_a[i]) * rd_real(16'h2000 + 8*match_a[i]);
        checks++; if (rd_real(16'h8000 + 8*i) != e) begin failures++; $display("prod %0d: %f exp %f", i, rd_real(16'h8000 + 8*i), e); end
        checks++; if (mem[(16'h9000 + 4*i) / 8][32*(i%2) +: 32] !== 32'(match_a[i])) begin failures++; $display("jidx %0d wrong", i); end
      end
      checks++; if (cmps < 32'(nm)) failures++;
      $display("intersection: %0d x %0d indices, %0d matches, %0d comparisons", na, nb, nm, cmps);
    end

    // ---- 3. union: sparse vector sum ----
    begin
      int uni[$]; int nu; int c0;
      for (int v = 0; v < 300; v++) begin
        bit ina, inb; ina = 0; inb = 0;
        foreach (ai[i]) if (ai[i] == v) ina = 1;
        foreach (bi[i]) if (bi[i] == v) inb = 1;
        if (ina || inb) uni.push_back(v);
      end
      nu = uni.size(); c0 = int'(cmps);
      cfg[2].bound[0] = 16'(nu - 1); cfg[2].base = 32'hA000; cfg[2].iout_base = 32'hB000;
      cmode = CMP_UNION; go(3'b111);
      for (int i = 0; i < nu; i++) issue(opfp(7'b0000001, 5'd2, 5'd0, 5'd1));
      while (busy != 0) @(negedge clk);
      repeat (3) @(negedge clk);
      for (int i = 0; i < nu; i++) begin
        real e; bit ina, inb; ina = 0; inb = 0;
        foreach (ai[j]) if (ai[j] == uni[i]) ina = 1;
        foreach (bi[j]) if (bi[j] == uni[i]) inb = 1;
        e = (ina ? rd_real(16'h1000 + 8*uni[i]) : 0.0) + (inb ? rd_real(16'h2000 + 8*uni[i]) : 0.0);
        checks++; if (rd_real(16'hA000 + 8*i) != e) begin failures++; $display("sum %0d: %f exp %f", i, rd_real(16'hA000 + 8*i), e); end
        checks++; if (mem[(16'hB000 + 4*i) / 8][32*(i%2) +: 32] !== 32'(uni[i])) begin failures++; $display("uidx %0d wrong", i); end
      end
      $display("union: %0d joint indices, %0d comparisons", nu, int'(cmps) - c0);
    end
    checks++; if (stalls == 0) begin failures++; $display("no stall seen"); end
    checks++; if (illegal != 0) failures++;
    $display("fp ops %0d, stall cycles %0d", ops, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
