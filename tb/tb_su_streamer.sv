// Self-checking testbench of su_streamer (indirect-capable variant) with a
// testbench memory that grants at random. Runs a 3D affine read, an affine
// write, and indirect reads with 8-, 16- and 32-bit indices; compares every
// value popped with a reference computed from the configuration. A final
// indirect read with a memory that always grants checks the access count:
// n values with b-bit indices take n + n*b/64 port accesses, and about
// n + 3*n*b/64 cycles (each index word costs a fetch, a response and an
// unpack cycle).
module tb_su_streamer;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  su_cfg_t cfg;
  logic start, busy, gnt, rd_valid, rd_pop, wr_ready, wr_valid;
  mem_req_t req;
  logic [63:0] rdata, rd_data, wr_data;
  logic [63:0] mem [4096];
  logic always_grant = 0;
  int checks = 0, failures = 0, port_cycles = 0;

  su_streamer #(.DEPTH(4), .HAS_INDIR(1), .HAS_IOUT(0)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg),
    .start_i(start), .cmp_en_i(1'b0), .busy_o(busy), .mem_req_o(req), .mem_gnt_i(gnt), .mem_rdata_i(rdata),
    .rd_valid_o(rd_valid), .rd_data_o(rd_data), .rd_pop_i(rd_pop), .wr_ready_o(wr_ready), .wr_valid_i(wr_valid),
    .wr_data_i(wr_data), .cmp_head_valid_o(), .cmp_head_o(), .cmp_exh_o(), .cmp_ready_o(), .cmp_cmd_i(CMD_NONE),
    .cmp_fire_i(1'b0), .cmp_done_i(1'b0), .iout_valid_i(1'b0), .iout_idx_i('0), .iout_ready_o());

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) gnt = always_grant || ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (req.req && gnt) begin
    port_cycles++;
    if (req.we) begin
      for (int k = 0; k < 8; k++) if (req.be[k]) mem[req.addr[14:3]][8*k +: 8] <= req.wdata[8*k +: 8];
    end else rdata <= mem[req.addr[14:3]];
  end

  task automatic run_read(int n, logic [63:0] expv[$]);
    int got; got = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (got < n) begin
      rd_pop = rd_valid && ($urandom_range(0, 2) != 0);
      if (rd_pop) begin
        checks++;
        if (rd_data !== expv[got]) begin failures++; $display("elem %0d: %h exp %h", got, rd_data, expv[got]); end
        got++;
      end
      @(negedge clk); rd_pop = 0;
    end
    while (busy) @(negedge clk);
    checks++; if (rd_valid) begin failures++; $display("extra data"); end
  endtask

  initial begin
    logic [63:0] expv[$];
    start = 0; rd_pop = 0; wr_valid = 0; wr_data = 0; cfg = '0; rdata = 0;
    for (int i = 0; i < 4096; i++) mem[i] = {32'hC0DE_0000, 32'(i)};
    repeat (2) @(negedge clk); rst_n = 1;
    // 3D affine read: 3 x 4 x 2, strides 8, 64, 1024
    cfg.dims = 2; cfg.bound[0] = 2; cfg.bound[1] = 3; cfg.bound[2] = 1;
    cfg.stride[0] = 8; cfg.stride[1] = 64; cfg.stride[2] = 1024; cfg.base = 32'h100;
    expv = {};
    for (int k = 0; k < 2; k++) for (int j = 0; j < 4; j++) for (int i = 0; i < 3; i++)
      expv.push_back(mem[(32'h100 + i*8 + j*64 + k*1024) / 8]);
    run_read(24, expv);
    // 1D affine write of 10 values, stride 16
    cfg = '0; cfg.bound[0] = 9; cfg.stride[0] = 16; cfg.base = 32'h4000; cfg.write = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 10; i++) begin
      wr_valid = 1; wr_data = 64'hAB00 + 64'(i);
      while (!wr_ready) @(negedge clk);
      @(negedge clk); wr_valid = 0;
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 10; i++) begin checks++; if (mem[(32'h4000 + i*16)/8] !== 64'hAB00 + 64'(i)) failures++; end
    // indirect reads with each index width
    for (int sz = 0; sz < 3; sz++) begin
      int n; n = 37;
      for (int i = 0; i < n; i++) begin
        int idx; idx = $urandom_range(0, 255);
        if (sz == 0) mem[(32'h6000 + i) / 8][8*(i%8) +: 8] = 8'(idx);
        if (sz == 1) mem[(32'h6000 + 2*i) / 8][16*(i%4) +: 16] = 16'(idx);
        if (sz == 2) mem[(32'h6000 + 4*i) / 8][32*(i%2) +: 32] = 32'(idx);
      end
      expv = {};
      for (int i = 0; i < n; i++) begin
        int idx;
        idx = (sz == 0) ? int'(mem[(32'h6000 + i) / 8][8*(i%8) +: 8]) :
              (sz == 1) ? int'(mem[(32'h6000 + 2*i) / 8][16*(i%4) +: 16]) :
                          int'(mem[(32'h6000 + 4*i) / 8][32*(i%2) +: 32]);
        expv.push_back(mem[(32'h200 + idx * 8) / 8]);
      end
      cfg = '0; cfg.indir = 1; cfg.idx_size = idx_size_e'(sz); cfg.idx_base = 32'h6000; cfg.num_idx = 16'(n - 1);
      cfg.base = 32'h200; cfg.idx_shift = 3;
      run_read(n, expv);
    end
    // access count with full grant and a fast consumer: 32 values, 16-bit indices -> 32 + 8 accesses
    always_grant = 1;
    cfg = '0; cfg.indir = 1; cfg.idx_size = IDX16; cfg.idx_base = 32'h6000; cfg.num_idx = 31; cfg.base = 32'h200; cfg.idx_shift = 3;
    port_cycles = 0;
    begin
      int cyc; cyc = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (busy || rd_valid) begin rd_pop = rd_valid; @(negedge clk); cyc++; end
      rd_pop = 0;
      checks++; if (port_cycles != 40) begin failures++; $display("port cycles %0d exp 40", port_cycles); end
      checks++; if (cyc > 60) begin failures++; $display("indirect stream took %0d cycles", cyc); end
      $display("indirect 32 x 16-bit: %0d port cycles, %0d cycles", port_cycles, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
