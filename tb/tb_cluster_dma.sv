// Self-checking testbench of cluster_dma. The system side is a memory model
// that grants at random and answers reads in order after a random latency;
// the scratchpad side a one-cycle memory with random grants. Runs a 1D copy
// system -> scratchpad and a 2D copy scratchpad -> system with distinct
// strides and checks every byte, then measures a 1D copy with both sides
// always granting and a fixed latency: the engine must move one beat per
// cycle after the first response.
module tb_cluster_dma;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  dma_cfg_t cfg;
  logic start, busy, egnt, ervalid, sgnt;
  wide_req_t ereq, sreq;
  logic [511:0] erdata, srdata;
  logic [31:0] beats;
  logic [511:0] ext_mem [256];   // 16 KiB
  logic [511:0] spm_mem [64];    //  4 KiB
  logic fast = 0;
  int checks = 0, failures = 0;
  logic [511:0] rq_data[$]; int rq_time[$]; int now = 0;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .start_i(start), .busy_o(busy),
    .ext_req_o(ereq), .ext_gnt_i(egnt), .ext_rvalid_i(ervalid), .ext_rdata_i(erdata),
    .spm_req_o(sreq), .spm_gnt_i(sgnt), .spm_rdata_i(srdata), .beats_o(beats));

  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) begin
    egnt = fast || ($urandom_range(0, 2) != 0);
    sgnt = fast || ($urandom_range(0, 2) != 0);
    ervalid = 0;
    if (rq_data.size() > 0 && rq_time[0] <= now) begin
      ervalid = 1; erdata = rq_data.pop_front(); void'(rq_time.pop_front());
    end
  end
  always @(posedge clk) begin
    now++;
    if (ereq.req && egnt) begin
      if (ereq.we) ext_mem[ereq.addr[13:6]] <= ereq.wdata;
      else begin
        int lat; lat = fast ? 3 : $urandom_range(1, 12);
        rq_data.push_back(ext_mem[ereq.addr[13:6]]);
        rq_time.push_back(rq_time.size() > 0 && rq_time[$] > now + lat ? rq_time[$] : now + lat);
      end
    end
    if (sreq.req && sgnt) begin
      if (sreq.we) spm_mem[sreq.addr[11:6]] <= sreq.wdata; else srdata <= spm_mem[sreq.addr[11:6]];
    end
  end

  task automatic xfer(logic to_ext, int src, int dst, int len, int ss, int ds, int reps);
    cfg = '0; cfg.to_ext = to_ext; cfg.src = 32'(src); cfg.dst = 32'(dst); cfg.len = 32'(len);
    cfg.src_stride = 32'(ss); cfg.dst_stride = 32'(ds); cfg.reps = 16'(reps);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    start = 0; cfg = '0; erdata = '0; srdata = '0;
    for (int i = 0; i < 256; i++) ext_mem[i] = {16{$urandom}};
    for (int i = 0; i < 64; i++) spm_mem[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1D: 1 KiB from system 0x800 to scratchpad 0x100
    xfer(0, 32'h800, 32'h100, 1024, 0, 0, 0);
    for (int i = 0; i < 16; i++) begin checks++; if (spm_mem[4 + i] !== ext_mem[32 + i]) failures++; end
    // 2D: 5 rows of 192 bytes, scratchpad stride 256, system stride 512, to 0x2000
    xfer(1, 32'h0, 32'h2000, 192, 256, 512, 4);
    for (int r = 0; r < 5; r++) for (int c = 0; c < 3; c++) begin
      checks++;
      if (ext_mem[(32'h2000 + r*512)/64 + c] !== spm_mem[(r*256)/64 + c]) begin failures++; $display("2D row %0d col %0d", r, c); end
    end
    // untouched line between rows must keep its old value
    checks++; if (ext_mem[(32'h2000 + 192)/64] === spm_mem[3]) failures++;
    // throughput
    fast = 1;
    begin
      int t0, b0; t0 = now; b0 = int'(beats);
      xfer(0, 32'h0, 32'h0, 2048, 0, 0, 0);
      checks++; if (int'(beats) - b0 != 32) failures++;
      checks++; if (now - t0 > 32 + 3 + 6) begin failures++; $display("32 beats took %0d cycles", now - t0); end
      $display("1D 2 KiB: %0d beats in %0d cycles", int'(beats) - b0, now - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
