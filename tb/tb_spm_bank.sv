// Self-checking testbench of spm_bank: random byte-masked writes against a
// reference array, then read-back of every touched word, checking the
// one-cycle read latency.
module tb_spm_bank;
  localparam int unsigned WORDS = 512;
  logic clk = 0, req, we;
  logic [8:0] addr;
  logic [7:0] be;
  logic [63:0] wdata, rdata;
  logic [63:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  spm_bank #(.WORDS(WORDS), .DATA_W(64)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 9'(i); be = 8'hff; wdata = {32'(i), 32'hA5A5_0000 | 32'(i)};
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk); req = 1; we = 1; addr = 9'($urandom_range(0, WORDS-1)); be = 8'($urandom);
      wdata = {$urandom, $urandom};
      for (int b = 0; b < 8; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
    end
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); req = 1; we = 0; addr = 9'(i);
      @(negedge clk); req = 0;
      checks++;
      if (rdata !== ref_mem[i]) begin failures++; $display("word %0d: %h exp %h", i, rdata, ref_mem[i]); end
      // data holds while idle
      @(negedge clk); checks++; if (rdata !== ref_mem[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
