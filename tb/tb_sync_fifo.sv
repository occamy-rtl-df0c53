// Self-checking testbench of sync_fifo: random push/pop traffic against a
// queue model, checking data order, full/empty flags and usage.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push, pop, full, empty;
  logic [63:0] wdata, rdata;
  logic [2:0] usage;
  logic [63:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.DEPTH(4), .WIDTH(64)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(1'b0), .push_i(push),
    .wdata_i(wdata), .pop_i(pop), .rdata_o(rdata), .full_o(full), .empty_o(empty), .usage_o(usage));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (full !== (q.size() == 4) || empty !== (q.size() == 0) || usage !== 3'(q.size())) begin
        failures++; $display("flags wrong at %0d: size %0d full %b empty %b usage %0d", n, q.size(), full, empty, usage);
      end
      pop  = ($urandom_range(0, 2) != 0) && q.size() > 0;
      push = ($urandom_range(0, 2) != 0) && (q.size() < 4 || pop);
      wdata = {$urandom, $urandom};
      if (pop) begin
        checks++;
        if (rdata !== q[0]) begin failures++; $display("data %h exp %h", rdata, q[0]); end
      end
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
