// Self-checking testbench of frep_sequencer: pass-through instructions,
// then hardware loops of several body lengths and repetition counts, with
// random back-pressure from the FPU side. Checks the issued instruction
// sequence and that replayed iterations cost no integer-core cycles.
module tb_frep_sequencer;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, looping;
  logic [31:0] in_instr, in_op, out_instr;
  logic [31:0] exp_q[$];
  int checks = 0, failures = 0, sent = 0;

  frep_sequencer #(.DEPTH(16)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_instr_i(in_instr),
    .in_op_i(in_op), .in_ready_o(in_ready), .out_valid_o(out_valid), .out_instr_o(out_instr),
    .out_ready_i(out_ready), .looping_o(looping));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // FPU side: accepts randomly, compares against the expected order
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0 || out_instr !== exp_q[0]) begin
      failures++; $display("got %h exp %h", out_instr, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  task automatic send(logic [31:0] instr, logic [31:0] op);
    @(negedge clk);
    in_valid = 1; in_instr = instr; in_op = op;
    forever begin
      logic ok;
      #1 ok = in_ready;
      @(posedge clk);
      if (ok) break;
      @(negedge clk);
    end
    sent++;
    #1 in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_instr = 0; in_op = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      exp_q.push_back(32'h0200_0043 + i);
      send(32'h0200_0043 + i, 0);
    end
    for (int t = 0; t < 12; t++) begin
      int len, reps, s0;
      logic [31:0] body[16];
      len  = $urandom_range(1, 16);
      reps = $urandom_range(1, 9);
      for (int k = 0; k < len; k++) body[k] = {$urandom_range(0, 32'h1fffff), 11'h043};
      for (int r = 0; r < reps; r++) for (int k = 0; k < len; k++) exp_q.push_back(body[k]);
      s0 = sent;
      send({12'(len - 1), 13'b0, 7'b0001011}, 32'(reps - 1));
      for (int k = 0; k < len; k++) send(body[k], 0);
      checks++;
      if (sent - s0 != len + 1) failures++;
      // wait until replay is over
      while (looping) @(posedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("loop %0d: %0d left", t, exp_q.size()); end
    end
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
