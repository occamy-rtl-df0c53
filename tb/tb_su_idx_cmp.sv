// Self-checking testbench of su_idx_cmp: exhaustive small cases of head
// values, exhaustion and readiness in both modes, against a reference of
// the intersection/union decision rules.
module tb_su_idx_cmp;
  import occamy_pkg::*;
  cmp_mode_e mode;
  logic iout_en, hv0, hv1, exh0, exh1, rdy0, rdy1, fire, done, iv, ir;
  logic [31:0] h0, h1, idx;
  su_cmd_e c0, c1;
  int checks = 0, failures = 0;

  su_idx_cmp dut (.mode_i(mode), .iout_en_i(iout_en), .hv0_i(hv0), .h0_i(h0), .exh0_i(exh0), .rdy0_i(rdy0),
    .cmd0_o(c0), .hv1_i(hv1), .h1_i(h1), .exh1_i(exh1), .rdy1_i(rdy1), .cmd1_o(c1), .fire_o(fire),
    .done_o(done), .iout_valid_o(iv), .iout_idx_o(idx), .iout_ready_i(ir));

  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int m = 1; m <= 2; m++)
    for (int v = 0; v < 512; v++) begin
      su_cmd_e e0, e1; logic eok, edone, eemit; logic [31:0] eidx;
      mode = cmp_mode_e'(m);
      {hv0, hv1, exh0, exh1, rdy0, rdy1, ir, iout_en} = 8'(v);
      h0 = 32'($urandom_range(0, 3)); h1 = 32'($urandom_range(0, 3));
      if (v[8]) h1 = h0;
      if (exh0) hv0 = 0;
      if (exh1) hv1 = 0;
      #1;
      e0 = CMD_NONE; e1 = CMD_NONE; eok = 0; eemit = 0; eidx = 0;
      if (m == 1) begin
        edone = exh0 | exh1;
        if (!edone && hv0 && hv1) begin
          eok = 1;
          if (h0 == h1) begin e0 = CMD_ADV; e1 = CMD_ADV; eemit = 1; eidx = h0; end
          else if (h0 < h1) e0 = CMD_SKIP; else e1 = CMD_SKIP;
        end
      end else begin
        edone = exh0 & exh1;
        if (!edone && (hv0 | exh0) && (hv1 | exh1)) begin
          eok = 1; eemit = 1;
          if (exh0)       begin e0 = CMD_ZERO; e1 = CMD_ADV; eidx = h1; end
          else if (exh1)  begin e0 = CMD_ADV; e1 = CMD_ZERO; eidx = h0; end
          else if (h0 == h1) begin e0 = CMD_ADV; e1 = CMD_ADV; eidx = h0; end
          else if (h0 < h1) begin e0 = CMD_ADV; e1 = CMD_ZERO; eidx = h0; end
          else begin e0 = CMD_ZERO; e1 = CMD_ADV; eidx = h1; end
        end
      end
      checks++;
      if (done !== edone || c0 !== e0 || c1 !== e1) begin
        failures++; $display("mode %0d v %b h %0d/%0d: cmd %0d/%0d exp %0d/%0d done %b", m, v, h0, h1, c0, c1, e0, e1, done);
      end
      checks++;
      if (fire !== (eok && (e0 inside {CMD_NONE, CMD_SKIP} || rdy0) && (e1 inside {CMD_NONE, CMD_SKIP} || rdy1)
                    && (!(eemit && iout_en) || ir))) begin failures++; $display("fire wrong v %b", v); end
      checks++;
      if (iv && idx !== eidx) begin failures++; $display("idx wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
