// Self-checking testbench of fpu_fma64. Operands are drawn so that a*b is
// exact in binary64 (significands of at most 26 bits), which makes the
// simulator's a*b+c (one rounding) the correctly rounded fused result. Also
// checks cancellation, sign variants and special values.
module tb_fpu_fma64;
  logic [63:0] a, b, c, res;
  logic np, nc;
  int checks = 0, failures = 0;

  fpu_fma64 dut (.a_i(a), .b_i(b), .c_i(c), .neg_prod_i(np), .neg_c_i(nc), .res_o(res));

  initial begin #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic real rnd_short();
    // integer of up to 26 bits times a power of two, random sign
    real v;
    int e;
    v = real'($urandom_range(1, (1 << 26) - 1));
    e = $urandom_range(0, 60) - 30;
    v = v * (2.0 ** e);
    return ($urandom_range(0, 1) != 0) ? -v : v;
  endfunction

  function automatic real rnd_any();
    real v;
    v = $bitstoreal({1'b0, 11'($urandom_range(900, 1150)), $urandom, 20'($urandom)});
    return ($urandom_range(0, 1) != 0) ? -v : v;
  endfunction

  task automatic check(real ra, real rb, real rc, bit nprod, bit nadd);
    real exp_r;
    a = $realtobits(ra); b = $realtobits(rb); c = $realtobits(rc); np = nprod; nc = nadd;
    #1;
    exp_r = (nprod ? -(ra * rb) : (ra * rb)) + (nadd ? -rc : rc);
    checks++;
    if (res !== $realtobits(exp_r) && !(exp_r == 0.0 && res[62:0] == 0)) begin
      failures++;
      $display("FMA %h*%h+%h (np%0d nc%0d): %h exp %h", a, b, c, nprod, nadd, res, $realtobits(exp_r));
    end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) check(rnd_short(), rnd_short(), rnd_any(), 1'($urandom), 1'($urandom));
    for (int n = 0; n < 5000; n++) begin
      real x, y;
      x = rnd_short(); y = rnd_short();
      check(x, y, -(x * y), 0, 0);                     // exact cancellation
      check(x, y, x * y * (1.0 + 2.0 ** -40), 0, 1);   // near cancellation
      check(x, 1.0, y, 0, 0);                          // fadd
      check(x, 0.0, y, 0, 0);                          // zero product
    end
    // special values
    a = 64'h7ff0_0000_0000_0000; b = $realtobits(2.0); c = $realtobits(1.0); np = 0; nc = 0; #1;
    checks++; if (res !== 64'h7ff0_0000_0000_0000) failures++;
    a = 64'h7ff0_0000_0000_0000; b = 64'h0; #1;
    checks++; if (res !== 64'h7ff8_0000_0000_0000) failures++;
    a = $realtobits(2.0); b = $realtobits(3.0); c = 64'h7ff8_0000_0000_0001; #1;
    checks++; if (res !== 64'h7ff8_0000_0000_0000) failures++;
    a = $realtobits(1.0e300); b = $realtobits(1.0e300); c = 64'h0; #1;
    checks++; if (res !== 64'h7ff0_0000_0000_0000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
