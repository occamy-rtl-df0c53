// Double-precision fused multiply-add: res = (-1)^neg_prod * a * b + (-1)^neg_c * c.
//
// The product of the two 53-bit significands is kept exact (106 bits). The
// operand with the larger exponent is placed at the top of a 220-bit window
// and the other is shifted right into it, bits shifted out being collected
// in a sticky bit; after the signed addition the result is normalised by a
// leading-one search and rounded once, to nearest with ties to even. One
// rounding of the exact a*b+c is what makes the operation fused.
//
// Special values: NaN operands and invalid operations (inf*0, inf-inf) give
// the canonical quiet NaN; infinities propagate; exact zero results follow
// the IEEE sign rules for round-to-nearest. Subnormal operands are read as
// zero and results below the normal range are flushed to signed zero: this
// is a simplification of this design. The unit is purely combinational; the
// FP subsystem registers its result. Only FP64 is built: the narrower SIMD
// formats, the widening dot-product and three-addend instructions of the
// full FPU are not.
module fpu_fma64 (
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  input  logic        neg_prod_i,
  input  logic        neg_c_i,
  output logic [63:0] res_o
);
  localparam int unsigned W = 220;
  localparam logic [63:0] QNAN = 64'h7ff8_0000_0000_0000;

  logic        sa, sb, sc, sp;
  logic [10:0] ea, eb, ec;
  logic [51:0] fa, fb, fc;
  assign {sa, ea, fa} = a_i;
  assign {sb, eb, fb} = b_i;
  assign {sc, ec, fc} = c_i;

  always_comb begin
    logic        a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
    logic        p_zero, p_inf, s_c, s_r;
    logic [52:0] ma, mb, mc;
    logic [105:0] mp;
    int          e_p, e_c, e_big, d, msb, e_res;
    logic [W-1:0] big, sml, sum, norm;
    logic        s_big, s_small, sticky;
    logic [52:0] mant;
    logic        guard, rest, round_up;
    logic [53:0] mant_r;
    logic [W-1:0] fp_, fc_;
    int          ep_, ec_;

    sp = sa ^ sb ^ neg_prod_i;
    s_c = sc ^ neg_c_i;
    a_zero = (ea == 0); b_zero = (eb == 0); c_zero = (ec == 0);
    a_inf  = (ea == 11'h7ff) && (fa == 0);
    b_inf  = (eb == 11'h7ff) && (fb == 0);
    c_inf  = (ec == 11'h7ff) && (fc == 0);
    a_nan  = (ea == 11'h7ff) && (fa != 0);
    b_nan  = (eb == 11'h7ff) && (fb != 0);
    c_nan  = (ec == 11'h7ff) && (fc != 0);
    p_zero = a_zero || b_zero;
    p_inf  = a_inf || b_inf;

    ma = {1'b1, fa}; mb = {1'b1, fb}; mc = {1'b1, fc};
    mp = ma * mb;
    // value(p) = mp * 2^(e_p), value(c) = mc * 2^(e_c), exponents of the LSB
    e_p = int'(ea) + int'(eb) - 2150;
    e_c = int'(ec) - 1075;
    big = '0; sml = '0; s_big = 1'b0; s_small = 1'b0; e_big = 0; d = 0;
    sum = '0; norm = '0; msb = -1; e_res = 0; sticky = 1'b0;
    fp_ = '0; fc_ = '0; ep_ = 0; ec_ = 0;
    mant = '0; guard = 1'b0; rest = 1'b0; round_up = 1'b0; mant_r = '0; s_r = 1'b0;

    if (a_nan || b_nan || c_nan || (p_inf && p_zero) || (p_inf && c_inf && (sp != s_c))) begin
      res_o = QNAN;
    end else if (p_inf) begin
      res_o = {sp, 11'h7ff, 52'b0};
    end else if (c_inf) begin
      res_o = {s_c, 11'h7ff, 52'b0};
    end else if (p_zero && c_zero) begin
      res_o = {sp & s_c, 63'b0};
    end else if (p_zero) begin
      res_o = {s_c, ec, fc};
    end else begin
      // Both operands as fields with value = field * 2^(e - (W-107)); the
      // top bit stays free for the carry of the addition.
      fp_ = {1'b0, mp, {(W-107){1'b0}}};             ep_ = e_p;
      fc_ = {1'b0, mc, {(W-54){1'b0}}};              ec_ = e_c - 53;
      if (c_zero) begin
        fc_ = '0; ec_ = ep_;
      end
      if (c_zero || ep_ >= ec_) begin
        big = fp_; s_big = sp; e_big = ep_;
        sml = fc_; s_small = s_c; d = ep_ - ec_;
      end else begin
        big = fc_; s_big = s_c; e_big = ec_;
        sml = fp_; s_small = sp; d = ec_ - ep_;
      end
      if (d >= W) begin
        sticky = |sml;
        sml  = '0;
      end else begin
        for (int i = 0; i < W; i++)
          if (i < d && sml[i]) sticky = 1'b1;
        sml = sml >> d;
      end
      sml[0] = sml[0] | sticky;
      if (s_big == s_small) begin
        sum = big + sml; s_r = s_big;
      end else if (big >= sml) begin
        sum = big - sml; s_r = s_big;
      end else begin
        sum = sml - big; s_r = s_small;
      end
      // value(sum) = sum * 2^(e_big - (W-107))
      for (int i = 0; i < W; i++) if (sum[i]) msb = i;
      if (msb < 0) begin
        res_o = {1'b0, 63'b0};      // exact cancellation: +0 in round-to-nearest
      end else begin
        norm  = sum << (W - 1 - msb);
        mant  = norm[W-1 -: 53];
        guard = norm[W-54];
        rest  = |norm[W-55:0];
        round_up = guard && (rest || mant[0]);
        mant_r = {1'b0, mant} + 54'(round_up);
        // value = mant * 2^(e_big - (W-107) + msb - 52)
        e_res = e_big - (W - 107) + msb - 52 + 1075;
        if (mant_r[53]) begin
          mant_r = mant_r >> 1;
          e_res  = e_res + 1;
        end
        if (e_res >= 2047)     res_o = {s_r, 11'h7ff, 52'b0};
        else if (e_res <= 0)   res_o = {s_r, 63'b0};
        else                   res_o = {s_r, 11'(e_res), mant_r[51:0]};
      end
    end
  end
endmodule
