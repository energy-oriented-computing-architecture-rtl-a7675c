// fp16_add: combinational IEEE-754 half-precision adder.
//
// Every FP16 accumulation in the accelerator (Mux-Add and Mul-Add units,
// soma and grad) goes through this adder. The operand of larger magnitude is
// kept, the other is aligned with a 14-bit extension whose bits shifted out are
// folded into a sticky bit, the two are added or subtracted, the result is
// normalised and rounded to nearest, ties to even.
// Design choices (the paper only says "FP16 adder"): subnormal inputs and
// results are flushed to zero; an exact zero sum is +0 unless both operands
// are negative zeros; overflow gives infinity; NaN or inf - inf gives a quiet
// NaN. Purely combinational, no clock.
module fp16_add
  import eocas_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  logic        sa, sb, sx, sy;
  logic [4:0]  ea, eb, ex, ey;
  logic [10:0] ma, mb, mx, my;
  logic        a_zero, b_zero, a_spec, b_spec;
  logic [4:0]  d;
  logic [24:0] big, sml, shifted;
  logic        sticky_in;
  logic [25:0] sum;
  int          lead;
  logic [25:0] norm;
  logic signed [7:0] e_res;
  logic [11:0] mant_r;
  logic        guard, sticky, rnd;

  always_comb begin
    sa = a[15]; sb = b[15];
    ea = a[14:10]; eb = b[14:10];
    a_zero = (ea == 5'd0);
    b_zero = (eb == 5'd0);
    a_spec = (ea == 5'd31);
    b_spec = (eb == 5'd31);
    ma = a_zero ? 11'd0 : {1'b1, a[9:0]};
    mb = b_zero ? 11'd0 : {1'b1, b[9:0]};

    // order by magnitude: x is the larger
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end

    d = ex - ey;
    big = {mx, 14'd0};
    sml = {my, 14'd0};
    if (d >= 5'd25) begin
      shifted = 25'd0;
      sticky_in = (my != 11'd0);
    end else begin
      shifted = sml >> d;
      sticky_in = ((shifted << d) != sml);
    end
    shifted[0] = shifted[0] | sticky_in;

    if (sx == sy) sum = {1'b0, big} + {1'b0, shifted};
    else          sum = {1'b0, big} - {1'b0, shifted};

    lead = -1;
    for (int i = 0; i < 26; i++) if (sum[i]) lead = i;

    norm   = '0;
    e_res  = '0;
    mant_r = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    rnd    = 1'b0;

    if (a_spec || b_spec) begin
      if ((a_spec && a[9:0] != 0) || (b_spec && b[9:0] != 0) ||
          (a_spec && b_spec && sa != sb))
        y = FP16_QNAN;
      else
        y = a_spec ? {sa, 15'h7C00} : {sb, 15'h7C00};
    end else if (lead < 0) begin
      y = {sa & sb, 15'd0};
    end else begin
      norm  = sum << (25 - lead);
      e_res = $signed({3'b000, ex}) + 8'sd1 - 8'($signed(25 - lead));
      mant_r = {1'b0, norm[25:15]};
      guard  = norm[14];
      sticky = |norm[13:0];
      rnd    = guard & (sticky | mant_r[0]);
      mant_r = mant_r + {11'd0, rnd};
      if (mant_r[11]) begin
        mant_r = mant_r >> 1;
        e_res  = e_res + 8'sd1;
      end
      if (e_res <= 8'sd0)       y = {sx, 15'd0};
      else if (e_res >= 8'sd31) y = {sx, 15'h7C00};
      else                      y = {sx, e_res[4:0], mant_r[9:0]};
    end
  end

endmodule
