// fp16_mul: combinational IEEE-754 half-precision multiplier.
//
// Used by the Mul-Add units of the BP array and by the soma and grad units.
// The 11x11-bit significand product is normalised by at most one place and
// rounded to nearest, ties to even. Design choices (the paper only says "FP16
// Mul"): subnormal inputs and results are flushed to signed zero, overflow
// gives infinity, NaN or inf*0 gives a quiet NaN. Purely combinational.
module fp16_mul
  import eocas_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  logic        s;
  logic [4:0]  ea, eb;
  logic        a_zero, b_zero, a_spec, b_spec;
  logic [21:0] p;
  logic signed [7:0] e_res;
  logic [11:0] mant_r;
  logic        guard, sticky, rnd;

  always_comb begin
    s  = a[15] ^ b[15];
    ea = a[14:10]; eb = b[14:10];
    a_zero = (ea == 5'd0);
    b_zero = (eb == 5'd0);
    a_spec = (ea == 5'd31);
    b_spec = (eb == 5'd31);
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e_res  = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 8'sd15;
    mant_r = '0;
    guard  = 1'b0;
    sticky = 1'b0;
    if (p[21]) begin
      e_res  = e_res + 8'sd1;
      mant_r = {1'b0, p[21:11]};
      guard  = p[10];
      sticky = |p[9:0];
    end else begin
      mant_r = {1'b0, p[20:10]};
      guard  = p[9];
      sticky = |p[8:0];
    end
    rnd    = guard & (sticky | mant_r[0]);
    mant_r = mant_r + {11'd0, rnd};
    if (mant_r[11]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 8'sd1;
    end

    if ((a_spec && a[9:0] != 0) || (b_spec && b[9:0] != 0) ||
        (a_spec && b_zero) || (b_spec && a_zero))
      y = FP16_QNAN;
    else if (a_spec || b_spec)  y = {s, 15'h7C00};
    else if (a_zero || b_zero)  y = {s, 15'd0};
    else if (e_res <= 8'sd0)    y = {s, 15'd0};
    else if (e_res >= 8'sd31)   y = {s, 15'h7C00};
    else                        y = {s, e_res[4:0], mant_r[9:0]};
  end

endmodule
