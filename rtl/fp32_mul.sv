// fp32_mul: single-precision floating-point multiplier, two pipeline stages.
//
// Stage 1 unpacks both operands, adds the exponents, forms the 48-bit product
// of the significands and classifies the special cases. Stage 2 normalizes
// (the product is in [1,4)), rounds to nearest, ties to even, and packs.
// A result appears on p with out_valid exactly two clocks after in_valid;
// one operation can start every clock.
//
// The two-stage split follows the multiplier the evaluated design uses; the
// number formats handled are this design's choice: subnormal inputs and
// results are flushed to zero, any NaN or infinity times zero gives the
// quiet NaN 0x7fc00000, overflow gives infinity. Reset (synchronous, active
// low) clears the valid bits only.
module fp32_mul
  import nn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t p
);

  // ---- stage 1 ----
  fp32_fields_t fa, fb;
  assign fa = a;
  assign fb = b;

  logic        s1_valid, s1_sign, s1_nan, s1_inf, s1_zero;
  logic signed [10:0] s1_exp;          // biased exponent of the product, before normalization
  logic [47:0] s1_prod;

  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  always_comb begin
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hff) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hff) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hff) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hff) && (fb.frac != '0);
  end

  always_ff @(posedge clk) begin
    s1_sign <= fa.sign ^ fb.sign;
    s1_nan  <= a_nan | b_nan | (a_inf & b_zero) | (b_inf & a_zero);
    s1_inf  <= a_inf | b_inf;
    s1_zero <= a_zero | b_zero;
    s1_exp  <= 11'(signed'({3'b000, fa.exp})) + 11'(signed'({3'b000, fb.exp})) - 11'sd127;
    s1_prod <= {24'd0, 1'b1, fa.frac} * {24'd0, 1'b1, fb.frac};
  end

  // ---- stage 2: normalize, round, pack ----
  logic [23:0] mant;
  logic        g, st, up;
  logic [24:0] mant_r;
  logic signed [10:0] e_n;
  fp32_t       res;

  always_comb begin
    if (s1_prod[47]) begin
      mant = s1_prod[47:24];
      g    = s1_prod[23];
      st   = |s1_prod[22:0];
      e_n  = s1_exp + 11'sd1;
    end else begin
      mant = s1_prod[46:23];
      g    = s1_prod[22];
      st   = |s1_prod[21:0];
      e_n  = s1_exp;
    end
    up     = g & (st | mant[0]);
    mant_r = {1'b0, mant} + 25'(up);
    if (mant_r[24]) e_n = e_n + 11'sd1;

    if (s1_nan)                  res = FP32_QNAN;
    else if (s1_inf)             res = {s1_sign, FP32_INF[30:0]};
    else if (s1_zero)            res = {s1_sign, 31'd0};
    else if (e_n >= 11'sd255)    res = {s1_sign, FP32_INF[30:0]};
    else if (e_n <= 11'sd0)      res = {s1_sign, 31'd0};
    else                         res = {s1_sign, e_n[7:0], mant_r[24] ? mant_r[23:1] : mant_r[22:0]};
  end

  always_ff @(posedge clk) begin
    p <= res;
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= in_valid;
      out_valid <= s1_valid;
    end
  end

endmodule
