// fp32_add: single-precision floating-point adder, four pipeline stages.
//
//   stage 1  unpack, classify, order the operands so that |x| >= |y|
//   stage 2  align: shift y right by the exponent difference, keeping guard,
//            round and sticky bits
//   stage 3  add or subtract the 28-bit significands (never negative)
//   stage 4  normalize (one right shift or a leading-zero left shift),
//            round to nearest, ties to even, and pack
//
// The sum appears on s with out_valid exactly four clocks after in_valid; one
// addition can start every clock. The four-stage depth follows the adder of
// the evaluated design; the rest is this design's choice: subnormals are
// flushed to zero, an exact zero sum is +0 (-0 only for -0 + -0), NaN or
// inf - inf gives the quiet NaN 0x7fc00000. Reset (synchronous, active low)
// clears the valid bits only.
module fp32_add
  import nn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t s
);

  typedef struct packed {
    logic        special;     // result fixed by the special cases
    fp32_t       special_res;
    logic        sign;        // sign of the larger operand = sign of the result
    logic        sub;         // effective subtraction
    logic [7:0]  exp;         // exponent of the larger operand
  } ctl_t;

  logic [3:0] v;

  // ---- stage 1 ----
  fp32_fields_t fa, fb, fx, fy;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  ctl_t c1_d, c1, c2, c3;
  logic [23:0] mx_d, my_d, mx1, my1;
  logic [7:0]  diff_d, diff1;

  always_comb begin
    fa = a;
    fb = b;
    a_zero = (fa.exp == 8'd0);
    b_zero = (fb.exp == 8'd0);
    a_inf  = (fa.exp == 8'hff) && (fa.frac == '0);
    b_inf  = (fb.exp == 8'hff) && (fb.frac == '0);
    a_nan  = (fa.exp == 8'hff) && (fa.frac != '0);
    b_nan  = (fb.exp == 8'hff) && (fb.frac != '0);
    if ({fa.exp, fa.frac} >= {fb.exp, fb.frac}) begin
      fx = fa; fy = fb;
    end else begin
      fx = fb; fy = fa;
    end
    c1_d.sign = fx.sign;
    c1_d.sub  = fx.sign ^ fy.sign;
    c1_d.exp  = fx.exp;
    c1_d.special = 1'b1;
    if (a_nan | b_nan | (a_inf & b_inf & (fa.sign ^ fb.sign))) c1_d.special_res = FP32_QNAN;
    else if (a_inf)           c1_d.special_res = a;
    else if (b_inf)           c1_d.special_res = b;
    else if (a_zero & b_zero) c1_d.special_res = {fa.sign & fb.sign, 31'd0};
    else if (b_zero)          c1_d.special_res = a;
    else if (a_zero)          c1_d.special_res = b;
    else begin
      c1_d.special     = 1'b0;
      c1_d.special_res = FP32_ZERO;
    end
    mx_d   = {1'b1, fx.frac};
    my_d   = {1'b1, fy.frac};
    diff_d = fx.exp - fy.exp;
  end

  always_ff @(posedge clk) begin
    c1    <= c1_d;
    mx1   <= mx_d;
    my1   <= my_d;
    diff1 <= diff_d;
  end

  // ---- stage 2: align ----
  logic [27:0] x2_d, y2_d, x2, y2;
  always_comb begin
    logic [49:0] wide;
    x2_d = {1'b0, mx1, 3'b000};
    wide = {my1, 26'd0} >> diff1;                 // 24 significand bits + 26 below
    if (diff1 >= 8'd27) y2_d = 28'd1;             // only the sticky bit survives
    else                y2_d = {1'b0, wide[49:26], wide[25:24], |wide[23:0]};
  end

  always_ff @(posedge clk) begin
    c2 <= c1;
    x2 <= x2_d;
    y2 <= y2_d;
  end

  // ---- stage 3: add / subtract ----
  logic [27:0] sum3;
  always_ff @(posedge clk) begin
    c3   <= c2;
    sum3 <= c2.sub ? (x2 - y2) : (x2 + y2);
  end

  // ---- stage 4: normalize, round, pack ----
  fp32_t res;
  always_comb begin
    logic [26:0] sh;
    logic [23:0] mant;
    logic        g, st, up;
    logic [24:0] mant_r;
    logic signed [9:0] e;
    int          lz;
    lz = 0;
    for (int i = 26; i >= 0; i--) begin
      if (sum3[i]) break;
      lz++;
    end
    if (sum3[27]) begin
      mant = sum3[27:4];
      g    = sum3[3];
      st   = |sum3[2:0];
      e    = 10'(signed'({2'b00, c3.exp})) + 10'sd1;
      sh   = '0;
    end else begin
      sh   = sum3[26:0] << lz;
      mant = sh[26:3];
      g    = sh[2];
      st   = |sh[1:0];
      e    = 10'(signed'({2'b00, c3.exp})) - 10'(lz);
    end
    up     = g & (st | mant[0]);
    mant_r = {1'b0, mant} + 25'(up);
    if (mant_r[24]) e = e + 10'sd1;

    if (c3.special)            res = c3.special_res;
    else if (sum3 == '0)       res = FP32_ZERO;
    else if (e >= 10'sd255)    res = {c3.sign, FP32_INF[30:0]};
    else if (e <= 10'sd0)      res = {c3.sign, 31'd0};
    else                       res = {c3.sign, e[7:0], mant_r[24] ? mant_r[23:1] : mant_r[22:0]};
  end

  always_ff @(posedge clk) begin
    s <= res;
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end
  assign out_valid = v[3];

endmodule
