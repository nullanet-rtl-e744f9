// fp32_mac: unfused single-precision multiply-accumulate, r = (a*b) + c.
//
// The two-stage multiplier feeds the four-stage adder, so the MAC has six
// pipeline stages: r appears with out_valid six clocks after in_valid, and a
// new operation can start every clock. The product is rounded before the
// addition (unfused), as in the evaluated design. The addend c is presented
// together with a and b and is delayed two clocks inside to meet the product.
module fp32_mac
  import nn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  input  fp32_t c,
  output logic  out_valid,
  output fp32_t r
);

  fp32_t prod, c_d1, c_d2;
  logic  prod_valid;

  fp32_mul u_mul (.clk, .rst_n, .in_valid, .a, .b, .out_valid(prod_valid), .p(prod));

  always_ff @(posedge clk) begin
    c_d1 <= c;
    c_d2 <= c_d1;
  end

  fp32_add u_add (.clk, .rst_n, .in_valid(prod_valid), .a(prod), .b(c_d2), .out_valid, .s(r));

endmodule
