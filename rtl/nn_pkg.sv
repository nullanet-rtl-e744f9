// nn_pkg: types and constants shared by the binary-activation network datapath.
//
// A binary activation is one bit: 1 stands for +1 (sign output non-negative)
// and 0 for -1 in the float layers, and for the values 1/0 of Eq.-1 style
// threshold neurons in the logic layers. Floats are IEEE-754 binary32 words.
// The package also holds the integer hash used to build the placeholder
// cover of the logic layers at elaboration time (see logic_layer).
package nn_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO    = 32'h0000_0000;
  localparam fp32_t FP32_INF     = 32'h7f80_0000;
  localparam fp32_t FP32_QNAN    = 32'h7fc0_0000;

  // Unpacked view of a binary32 word.
  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] frac;
  } fp32_fields_t;


  // 32-bit integer mixer (xorshift-multiply). Gives the literal of cube k,
  // literal l, neuron j of a synthetic cover: index = h % fan_in, polarity = h[31].
  function automatic logic [31:0] cover_hash(input logic [31:0] seed, input int j,
                                             input int k, input int l);
    logic [31:0] x;
    x = seed ^ (32'(j) * 32'h9E37_79B1) ^ (32'(k) * 32'h85EB_CA77) ^ (32'(l) * 32'hC2B2_AE3D);
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

endpackage
