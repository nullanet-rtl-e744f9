// tb_ref_pkg: reference models used by the testbenches, written independently
// of the RTL.
//
//  * to_fp32 rounds a real (binary64) value to binary32, nearest-even, with
//    results below the normal range flushed to zero (the convention of the
//    RTL float units). fp32_to_real converts back.
//  * cover_lit gives literal l of cube k of neuron n of the placeholder logic
//    layer covers: h = mix(seed ^ n*0x9E3779B1 ^ k*0x85EBCA77 ^ l*0xC2B2AE3D),
//    input index h mod fan_in, required value h[31], where mix is
//    x ^= x>>15; x *= 0x2C1B3C6D; x ^= x>>12; x *= 0x297A2D39; x ^= x>>15.
//    neuron_eval applies such a cover to an input vector.
package tb_ref_pkg;

  function automatic real fp32_to_real(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] top;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    top = {1'b0, m[52:29]};
    g   = m[28];
    st  = |m[27:0];
    if (g && (st || top[0])) top = top + 25'd1;
    if (top[24]) begin
      top = top >> 1;
      e   = e + 1;
    end
    if (e >= 255) return {s, 8'hff, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, 8'(e), top[22:0]};
  endfunction

  function automatic logic [31:0] mix32(input logic [31:0] x0);
    logic [31:0] x;
    x = x0;
    x ^= x >> 15;
    x = x * 32'h2C1B3C6D;
    x ^= x >> 12;
    x = x * 32'h297A2D39;
    x ^= x >> 15;
    return x;
  endfunction

  function automatic logic [31:0] cover_lit(input logic [31:0] seed, input int n, input int k, input int l);
    return mix32(seed ^ (n * 32'h9E3779B1) ^ (k * 32'h85EBCA77) ^ (l * 32'hC2B2AE3D));
  endfunction

  // Evaluate neuron n of a placeholder cover on input bits in[0..fan_in-1].
  function automatic bit neuron_eval(input logic [31:0] seed, input int n, input int cubes,
                                     input int lits, input int fan_in, input bit in[]);
    for (int k = 0; k < cubes; k++) begin
      int  req[];
      bit  ok;
      req = new[fan_in];
      foreach (req[q]) req[q] = -1;
      for (int l = 0; l < lits; l++) begin
        logic [31:0] h;
        h = cover_lit(seed, n, k, l);
        req[h % fan_in] = int'(h[31]);
      end
      ok = 1;
      for (int q = 0; q < fan_in; q++)
        if (req[q] != -1 && int'(in[q]) != req[q]) ok = 0;
      if (ok) return 1;
    end
    return 0;
  endfunction

endpackage
