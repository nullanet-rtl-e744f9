// tb_fp32_mac: streams random (a, b, c) triples through the multiply-
// accumulate unit and checks r = round(round(a*b) + c) against a binary64
// reference, and the six-clock latency. The triples keep the product and the
// addend within 2^28 of each other so the binary64 sum is exact.
module tb_fp32_mac;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, out_valid;
  logic [31:0] a, b, c, r;
  fp32_mac dut (.clk, .rst_n, .in_valid, .a, .b, .c, .out_valid, .r);

  localparam int NT = 2000;
  logic [31:0] ea [NT], eb [NT], ec [NT];
  int cyc = 0, issue_cyc [NT], nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] prod, e;
    real rs;
    prod = to_fp32(fp32_to_real(ea[nout]) * fp32_to_real(eb[nout]));
    rs = fp32_to_real(prod) + fp32_to_real(ec[nout]);
    e = (rs == 0.0) ? 32'h0 : to_fp32(rs);
    checks += 2;
    if (r !== e) begin
      failures++;
      $display("FAIL %h * %h + %h = %h exp %h", ea[nout], eb[nout], ec[nout], r, e);
    end
    if (cyc - issue_cyc[nout] != 6) begin
      failures++;
      $display("FAIL latency %0d", cyc - issue_cyc[nout]);
    end
    nout++;
  end

  initial begin
    rst_n = 0; in_valid = 0; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      logic [31:0] x, y, z;
      x = $urandom; x[30:23] = 8'(120 + $urandom_range(10));
      y = $urandom; y[30:23] = 8'(120 + $urandom_range(10));
      z = $urandom; z[30:23] = 8'(110 + $urandom_range(30));
      @(negedge clk);
      a = x; b = y; c = z; in_valid = 1;
      ea[t] = x; eb[t] = y; ec[t] = z;
      issue_cyc[t] = cyc;
      @(posedge clk);
      #1 in_valid = 0;
      if ($urandom_range(3) == 0) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    if (nout != NT) begin failures++; $display("FAIL got %0d results", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
