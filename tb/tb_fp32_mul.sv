// tb_fp32_mul: streams random and directed operand pairs through the
// multiplier, one per clock, and checks every product against the binary64
// product rounded to binary32 (exact, since a 24x24-bit product fits in 53
// bits), and that each result appears exactly two clocks after its inputs.
module tb_fp32_mul;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, out_valid;
  logic [31:0] a, b, p;
  fp32_mul dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .p);

  localparam int NT = 2000;
  logic [31:0] ea [NT], eb [NT];
  int cyc = 0, issue_cyc [NT], nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] rnd_fp(input int emin, input int emax);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(emin + int'($urandom_range(emax - emin)));
    return r;
  endfunction

  // result checker
  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e;
    real ra, rb;
    ra = fp32_to_real(ea[nout]);
    rb = fp32_to_real(eb[nout]);
    if (ea[nout][30:23] == 8'hff || eb[nout][30:23] == 8'hff) e = 32'h7f80_0000 | ((ea[nout][31] ^ eb[nout][31]) << 31);
    else if (ra == 0.0 || rb == 0.0) e = (ea[nout][31] ^ eb[nout][31]) << 31;
    else e = to_fp32(ra * rb);
    checks += 2;
    if (p !== e) begin
      failures++;
      $display("FAIL %h * %h = %h exp %h", ea[nout], eb[nout], p, e);
    end
    if (cyc - issue_cyc[nout] != 2) begin
      failures++;
      $display("FAIL latency %0d", cyc - issue_cyc[nout]);
    end
    nout++;
  end

  initial begin
    rst_n = 0; in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      logic [31:0] x, y;
      if (t < 6) begin
        // directed: 1.5*2, -3*0.5, 0*x, inf*2, rounding tie cases, overflow
        case (t)
          0: begin x = 32'h3fc0_0000; y = 32'h4000_0000; end
          1: begin x = 32'hc040_0000; y = 32'h3f00_0000; end
          2: begin x = 32'h0000_0000; y = 32'h4120_0000; end
          3: begin x = 32'h7f80_0000; y = 32'h4000_0000; end
          4: begin x = 32'h3f80_0001; y = 32'h3fff_ffff; end
          default: begin x = 32'h7f00_0000; y = 32'h7f00_0000; end
        endcase
      end else begin
        x = rnd_fp(70, 185);
        y = rnd_fp(70, 185);
      end
      @(negedge clk);
      a = x; b = y; in_valid = 1;
      ea[t] = x; eb[t] = y;
      issue_cyc[t] = cyc;
      @(posedge clk);
      #1 in_valid = 0;
      if ($urandom_range(3) == 0) @(posedge clk);   // bubbles
    end
    repeat (5) @(posedge clk);
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
