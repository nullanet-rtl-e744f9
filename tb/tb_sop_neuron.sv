// tb_sop_neuron: checks sum-of-products neurons against Boolean expressions:
// the default cover f = a0 a1' + a0 a2 + a1' a2, and a four-input cover
// a0 a1 + a2' a3 with an extra cube a1 a2 a3'.
module tb_sop_neuron;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] a;
  logic f3, f4;

  sop_neuron u3 (.a(a[2:0]), .f(f3));
  sop_neuron #(.N(4), .CUBES(3),
               .CARE({4'b1110, 4'b1100, 4'b0011}),
               .POL ({4'b0110, 4'b1000, 4'b0011})) u4 (.a(a), .f(f4));

  initial begin
    for (int r = 0; r < 16; r++) begin
      logic e3, e4;
      a = 4'(r);
      #1;
      e3 = (a[0] & ~a[1]) | (a[0] & a[2]) | (~a[1] & a[2]);
      e4 = (a[0] & a[1]) | (~a[2] & a[3]) | (a[1] & a[2] & ~a[3]);
      checks += 2;
      if (f3 !== e3) begin failures++; $display("FAIL f3 a=%b", a); end
      if (f4 !== e4) begin failures++; $display("FAIL f4 a=%b", a); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
