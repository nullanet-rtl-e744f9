// tb_enum_layer: checks the three-neuron example layer against its gate-level
// realization: y0 = y2 = a0 a1' + a0 a2 + a1' a2 and y1 = a0' + a1'.
module tb_enum_layer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] a, y;
  enum_layer dut (.a(a), .y(y));

  initial begin
    for (int r = 0; r < 8; r++) begin
      logic [2:0] e;
      a = 3'(r);
      #1;
      e[0] = (a[0] & ~a[1]) | (a[0] & a[2]) | (~a[1] & a[2]);
      e[1] = ~a[0] | ~a[1];
      e[2] = e[0];
      for (int n = 0; n < 3; n++) begin
        checks++;
        if (y[n] !== e[n]) begin failures++; $display("FAIL a=%b y%0d=%b", a, n, y[n]); end
      end
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
