// tb_mp_neuron: checks threshold neurons built by input enumeration against
// hand-written truth tables: the three-input example neuron (weights 1.4,
// -3.4, 2.8, bias 0.61; expected f column 0,1,0,0,1,1,0,1 for a0a1a2 = 000..111),
// the AND, OR and NOT neurons and the two-layer XOR network.
module tb_mp_neuron;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] a3;
  logic       f_ex, f_and, f_or, f_not, h0, h1, h2, f_xor;

  mp_neuron u_ex (.a(a3), .f(f_ex));
  mp_neuron #(.N(2), .W({16'sd100, 16'sd100}), .B(150)) u_and (.a(a3[1:0]), .f(f_and));
  mp_neuron #(.N(2), .W({16'sd100, 16'sd100}), .B(50))  u_or  (.a(a3[1:0]), .f(f_or));
  mp_neuron #(.N(1), .W(-16'sd100), .B(0))              u_not (.a(a3[0]), .f(f_not));
  // XOR: hidden neurons with biases 1, 2, 1; output weights 1, -2, 1 and bias 1
  mp_neuron #(.N(1), .W(16'sd100), .B(100))               u_h0 (.a(a3[0]), .f(h0));
  mp_neuron #(.N(2), .W({16'sd100, 16'sd100}), .B(200))   u_h1 (.a(a3[1:0]), .f(h1));
  mp_neuron #(.N(1), .W(16'sd100), .B(100))               u_h2 (.a(a3[1]), .f(h2));
  mp_neuron #(.N(3), .W({16'sd100, -16'sd200, 16'sd100}), .B(100)) u_x (.a({h2, h1, h0}), .f(f_xor));

  // f column of the example truth table, row index = {a0,a1,a2}
  localparam bit EX_F [8] = '{0, 1, 0, 0, 1, 1, 0, 1};

  task automatic chk(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%b got %b exp %b", what, a3, got, exp);
    end
  endtask

  initial begin
    for (int r = 0; r < 8; r++) begin
      a3 = {r[0], r[1], r[2]};          // a[0]=a0 is the leftmost table column
      #1;
      chk("example", f_ex, EX_F[r]);
      chk("and", f_and, a3[0] & a3[1]);
      chk("or",  f_or,  a3[0] | a3[1]);
      chk("not", f_not, ~a3[0]);
      chk("xor", f_xor, a3[0] ^ a3[1]);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
