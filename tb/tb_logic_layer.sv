// tb_logic_layer: checks a small (12 inputs, 5 neurons, 4 cubes of 3
// literals) and a full-size (100 x 100, 16 cubes of 6 literals) logic layer
// against the reference cover model on random input vectors; also counts
// that neurons both fire and stay off.
module tb_logic_layer;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, ones = 0, zeros = 0;

  logic [11:0]  as;
  logic [4:0]   ys;
  logic [99:0]  al, yl;

  logic_layer #(.IN(12), .OUT(5), .CUBES(4), .LITS(3), .SEED(32'hCAFE_0001)) u_small (.a(as), .y(ys));
  logic_layer u_large (.a(al), .y(yl));

  initial begin
    bit in[];
    for (int t = 0; t < 300; t++) begin
      as = 12'($urandom);
      al = {$urandom, $urandom, $urandom, $urandom};
      #1;
      in = new[12];
      for (int q = 0; q < 12; q++) in[q] = as[q];
      for (int n = 0; n < 5; n++) begin
        checks++;
        if (ys[n] !== neuron_eval(32'hCAFE_0001, n, 4, 3, 12, in)) begin
          failures++; $display("FAIL small n=%0d a=%h", n, as);
        end
      end
      in = new[100];
      for (int q = 0; q < 100; q++) in[q] = al[q];
      for (int n = 0; n < 100; n++) begin
        bit e;
        e = neuron_eval(32'h1234_5678, n, 16, 6, 100, in);
        checks++;
        if (e) ones++; else zeros++;
        if (yl[n] !== e) begin failures++; $display("FAIL large n=%0d", n); end
      end
      @(posedge clk);
    end
    if (ones == 0 || zeros == 0) begin failures++; $display("FAIL outputs never toggle"); end
    $display("large layer: %0d ones, %0d zeros", ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
