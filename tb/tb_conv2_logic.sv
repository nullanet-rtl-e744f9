// tb_conv2_logic: a 7x7x2 binary map through a 3-filter logic convolution
// (4 cubes of 3 literals per filter): 5x5x3 responses pooled to 2x2x3. The
// reference gathers each patch (bit (ky*3+kx)*2 + c), applies the reference
// cover model (seed 0x0C0FFEE0) and ORs 2x2 windows. Checks every pooled bit,
// the cycle count (P1-2)^2 + 3 and that pooling took a later position.
module tb_conv2_logic;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, pool_later = 0;

  localparam int CI = 2, CO = 3, P1 = 7, O = P1 - 2, P2 = O / 2;
  logic rst_n, start, busy, done;
  logic [P1*P1*CI-1:0] fmap;
  logic [P2*P2*CO-1:0] pooled;

  conv2_logic #(.C_IN(CI), .C_OUT(CO), .P1(P1), .CUBES(4), .LITS(3)) dut (
    .clk, .rst_n, .start, .fmap_in(fmap), .busy, .done, .pooled);

  initial begin
    rst_n = 0; start = 0; fmap = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      bit r [O][O][CO];
      int cycles;
      fmap = {$urandom, $urandom, $urandom, $urandom};
      for (int oy = 0; oy < O; oy++)
        for (int ox = 0; ox < O; ox++) begin
          bit in[];
          in = new[9 * CI];
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int c = 0; c < CI; c++)
                in[(ky * 3 + kx) * CI + c] = fmap[((oy + ky) * P1 + ox + kx) * CI + c];
          for (int n = 0; n < CO; n++) r[oy][ox][n] = neuron_eval(32'h0C0F_FEE0, n, 4, 3, 9 * CI, in);
        end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != O * O + 3) begin failures++; $display("FAIL cycles %0d", cycles); end
      for (int py = 0; py < P2; py++)
        for (int px = 0; px < P2; px++)
          for (int n = 0; n < CO; n++) begin
            bit e;
            e = r[2*py][2*px][n] | r[2*py][2*px+1][n] | r[2*py+1][2*px][n] | r[2*py+1][2*px+1][n];
            if (e && !r[2*py][2*px][n]) pool_later++;
            checks++;
            if (pooled[(py * P2 + px) * CO + n] !== e) begin failures++; $display("FAIL t%0d (%0d,%0d,%0d)", t, py, px, n); end
          end
    end
    checks++;
    if (pool_later == 0) begin failures++; $display("FAIL pooling never took a later position"); end
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
