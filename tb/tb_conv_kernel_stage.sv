// tb_conv_kernel_stage: streams random 90-bit patches through the 20-filter
// logic stage, one per clock with random gaps, and checks every result
// against the reference cover model (seed 0x0C0FFEE0) and the two-clock latency.
module tb_conv_kernel_stage;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int KI = 90, CO = 20, NT = 300;
  logic rst_n, in_valid, out_valid;
  logic [KI-1:0] patch;
  logic [CO-1:0] out_bits, exp_q [NT];
  int issue_cyc [NT], cyc = 0, nout = 0;

  conv_kernel_stage dut (.clk, .rst_n, .in_valid, .patch, .out_valid, .out_bits);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out_bits !== exp_q[nout]) begin failures++; $display("FAIL patch %0d", nout); end
    if (cyc - issue_cyc[nout] != 2) begin failures++; $display("FAIL latency"); end
    nout++;
  end

  initial begin
    rst_n = 0; in_valid = 0; patch = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      logic [KI-1:0] v;
      bit in[];
      v = {$urandom, $urandom, $urandom};
      in = new[KI];
      for (int q = 0; q < KI; q++) in[q] = v[q];
      for (int n = 0; n < CO; n++) exp_q[t][n] = neuron_eval(32'h0C0F_FEE0, n, 16, 6, KI, in);
      @(negedge clk);
      in_valid = 1; patch = v; issue_cyc[t] = cyc;
      @(posedge clk);
      #1 in_valid = 0;
      if ($urandom_range(2) == 0) @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("FAIL %0d results", nout); end
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
