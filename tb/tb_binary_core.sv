// tb_binary_core: streams random 100-bit vectors into the two logic stages,
// one per clock with random gaps, and checks each output against the
// reference cover model applied twice (FC2 then FC3), its three-clock latency
// and that no vector is lost.
module tb_binary_core;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 100, NT = 200;
  logic rst_n, in_valid, out_valid;
  logic [W-1:0] in_bits, out_bits;
  logic [W-1:0] exp_q [NT];
  int issue_cyc [NT], cyc = 0, nout = 0;

  binary_core dut (.clk, .rst_n, .in_valid, .in_bits, .out_valid, .out_bits);
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [W-1:0] layer(input logic [31:0] seed, input logic [W-1:0] v);
    bit in[];
    logic [W-1:0] o;
    in = new[W];
    for (int q = 0; q < W; q++) in[q] = v[q];
    for (int n = 0; n < W; n++) o[n] = neuron_eval(seed, n, 16, 6, W, in);
    return o;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out_bits !== exp_q[nout]) begin failures++; $display("FAIL vector %0d", nout); end
    if (cyc - issue_cyc[nout] != 3) begin failures++; $display("FAIL latency %0d", cyc - issue_cyc[nout]); end
    nout++;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_bits = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NT; t++) begin
      logic [W-1:0] v;
      v = {$urandom, $urandom, $urandom, $urandom};
      exp_q[t] = layer(32'h9ABC_DEF0, layer(32'h1234_5678, v));
      @(negedge clk);
      in_valid = 1; in_bits = v; issue_cyc[t] = cyc;
      @(posedge clk);
      #1 in_valid = 0;
      if ($urandom_range(2) == 0) @(posedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (nout != NT) begin failures++; $display("FAIL %0d outputs", nout); end
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
