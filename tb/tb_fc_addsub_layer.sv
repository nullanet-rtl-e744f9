// tb_fc_addsub_layer: a 16-input, 4-output last layer with its weight memory.
// Weights and biases are m/16, so sums are exact; the reference adds w when
// the activation bit is 1 and subtracts it when 0. Checks every score, the
// cycle count N_OUT*(6*N_IN+2)+1, over three activation vectors.
module tb_fc_addsub_layer;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NI = 16, NO = 4;
  localparam int WAW = $clog2(NI * NO + NO);
  logic rst_n, start, busy, done, w_we;
  logic [NI-1:0] a;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [31:0] w_wdata, w_rdata;
  logic [NO-1:0][31:0] score;

  param_mem #(.DEPTH(NI * NO + NO)) u_w (.clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .raddr(w_raddr), .rdata(w_rdata));
  fc_addsub_layer #(.N_IN(NI), .N_OUT(NO)) dut (.clk, .rst_n, .start, .a, .w_raddr, .w_rdata, .busy, .done, .score);

  real w [NO][NI], bias [NO];

  initial begin
    rst_n = 0; start = 0; w_we = 0; w_waddr = 0; w_wdata = 0; a = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NO; j++) begin
      for (int i = 0; i < NI; i++) begin
        w[j][i] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); w_we = 1; w_waddr = WAW'(j * NI + i); w_wdata = to_fp32(w[j][i]);
      end
      bias[j] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); w_we = 1; w_waddr = WAW'(NI * NO + j); w_wdata = to_fp32(bias[j]);
    end
    @(negedge clk); w_we = 0;
    for (int v = 0; v < 3; v++) begin
      int cycles;
      a = NI'($urandom);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != NO * (6 * NI + 2) + 1) begin failures++; $display("FAIL cycles %0d", cycles); end
      for (int j = 0; j < NO; j++) begin
        real z;
        logic [31:0] e;
        z = bias[j];
        for (int i = 0; i < NI; i++) z += a[i] ? w[j][i] : -w[j][i];
        e = (z == 0.0) ? 32'h0 : to_fp32(z);
        checks++;
        if (score[j] !== e) begin failures++; $display("FAIL vec %0d out %0d %h exp %h", v, j, score[j], e); end
      end
    end
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
