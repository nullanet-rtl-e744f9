// tb_fc_mac_layer: a 20-input, 6-output first layer with its memories. Pixels
// are k/256 and weights and biases m/16 with |m| <= 16, so every partial sum
// is exact in binary32 and the reference is plain real arithmetic. Checks the
// binary outputs (sum >= 0 gives 1), that both output values occur, and the
// cycle count N_OUT*(8*N_IN+2)+1 from start to done, over three images.
module tb_fc_mac_layer;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, pos = 0, neg = 0;

  localparam int NI = 20, NO = 6;
  localparam int XAW = $clog2(NI), WAW = $clog2(NI * NO + NO);
  logic rst_n, start, busy, done;
  logic x_we, w_we;
  logic [XAW-1:0] x_waddr, x_raddr;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [31:0] x_wdata, w_wdata, x_rdata, w_rdata;
  logic [NO-1:0] y;

  param_mem #(.DEPTH(NI)) u_x (.clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(x_raddr), .rdata(x_rdata));
  param_mem #(.DEPTH(NI * NO + NO)) u_w (.clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .raddr(w_raddr), .rdata(w_rdata));
  fc_mac_layer #(.N_IN(NI), .N_OUT(NO)) dut (.clk, .rst_n, .start, .x_raddr, .x_rdata, .w_raddr, .w_rdata, .busy, .done, .y);

  real x [NI], w [NO][NI], bias [NO];

  initial begin
    rst_n = 0; start = 0; x_we = 0; w_we = 0; x_waddr = 0; w_waddr = 0; x_wdata = 0; w_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 3; img++) begin
      int cycles;
      for (int i = 0; i < NI; i++) begin
        x[i] = real'($urandom_range(255)) / 256.0;
        @(negedge clk); x_we = 1; x_waddr = XAW'(i); x_wdata = to_fp32(x[i]);
      end
      for (int j = 0; j < NO; j++) begin
        for (int i = 0; i < NI; i++) begin
          w[j][i] = real'(int'($urandom_range(32)) - 16) / 16.0;
          @(negedge clk); w_we = 1; w_waddr = WAW'(j * NI + i); w_wdata = to_fp32(w[j][i]);
        end
        bias[j] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); w_we = 1; w_waddr = WAW'(NI * NO + j); w_wdata = to_fp32(bias[j]);
      end
      @(negedge clk); x_we = 0; w_we = 0; start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != NO * (8 * NI + 2) + 1) begin failures++; $display("FAIL cycles %0d", cycles); end
      for (int j = 0; j < NO; j++) begin
        real z;
        z = bias[j];
        for (int i = 0; i < NI; i++) z += x[i] * w[j][i];
        checks++;
        if (y[j] !== (z >= 0.0)) begin failures++; $display("FAIL img %0d neuron %0d z=%f y=%b", img, j, z, y[j]); end
        if (z >= 0.0) pos++; else neg++;
      end
    end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("FAIL only one sign seen"); end
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
