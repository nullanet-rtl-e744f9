// tb_conv1_layer: an 8x8 image, two 3x3 filters: 6x6 convolution, pooled to
// 3x3x2 bits. Pixels k/256, weights and biases m/16, so sums are exact and the
// reference is real arithmetic: bit = 1 if the largest of the four sums in
// the pooling window is >= 0. Checks every bit, the cycle count
// P*P*C1*296 + 1 and that the pooling picked a later window position at least once.
module tb_conv1_layer;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, pool_later = 0, ones = 0, zeros = 0;

  localparam int IMG = 8, C1 = 2, P = (IMG - 2) / 2;
  localparam int XAW = $clog2(IMG * IMG), WAW = $clog2(10 * C1);
  logic rst_n, start, busy, done, x_we, w_we;
  logic [XAW-1:0] x_waddr, x_raddr;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [31:0] x_wdata, w_wdata, x_rdata, w_rdata;
  logic [P*P*C1-1:0] fmap;

  param_mem #(.DEPTH(IMG * IMG)) u_x (.clk, .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .raddr(x_raddr), .rdata(x_rdata));
  param_mem #(.DEPTH(10 * C1)) u_w (.clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .raddr(w_raddr), .rdata(w_rdata));
  conv1_layer #(.IMG(IMG), .C1(C1)) dut (.clk, .rst_n, .start, .x_raddr, .x_rdata, .w_raddr, .w_rdata, .busy, .done, .fmap);

  real x [IMG][IMG], w [C1][9], b [C1];

  initial begin
    rst_n = 0; start = 0; x_we = 0; w_we = 0; x_waddr = 0; w_waddr = 0; x_wdata = 0; w_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int img = 0; img < 3; img++) begin
      int cycles;
      for (int yy = 0; yy < IMG; yy++)
        for (int xx = 0; xx < IMG; xx++) begin
          x[yy][xx] = real'($urandom_range(255)) / 256.0;
          @(negedge clk); x_we = 1; x_waddr = XAW'(yy * IMG + xx); x_wdata = to_fp32(x[yy][xx]);
        end
      for (int c = 0; c < C1; c++) begin
        for (int k = 0; k < 9; k++) begin
          w[c][k] = real'(int'($urandom_range(32)) - 16) / 16.0;
          @(negedge clk); w_we = 1; w_waddr = WAW'(c * 9 + k); w_wdata = to_fp32(w[c][k]);
        end
        b[c] = real'(int'($urandom_range(16)) - 8) / 16.0;
        @(negedge clk); w_we = 1; w_waddr = WAW'(9 * C1 + c); w_wdata = to_fp32(b[c]);
      end
      @(negedge clk); x_we = 0; w_we = 0; start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != P * P * C1 * 296 + 1) begin failures++; $display("FAIL cycles %0d", cycles); end
      for (int py = 0; py < P; py++)
        for (int px = 0; px < P; px++)
          for (int c = 0; c < C1; c++) begin
            real m, z0;
            bit e;
            m = -1.0e30;
            for (int q = 0; q < 4; q++) begin
              real z;
              z = b[c];
              for (int k = 0; k < 9; k++)
                z += x[2 * py + q / 2 + k / 3][2 * px + q % 2 + k % 3] * w[c][k];
              if (q == 0) z0 = z;
              if (z > m) m = z;
            end
            e = (m >= 0.0);
            if (e && z0 < 0.0) pool_later++;
            if (e) ones++; else zeros++;
            checks++;
            if (fmap[(py * P + px) * C1 + c] !== e) begin
              failures++; $display("FAIL img %0d (%0d,%0d,%0d) max %f", img, py, px, c, m);
            end
          end
    end
    checks++;
    if (pool_later == 0 || ones == 0 || zeros == 0) begin failures++; $display("FAIL coverage %0d %0d %0d", pool_later, ones, zeros); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
