// tb_nullanet_cnn: end-to-end run of the convolutional network at its full
// size (28x28 image, 3x3x10 float convolution, 2x2 pool, 3x3x10->20 logic
// convolution, 2x2 pool, 500 -> 10 add/sub layer), default parameters.
//
// The testbench loads the conv1 filters, the last-layer weights and two
// images, pulses start and waits for done. Pixels are k/256 and weights m/16,
// so the float sums are exact and the reference is real arithmetic; the logic
// convolution is checked with the reference cover model (seed 0x0C0FFEE0,
// 90 inputs). Checked per image: all 1,690 conv1 bits, all 500 pooled conv2
// bits, every score and the cycle count. Mechanisms that must each occur:
// conv1 signs of both values, a pooling window decided by a later position
// in both poolings, logic outputs of both values, additions and subtractions
// in the last layer, a start ignored while busy and a second image.
module tb_nullanet_cnn;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int IMG = 28, C1 = 10, C2 = 20, N_CLS = 10, CUBES = 16, LITS = 6, NIMG = 2;
  localparam int P1 = (IMG - 2) / 2, O2 = P1 - 2, P2 = O2 / 2, NF = P2 * P2 * C2;
  localparam int X_AW = $clog2(IMG * IMG), WC_AW = $clog2(10 * C1), WF_AW = $clog2(NF * N_CLS + N_CLS);

  logic rst_n, img_we, wc_we, wf_we, start, busy, done;
  logic [X_AW-1:0] img_waddr;
  logic [WC_AW-1:0] wc_waddr;
  logic [WF_AW-1:0] wf_waddr;
  logic [31:0] img_wdata, wc_wdata, wf_wdata;
  logic [N_CLS-1:0][31:0] score;

  nullanet_cnn dut (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .wc_we, .wc_waddr, .wc_wdata,
    .wf_we, .wf_waddr, .wf_wdata, .start, .busy, .done, .score);

  real x [IMG][IMG], wc [C1][9], bc [C1], wf [N_CLS][NF], bf [N_CLS];
  int n_pos = 0, n_neg = 0, n_pool1 = 0, n_pool2 = 0, n_l1 = 0, n_l0 = 0;
  int n_add = 0, n_sub = 0, n_ignored = 0, n_img = 0;
  // loop bounds of the reference models held in variables, so the compiled
  // reference stays loops instead of being unrolled
  int lc1, lc2, lp1, lp2, lo2, lk, lq, lnf, lcls;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    rst_n = 0; img_we = 0; wc_we = 0; wf_we = 0; start = 0;
    img_waddr = 0; wc_waddr = 0; wf_waddr = 0; img_wdata = 0; wc_wdata = 0; wf_wdata = 0;
    lc1 = C1; lc2 = C2; lp1 = P1; lp2 = P2; lo2 = O2; lk = 9; lq = 4; lnf = NF; lcls = N_CLS;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < C1; c++) begin
      for (int k = 0; k < 9; k++) begin
        wc[c][k] = real'(int'($urandom_range(32)) - 16) / 16.0;
        @(negedge clk); wc_we = 1; wc_waddr = WC_AW'(c * 9 + k); wc_wdata = to_fp32(wc[c][k]);
      end
      bc[c] = real'(int'($urandom_range(16)) - 8) / 16.0;
      @(negedge clk); wc_we = 1; wc_waddr = WC_AW'(9 * C1 + c); wc_wdata = to_fp32(bc[c]);
    end
    for (int k = 0; k < N_CLS; k++) begin
      for (int i = 0; i < NF; i++) begin
        wf[k][i] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); wf_we = 1; wf_waddr = WF_AW'(k * NF + i); wf_wdata = to_fp32(wf[k][i]);
      end
      bf[k] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); wf_we = 1; wf_waddr = WF_AW'(NF * N_CLS + k); wf_wdata = to_fp32(bf[k]);
    end
    @(negedge clk); wc_we = 0; wf_we = 0;

    for (int img = 0; img < NIMG; img++) begin
      logic [P1*P1*C1-1:0] f1;
      logic [NF-1:0] f2;
      bit r [O2][O2][C2];
      int cycles, expect_cycles;
      for (int yy = 0; yy < IMG; yy++)
        for (int xx = 0; xx < IMG; xx++) begin
          x[yy][xx] = real'($urandom_range(255)) / 256.0;
          @(negedge clk); img_we = 1; img_waddr = X_AW'(yy * IMG + xx); img_wdata = to_fp32(x[yy][xx]);
        end
      @(negedge clk); img_we = 0; start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      repeat (5) begin @(negedge clk); cycles++; end
      start = 1;
      @(negedge clk); start = 0; cycles++;
      if (busy) n_ignored++;
      while (!done) begin @(negedge clk); cycles++; end

      // conv1, pool, sign
      for (int py = 0; py < lp1; py++)
        for (int px = 0; px < lp1; px++)
          for (int c = 0; c < lc1; c++) begin
            real m, z0;
            m = -1.0e30;
            for (int q = 0; q < lq; q++) begin
              real z;
              z = bc[c];
              for (int k = 0; k < lk; k++) z += x[2 * py + q / 2 + k / 3][2 * px + q % 2 + k % 3] * wc[c][k];
              if (q == 0) z0 = z;
              if (z > m) m = z;
              if (z >= 0.0) n_pos++; else n_neg++;
            end
            f1[(py * P1 + px) * C1 + c] = (m >= 0.0);
            if (m >= 0.0 && z0 < 0.0) n_pool1++;
          end
      chk(dut.f1 == f1, $sformatf("img %0d conv1 feature map", img));
      // logic convolution, pool
      for (int oy = 0; oy < lo2; oy++)
        for (int ox = 0; ox < lo2; ox++) begin
          bit in[];
          in = new[9 * C1];
          for (int ky = 0; ky < lq - 1; ky++)
            for (int kx = 0; kx < lq - 1; kx++)
              for (int c = 0; c < lc1; c++)
                in[(ky * 3 + kx) * C1 + c] = f1[((oy + ky) * P1 + ox + kx) * C1 + c];
          for (int n = 0; n < lc2; n++) begin
            r[oy][ox][n] = neuron_eval(32'h0C0F_FEE0, n, CUBES, LITS, 9 * C1, in);
            if (r[oy][ox][n]) n_l1++; else n_l0++;
          end
        end
      for (int py = 0; py < lp2; py++)
        for (int px = 0; px < lp2; px++)
          for (int n = 0; n < lc2; n++) begin
            f2[(py * P2 + px) * C2 + n] = r[2*py][2*px][n] | r[2*py][2*px+1][n] | r[2*py+1][2*px][n] | r[2*py+1][2*px+1][n];
            if (f2[(py * P2 + px) * C2 + n] && !r[2*py][2*px][n]) n_pool2++;
          end
      chk(dut.f2 == f2, $sformatf("img %0d conv2 pooled map", img));
      // last layer
      for (int k = 0; k < lcls; k++) begin
        real z;
        logic [31:0] e;
        z = bf[k];
        for (int i = 0; i < lnf; i++) begin
          if (f2[i]) begin z += wf[k][i]; n_add++; end
          else begin z -= wf[k][i]; n_sub++; end
        end
        e = (z == 0.0) ? 32'h0 : to_fp32(z);
        chk(score[k] === e, $sformatf("img %0d score %0d = %h expected %h", img, k, score[k], e));
      end
      expect_cycles = P1 * P1 * C1 * 296 + 1 + O2 * O2 + 3 + N_CLS * (6 * NF + 2) + 1;
      chk(cycles == expect_cycles, $sformatf("cycles %0d expected %0d", cycles, expect_cycles));
      n_img++;
      @(negedge clk);
      chk(!busy, "busy after done");
    end
    $display("conv1 +/-: %0d/%0d, pool later pos: %0d/%0d, logic 1/0: %0d/%0d, add/sub: %0d/%0d, ignored: %0d, images: %0d",
             n_pos, n_neg, n_pool1, n_pool2, n_l1, n_l0, n_add, n_sub, n_ignored, n_img);
    chk(n_pos > 0 && n_neg > 0, "conv1 sums of both signs");
    chk(n_pool1 > 0 && n_pool2 > 0, "both poolings decided by a later window position");
    chk(n_l1 > 0 && n_l0 > 0, "logic outputs of both values");
    chk(n_add > 0 && n_sub > 0, "additions and subtractions in the last layer");
    chk(n_ignored > 0, "start ignored while busy");
    chk(n_img >= 2, "second image on the same weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
