// tb_nullanet_top: both engines of the top at full size, default parameters,
// running at the same time.
//
// Multilayer perceptron (784-100-100-100-10) and convolutional network
// (28x28, 3x3x10 float conv, 3x3x10->20 logic conv, 500->10) each get their
// weights and two images through their own write ports, from two concurrent
// processes. Pixels are k/256 and all weights m/16, so every float sum is
// exact and the references are real arithmetic; the logic layers are checked
// with the reference cover model. Checked per image: the binary outputs of
// every float layer and logic layer, every score and the cycle count from
// start to done (633,426 and 530,386). Mechanisms that must each occur at
// least once, counted per engine: float-layer outputs of both signs, logic
// outputs of both values, pooling windows decided by a later position (CNN,
// both poolings), additions and subtractions in the last layer, a start
// ignored while busy and a second image on the same weights.
module tb_nullanet_top;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N_IN = 784, HID = 100, IMG = 28, C1 = 10, C2 = 20, N_CLS = 10, CUBES = 16, LITS = 6;
  localparam int M_NIMG = 2, C_NIMG = 2;
  localparam int P1 = (IMG - 2) / 2, O2 = P1 - 2, P2 = O2 / 2, NF = P2 * P2 * C2;
  localparam int M_XAW = $clog2(N_IN), W1_AW = $clog2(N_IN * HID + HID), W4_AW = $clog2(HID * N_CLS + N_CLS);
  localparam int C_XAW = $clog2(IMG * IMG), WC_AW = $clog2(10 * C1), WF_AW = $clog2(NF * N_CLS + N_CLS);

  logic rst_n;
  logic mlp_img_we, mlp_w1_we, mlp_w4_we, mlp_start, mlp_busy, mlp_done;
  logic [M_XAW-1:0] mlp_img_waddr;
  logic [W1_AW-1:0] mlp_w1_waddr;
  logic [W4_AW-1:0] mlp_w4_waddr;
  logic [31:0] mlp_img_wdata, mlp_w1_wdata, mlp_w4_wdata;
  logic [N_CLS-1:0][31:0] mlp_score;
  logic cnn_img_we, cnn_wc_we, cnn_wf_we, cnn_start, cnn_busy, cnn_done;
  logic [C_XAW-1:0] cnn_img_waddr;
  logic [WC_AW-1:0] cnn_wc_waddr;
  logic [WF_AW-1:0] cnn_wf_waddr;
  logic [31:0] cnn_img_wdata, cnn_wc_wdata, cnn_wf_wdata;
  logic [N_CLS-1:0][31:0] cnn_score;

  nullanet_top dut (
    .clk, .rst_n,
    .mlp_img_we, .mlp_img_waddr, .mlp_img_wdata, .mlp_w1_we, .mlp_w1_waddr, .mlp_w1_wdata,
    .mlp_w4_we, .mlp_w4_waddr, .mlp_w4_wdata, .mlp_start, .mlp_busy, .mlp_done, .mlp_score,
    .cnn_img_we, .cnn_img_waddr, .cnn_img_wdata, .cnn_wc_we, .cnn_wc_waddr, .cnn_wc_wdata,
    .cnn_wf_we, .cnn_wf_waddr, .cnn_wf_wdata, .cnn_start, .cnn_busy, .cnn_done, .cnn_score);

  // perceptron reference data and counters
  real mx [N_IN];
  real w1 [HID][N_IN], b1 [HID], w4 [N_CLS][HID], b4 [N_CLS];
  int m_pos = 0, m_neg = 0, m_l1 = 0, m_l0 = 0, m_add = 0, m_sub = 0, m_ignored = 0, m_img = 0;
  // convolutional network reference data and counters
  real cx [IMG][IMG], wc [C1][9], bc [C1], wf [N_CLS][NF], bf [N_CLS];
  int c_pos = 0, c_neg = 0, c_pool1 = 0, c_pool2 = 0, c_l1 = 0, c_l0 = 0;
  int c_add = 0, c_sub = 0, c_ignored = 0, c_img = 0;
  // loop bounds of the reference models held in variables, so the compiled
  // reference stays loops instead of being unrolled
  int lc1, lc2, lp1, lp2, lo2, lk, lq, lnf, lcls;
  bit mlp_fin = 0, cnn_fin = 0;

  function automatic logic [HID-1:0] layer(input logic [31:0] seed, input logic [HID-1:0] v);
    bit in[];
    logic [HID-1:0] o;
    in = new[HID];
    for (int q = 0; q < HID; q++) in[q] = v[q];
    for (int n = 0; n < HID; n++) o[n] = neuron_eval(seed, n, CUBES, LITS, HID, in);
    return o;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // perceptron
  initial begin
    rst_n = 0; mlp_img_we = 0; mlp_w1_we = 0; mlp_w4_we = 0; mlp_start = 0;
    mlp_img_waddr = 0; mlp_w1_waddr = 0; mlp_w4_waddr = 0; mlp_img_wdata = 0; mlp_w1_wdata = 0; mlp_w4_wdata = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // parameters of the float layers, loaded once
    for (int j = 0; j < HID; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        w1[j][i] = real'(int'($urandom_range(32)) - 16) / 16.0;
        @(negedge clk); mlp_w1_we = 1; mlp_w1_waddr = W1_AW'(j * N_IN + i); mlp_w1_wdata = to_fp32(w1[j][i]);
      end
    end
    for (int j = 0; j < HID; j++) begin
      b1[j] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); mlp_w1_we = 1; mlp_w1_waddr = W1_AW'(N_IN * HID + j); mlp_w1_wdata = to_fp32(b1[j]);
    end
    for (int k = 0; k < N_CLS; k++) begin
      for (int i = 0; i < HID; i++) begin
        w4[k][i] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); mlp_w4_we = 1; mlp_w4_waddr = W4_AW'(k * HID + i); mlp_w4_wdata = to_fp32(w4[k][i]);
      end
      b4[k] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); mlp_w4_we = 1; mlp_w4_waddr = W4_AW'(HID * N_CLS + k); mlp_w4_wdata = to_fp32(b4[k]);
    end
    @(negedge clk); mlp_w1_we = 0; mlp_w4_we = 0;

    for (int img = 0; img < M_NIMG; img++) begin
      logic [HID-1:0] a1, a2, a3;
      int cycles, expect_cycles;
      for (int i = 0; i < N_IN; i++) begin
        mx[i] = real'($urandom_range(255)) / 256.0;
        @(negedge clk); mlp_img_we = 1; mlp_img_waddr = M_XAW'(i); mlp_img_wdata = to_fp32(mx[i]);
      end
      @(negedge clk); mlp_img_we = 0; mlp_start = 1;
      @(negedge clk); mlp_start = 0;
      cycles = 1;
      // a second mlp_start while mlp_busy must be ignored
      repeat (5) begin @(negedge clk); cycles++; end
      mlp_start = 1;
      @(negedge clk); mlp_start = 0; cycles++;
      if (mlp_busy) m_ignored++;
      while (!mlp_done) begin @(negedge clk); cycles++; end
      // reference
      for (int j = 0; j < HID; j++) begin
        real z;
        z = b1[j];
        for (int i = 0; i < N_IN; i++) z += mx[i] * w1[j][i];
        a1[j] = (z >= 0.0);
        if (a1[j]) m_pos++; else m_neg++;
      end
      a2 = layer(32'h1234_5678, a1);
      a3 = layer(32'h9ABC_DEF0, a2);
      for (int j = 0; j < HID; j++) begin
        if (a2[j]) m_l1++; else m_l0++;
        if (a3[j]) m_l1++; else m_l0++;
      end
      expect_cycles = HID * (8 * N_IN + 2) + 1 + 3 + 1 + N_CLS * (6 * HID + 2) + 1;
      chk(cycles == expect_cycles, $sformatf("cycles %0d expected %0d", cycles, expect_cycles));
      chk(dut.u_mlp.u_fc1.y == a1, "FC1 outputs");
      chk(dut.u_mlp.a3_q == a3, "FC3 outputs");
      for (int k = 0; k < N_CLS; k++) begin
        real z;
        logic [31:0] e;
        z = b4[k];
        for (int i = 0; i < HID; i++) begin
          if (a3[i]) begin z += w4[k][i]; m_add++; end
          else begin z -= w4[k][i]; m_sub++; end
        end
        e = (z == 0.0) ? 32'h0 : to_fp32(z);
        chk(mlp_score[k] === e, $sformatf("img %0d mlp_score %0d = %h expected %h", img, k, mlp_score[k], e));
      end
      m_img++;
      @(negedge clk);
      chk(!mlp_busy, "mlp_busy after mlp_done");
    end
    mlp_fin = 1;
  end

  // convolutional network
  initial begin
    cnn_img_we = 0; cnn_wc_we = 0; cnn_wf_we = 0; cnn_start = 0;
    cnn_img_waddr = 0; cnn_wc_waddr = 0; cnn_wf_waddr = 0; cnn_img_wdata = 0; cnn_wc_wdata = 0; cnn_wf_wdata = 0;
    lc1 = C1; lc2 = C2; lp1 = P1; lp2 = P2; lo2 = O2; lk = 9; lq = 4; lnf = NF; lcls = N_CLS;
    wait (rst_n);
    for (int c = 0; c < C1; c++) begin
      for (int k = 0; k < 9; k++) begin
        wc[c][k] = real'(int'($urandom_range(32)) - 16) / 16.0;
        @(negedge clk); cnn_wc_we = 1; cnn_wc_waddr = WC_AW'(c * 9 + k); cnn_wc_wdata = to_fp32(wc[c][k]);
      end
      bc[c] = real'(int'($urandom_range(16)) - 8) / 16.0;
      @(negedge clk); cnn_wc_we = 1; cnn_wc_waddr = WC_AW'(9 * C1 + c); cnn_wc_wdata = to_fp32(bc[c]);
    end
    for (int k = 0; k < N_CLS; k++) begin
      for (int i = 0; i < NF; i++) begin
        wf[k][i] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); cnn_wf_we = 1; cnn_wf_waddr = WF_AW'(k * NF + i); cnn_wf_wdata = to_fp32(wf[k][i]);
      end
      bf[k] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); cnn_wf_we = 1; cnn_wf_waddr = WF_AW'(NF * N_CLS + k); cnn_wf_wdata = to_fp32(bf[k]);
    end
    @(negedge clk); cnn_wc_we = 0; cnn_wf_we = 0;

    for (int img = 0; img < C_NIMG; img++) begin
      logic [P1*P1*C1-1:0] f1;
      logic [NF-1:0] f2;
      bit r [O2][O2][C2];
      int cycles, expect_cycles;
      for (int yy = 0; yy < IMG; yy++)
        for (int xx = 0; xx < IMG; xx++) begin
          cx[yy][xx] = real'($urandom_range(255)) / 256.0;
          @(negedge clk); cnn_img_we = 1; cnn_img_waddr = C_XAW'(yy * IMG + xx); cnn_img_wdata = to_fp32(cx[yy][xx]);
        end
      @(negedge clk); cnn_img_we = 0; cnn_start = 1;
      @(negedge clk); cnn_start = 0;
      cycles = 1;
      repeat (5) begin @(negedge clk); cycles++; end
      cnn_start = 1;
      @(negedge clk); cnn_start = 0; cycles++;
      if (cnn_busy) c_ignored++;
      while (!cnn_done) begin @(negedge clk); cycles++; end

      // conv1, pool, sign
      for (int py = 0; py < lp1; py++)
        for (int px = 0; px < lp1; px++)
          for (int c = 0; c < lc1; c++) begin
            real m, z0;
            m = -1.0e30;
            for (int q = 0; q < lq; q++) begin
              real z;
              z = bc[c];
              for (int k = 0; k < lk; k++) z += cx[2 * py + q / 2 + k / 3][2 * px + q % 2 + k % 3] * wc[c][k];
              if (q == 0) z0 = z;
              if (z > m) m = z;
              if (z >= 0.0) c_pos++; else c_neg++;
            end
            f1[(py * P1 + px) * C1 + c] = (m >= 0.0);
            if (m >= 0.0 && z0 < 0.0) c_pool1++;
          end
      chk(dut.u_cnn.f1 == f1, $sformatf("img %0d conv1 feature map", img));
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
            if (r[oy][ox][n]) c_l1++; else c_l0++;
          end
        end
      for (int py = 0; py < lp2; py++)
        for (int px = 0; px < lp2; px++)
          for (int n = 0; n < lc2; n++) begin
            f2[(py * P2 + px) * C2 + n] = r[2*py][2*px][n] | r[2*py][2*px+1][n] | r[2*py+1][2*px][n] | r[2*py+1][2*px+1][n];
            if (f2[(py * P2 + px) * C2 + n] && !r[2*py][2*px][n]) c_pool2++;
          end
      chk(dut.u_cnn.f2 == f2, $sformatf("img %0d conv2 pooled map", img));
      // last layer
      for (int k = 0; k < lcls; k++) begin
        real z;
        logic [31:0] e;
        z = bf[k];
        for (int i = 0; i < lnf; i++) begin
          if (f2[i]) begin z += wf[k][i]; c_add++; end
          else begin z -= wf[k][i]; c_sub++; end
        end
        e = (z == 0.0) ? 32'h0 : to_fp32(z);
        chk(cnn_score[k] === e, $sformatf("img %0d cnn_score %0d = %h expected %h", img, k, cnn_score[k], e));
      end
      expect_cycles = P1 * P1 * C1 * 296 + 1 + O2 * O2 + 3 + N_CLS * (6 * NF + 2) + 1;
      chk(cycles == expect_cycles, $sformatf("cycles %0d expected %0d", cycles, expect_cycles));
      c_img++;
      @(negedge clk);
      chk(!cnn_busy, "cnn_busy after cnn_done");
    end
    cnn_fin = 1;
  end

  initial begin
    wait (mlp_fin && cnn_fin);
    $display("MLP: FC1 +1/-1 %0d/%0d, logic 1/0 %0d/%0d, FC4 add/sub %0d/%0d, ignored %0d, images %0d",
             m_pos, m_neg, m_l1, m_l0, m_add, m_sub, m_ignored, m_img);
    $display("CNN: conv1 +/- %0d/%0d, pool later pos %0d/%0d, logic 1/0 %0d/%0d, add/sub %0d/%0d, ignored %0d, images %0d",
             c_pos, c_neg, c_pool1, c_pool2, c_l1, c_l0, c_add, c_sub, c_ignored, c_img);
    chk(m_pos > 0 && m_neg > 0, "MLP FC1 outputs of both signs");
    chk(m_l1 > 0 && m_l0 > 0, "MLP logic outputs of both values");
    chk(m_add > 0 && m_sub > 0, "MLP FC4 additions and subtractions");
    chk(m_ignored > 0, "MLP start ignored while busy");
    chk(m_img >= 2, "MLP second image on the same weights");
    chk(c_pos > 0 && c_neg > 0, "CNN conv1 sums of both signs");
    chk(c_pool1 > 0 && c_pool2 > 0, "CNN poolings decided by a later window position");
    chk(c_l1 > 0 && c_l0 > 0, "CNN logic outputs of both values");
    chk(c_add > 0 && c_sub > 0, "CNN additions and subtractions in the last layer");
    chk(c_ignored > 0, "CNN start ignored while busy");
    chk(c_img >= 2, "CNN second image on the same weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
