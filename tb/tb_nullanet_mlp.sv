// tb_nullanet_mlp: end-to-end run of the reduced network (49 inputs, 24 hidden, 10 classes).
//
// The host side is modelled by the testbench: it loads the FC1 and FC4 weights
// and biases and an image through the write ports, pulses start and waits for
// done. Pixels are k/256 and all weights and biases m/16, so the float layers
// are exact and the reference is real arithmetic; the logic layers are
// checked with the reference cover model. Checked per image: the FC1 binary
// outputs, the FC3 outputs handed to FC4, every class score and the cycle
// count HID*(8*N_IN+2)+1 + 3 + 1 + N_CLS*(6*HID+2)+1 from start to done.
// Mechanisms that must each occur at least once: FC1 outputs of both signs,
// logic-layer outputs of both values, additions and subtractions in FC4, a
// start ignored while busy, and a second image run on the same weights.
module tb_nullanet_mlp;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N_IN = 49, HID = 24, N_CLS = 10, CUBES = 4, LITS = 3;
  localparam int NIMG = 3;
  localparam int X_AW = $clog2(N_IN), W1_AW = $clog2(N_IN * HID + HID), W4_AW = $clog2(HID * N_CLS + N_CLS);

  logic rst_n, img_we, w1_we, w4_we, start, busy, done;
  logic [X_AW-1:0] img_waddr;
  logic [W1_AW-1:0] w1_waddr;
  logic [W4_AW-1:0] w4_waddr;
  logic [31:0] img_wdata, w1_wdata, w4_wdata;
  logic [N_CLS-1:0][31:0] score;

  nullanet_mlp #(.N_IN(N_IN), .HID(HID), .N_CLS(N_CLS), .CUBES(CUBES), .LITS(LITS)) dut (
    .clk, .rst_n, .img_we, .img_waddr, .img_wdata, .w1_we, .w1_waddr, .w1_wdata,
    .w4_we, .w4_waddr, .w4_wdata, .start, .busy, .done, .score);

  real x [N_IN];
  real w1 [HID][N_IN], b1 [HID], w4 [N_CLS][HID], b4 [N_CLS];
  int n_pos = 0, n_neg = 0, n_l1 = 0, n_l0 = 0, n_add = 0, n_sub = 0, n_ignored = 0, n_img = 0;

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

  initial begin
    rst_n = 0; img_we = 0; w1_we = 0; w4_we = 0; start = 0;
    img_waddr = 0; w1_waddr = 0; w4_waddr = 0; img_wdata = 0; w1_wdata = 0; w4_wdata = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // parameters of the float layers, loaded once
    for (int j = 0; j < HID; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        w1[j][i] = real'(int'($urandom_range(32)) - 16) / 16.0;
        @(negedge clk); w1_we = 1; w1_waddr = W1_AW'(j * N_IN + i); w1_wdata = to_fp32(w1[j][i]);
      end
    end
    for (int j = 0; j < HID; j++) begin
      b1[j] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); w1_we = 1; w1_waddr = W1_AW'(N_IN * HID + j); w1_wdata = to_fp32(b1[j]);
    end
    for (int k = 0; k < N_CLS; k++) begin
      for (int i = 0; i < HID; i++) begin
        w4[k][i] = real'(int'($urandom_range(64)) - 32) / 16.0;
        @(negedge clk); w4_we = 1; w4_waddr = W4_AW'(k * HID + i); w4_wdata = to_fp32(w4[k][i]);
      end
      b4[k] = real'(int'($urandom_range(64)) - 32) / 16.0;
      @(negedge clk); w4_we = 1; w4_waddr = W4_AW'(HID * N_CLS + k); w4_wdata = to_fp32(b4[k]);
    end
    @(negedge clk); w1_we = 0; w4_we = 0;

    for (int img = 0; img < NIMG; img++) begin
      logic [HID-1:0] a1, a2, a3;
      int cycles, expect_cycles;
      for (int i = 0; i < N_IN; i++) begin
        x[i] = real'($urandom_range(255)) / 256.0;
        @(negedge clk); img_we = 1; img_waddr = X_AW'(i); img_wdata = to_fp32(x[i]);
      end
      @(negedge clk); img_we = 0; start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      // a second start while busy must be ignored
      repeat (5) begin @(negedge clk); cycles++; end
      start = 1;
      @(negedge clk); start = 0; cycles++;
      if (busy) n_ignored++;
      while (!done) begin @(negedge clk); cycles++; end
      // reference
      for (int j = 0; j < HID; j++) begin
        real z;
        z = b1[j];
        for (int i = 0; i < N_IN; i++) z += x[i] * w1[j][i];
        a1[j] = (z >= 0.0);
        if (a1[j]) n_pos++; else n_neg++;
      end
      a2 = layer(32'h1234_5678, a1);
      a3 = layer(32'h9ABC_DEF0, a2);
      for (int j = 0; j < HID; j++) begin
        if (a2[j]) n_l1++; else n_l0++;
        if (a3[j]) n_l1++; else n_l0++;
      end
      expect_cycles = HID * (8 * N_IN + 2) + 1 + 3 + 1 + N_CLS * (6 * HID + 2) + 1;
      chk(cycles == expect_cycles, $sformatf("cycles %0d expected %0d", cycles, expect_cycles));
      chk(dut.u_fc1.y == a1, "FC1 outputs");
      chk(dut.a3_q == a3, "FC3 outputs");
      for (int k = 0; k < N_CLS; k++) begin
        real z;
        logic [31:0] e;
        z = b4[k];
        for (int i = 0; i < HID; i++) begin
          if (a3[i]) begin z += w4[k][i]; n_add++; end
          else begin z -= w4[k][i]; n_sub++; end
        end
        e = (z == 0.0) ? 32'h0 : to_fp32(z);
        chk(score[k] === e, $sformatf("img %0d score %0d = %h expected %h", img, k, score[k], e));
      end
      n_img++;
      @(negedge clk);
      chk(!busy, "busy after done");
    end
    $display("FC1 +1/-1: %0d/%0d, logic outputs 1/0: %0d/%0d, FC4 add/sub: %0d/%0d, ignored starts: %0d, images: %0d",
             n_pos, n_neg, n_l1, n_l0, n_add, n_sub, n_ignored, n_img);
    chk(n_pos > 0 && n_neg > 0, "FC1 outputs of both signs");
    chk(n_l1 > 0 && n_l0 > 0, "logic outputs of both values");
    chk(n_add > 0 && n_sub > 0, "FC4 additions and subtractions");
    chk(n_ignored > 0, "start ignored while busy");
    chk(n_img >= 2 || NIMG < 2, "second image on the same weights");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
