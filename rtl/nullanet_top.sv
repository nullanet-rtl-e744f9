// nullanet_top: both evaluated networks as two independent engines.
//
//   mlp_*  nullanet_mlp : 784-100-100-100-10 perceptron; FC1 float MAC + sign,
//                         FC2/FC3 logic (binary_core), FC4 float add/sub
//   cnn_*  nullanet_cnn : 28x28 image, 3x3x10 float conv + pool + sign,
//                         3x3x10->20 logic conv + pool, 500->10 float add/sub
//
// Each engine keeps its own image buffer, parameter memories, start/busy/done
// handshake and scores; the ports are those of the two engines with an mlp_
// or cnn_ prefix, and both may run at the same time. Timing per image is that
// of the engines: 633,426 clocks (MLP) and 530,386 clocks (CNN) from start to
// done at the defaults. Nothing is shared between them; placing them side by
// side is this design's packaging, the two networks themselves follow the
// evaluated configurations.
module nullanet_top
  import nn_pkg::*;
#(
  parameter int N_IN  = 784,
  parameter int HID   = 100,
  parameter int IMG   = 28,
  parameter int C1    = 10,
  parameter int C2    = 20,
  parameter int N_CLS = 10,
  parameter int CUBES = 16,
  parameter int LITS  = 6,
  localparam int M_XAW  = $clog2(N_IN),
  localparam int M_W1AW = $clog2(N_IN * HID + HID),
  localparam int M_W4AW = $clog2(HID * N_CLS + N_CLS),
  localparam int NF     = ((((IMG - 2) / 2) - 2) / 2) * ((((IMG - 2) / 2) - 2) / 2) * C2,
  localparam int C_XAW  = $clog2(IMG * IMG),
  localparam int C_WCAW = $clog2(10 * C1),
  localparam int C_WFAW = $clog2(NF * N_CLS + N_CLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // multilayer perceptron
  input  logic              mlp_img_we,
  input  logic [M_XAW-1:0]  mlp_img_waddr,
  input  fp32_t             mlp_img_wdata,
  input  logic              mlp_w1_we,
  input  logic [M_W1AW-1:0] mlp_w1_waddr,
  input  fp32_t             mlp_w1_wdata,
  input  logic              mlp_w4_we,
  input  logic [M_W4AW-1:0] mlp_w4_waddr,
  input  fp32_t             mlp_w4_wdata,
  input  logic              mlp_start,
  output logic              mlp_busy,
  output logic              mlp_done,
  output fp32_t [N_CLS-1:0] mlp_score,
  // convolutional network
  input  logic              cnn_img_we,
  input  logic [C_XAW-1:0]  cnn_img_waddr,
  input  fp32_t             cnn_img_wdata,
  input  logic              cnn_wc_we,
  input  logic [C_WCAW-1:0] cnn_wc_waddr,
  input  fp32_t             cnn_wc_wdata,
  input  logic              cnn_wf_we,
  input  logic [C_WFAW-1:0] cnn_wf_waddr,
  input  fp32_t             cnn_wf_wdata,
  input  logic              cnn_start,
  output logic              cnn_busy,
  output logic              cnn_done,
  output fp32_t [N_CLS-1:0] cnn_score
);

  nullanet_mlp #(.N_IN(N_IN), .HID(HID), .N_CLS(N_CLS), .CUBES(CUBES), .LITS(LITS)) u_mlp (
    .clk, .rst_n,
    .img_we(mlp_img_we), .img_waddr(mlp_img_waddr), .img_wdata(mlp_img_wdata),
    .w1_we(mlp_w1_we), .w1_waddr(mlp_w1_waddr), .w1_wdata(mlp_w1_wdata),
    .w4_we(mlp_w4_we), .w4_waddr(mlp_w4_waddr), .w4_wdata(mlp_w4_wdata),
    .start(mlp_start), .busy(mlp_busy), .done(mlp_done), .score(mlp_score));

  nullanet_cnn #(.IMG(IMG), .C1(C1), .C2(C2), .N_CLS(N_CLS), .CUBES(CUBES), .LITS(LITS)) u_cnn (
    .clk, .rst_n,
    .img_we(cnn_img_we), .img_waddr(cnn_img_waddr), .img_wdata(cnn_img_wdata),
    .wc_we(cnn_wc_we), .wc_waddr(cnn_wc_waddr), .wc_wdata(cnn_wc_wdata),
    .wf_we(cnn_wf_we), .wf_waddr(cnn_wf_waddr), .wf_wdata(cnn_wf_wdata),
    .start(cnn_start), .busy(cnn_busy), .done(cnn_done), .score(cnn_score));

endmodule
