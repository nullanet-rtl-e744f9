// nullanet_cnn: the evaluated convolutional network with its binary second
// convolution realized as logic.
//
//   image buffer -> conv1_layer (3x3 x C1 float conv, 2x2 max pool, sign)
//                -> conv2_logic (3x3 x C1 -> C2 binary conv as logic, 2x2 pool)
//                -> fc_addsub_layer (P2*P2*C2 -> N_CLS, float add/sub) -> scores
//
// At the defaults: 28x28 image, 26x26x10 convolution, 13x13x10 pooled bits,
// 11x11x20 logic convolution (each patch 90 bits in, 20 bits out), 5x5x20 =
// 500 pooled bits, 10 class scores. Only conv1 and the last layer read
// parameters. Host ports load the image (pixel y*28+x), the conv1 filters
// (layout in conv1_layer) and the last-layer weights (layout in
// fc_addsub_layer). A start pulse runs one image; done pulses when score is
// valid, IMG-dependent latency P*P*C1*296 + 1 + (P1-2)^2 + 3 + N_CLS*(6*NF+2)
// + 1 clocks (530,386 at the defaults). Starts while busy are ignored.
//
// Sizes follow the evaluated network (no padding is implied by its operation
// counts); the memories, schedule, hand-over and the placeholder covers of
// the logic convolution are this design's choices.
module nullanet_cnn
  import nn_pkg::*;
#(
  parameter int IMG   = 28,
  parameter int C1    = 10,
  parameter int C2    = 20,
  parameter int N_CLS = 10,
  parameter int CUBES = 16,
  parameter int LITS  = 6,
  localparam int P1    = (IMG - 2) / 2,
  localparam int P2    = (P1 - 2) / 2,
  localparam int NF    = P2 * P2 * C2,
  localparam int X_AW  = $clog2(IMG * IMG),
  localparam int WC_AW = $clog2(10 * C1),
  localparam int WF_AW = $clog2(NF * N_CLS + N_CLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              img_we,
  input  logic [X_AW-1:0]   img_waddr,
  input  fp32_t             img_wdata,
  input  logic              wc_we,
  input  logic [WC_AW-1:0]  wc_waddr,
  input  fp32_t             wc_wdata,
  input  logic              wf_we,
  input  logic [WF_AW-1:0]  wf_waddr,
  input  fp32_t             wf_wdata,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output fp32_t [N_CLS-1:0] score
);

  logic [X_AW-1:0]  x_raddr;
  logic [WC_AW-1:0] wc_raddr;
  logic [WF_AW-1:0] wf_raddr;
  fp32_t            x_rdata, wc_rdata, wf_rdata;

  param_mem #(.DEPTH(IMG * IMG)) u_img (
    .clk, .we(img_we), .waddr(img_waddr), .wdata(img_wdata), .raddr(x_raddr), .rdata(x_rdata));
  param_mem #(.DEPTH(10 * C1)) u_wc (
    .clk, .we(wc_we), .waddr(wc_waddr), .wdata(wc_wdata), .raddr(wc_raddr), .rdata(wc_rdata));
  param_mem #(.DEPTH(NF * N_CLS + N_CLS)) u_wf (
    .clk, .we(wf_we), .waddr(wf_waddr), .wdata(wf_wdata), .raddr(wf_raddr), .rdata(wf_rdata));

  logic                 run, c1_done, c2_done;
  logic [P1*P1*C1-1:0]  f1;
  logic [NF-1:0]        f2;

  conv1_layer #(.IMG(IMG), .C1(C1)) u_conv1 (
    .clk, .rst_n, .start(start & ~run), .x_raddr, .x_rdata, .w_raddr(wc_raddr), .w_rdata(wc_rdata),
    .busy(), .done(c1_done), .fmap(f1));

  conv2_logic #(.C_IN(C1), .C_OUT(C2), .P1(P1), .CUBES(CUBES), .LITS(LITS)) u_conv2 (
    .clk, .rst_n, .start(c1_done), .fmap_in(f1), .busy(), .done(c2_done), .pooled(f2));

  fc_addsub_layer #(.N_IN(NF), .N_OUT(N_CLS)) u_fc (
    .clk, .rst_n, .start(c2_done), .a(f2), .w_raddr(wf_raddr), .w_rdata(wf_rdata),
    .busy(), .done, .score);

  always_ff @(posedge clk) begin
    if (!rst_n)     run <= 1'b0;
    else if (start) run <= 1'b1;
    else if (done)  run <= 1'b0;
  end
  assign busy = run;

endmodule
