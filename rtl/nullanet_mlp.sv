// nullanet_mlp: the evaluated four-layer perceptron (784-100-100-100-10) with
// its two binary hidden layers realized as logic.
//
//   image buffer --> FC1 (fp32 MAC, sign) --> FC2, FC3 (binary_core: pure
//   logic, one macro-pipeline stage each) --> FC4 (fp32 add/sub) --> scores
//
// Only FC1 and FC4 read parameters, from the two param_mem instances; FC2 and
// FC3 hold their trained behaviour in their gates and read nothing. A host
// writes the image (784 float pixels, address = pixel index) and, once, the
// FC1 and FC4 weights and biases (layouts in fc_mac_layer and
// fc_addsub_layer). A start pulse runs one image: FC1 takes
// HID*(8*N_IN+2)+1 clocks, the binary core 3 clocks, FC4 N_CLS*(6*HID+2)+1
// clocks, and done pulses when score[0..N_CLS-1] (float, one per class) is
// valid. busy is high from start to done; starts while busy are ignored.
// Writes to a memory while busy change the running result (not guarded).
//
// Layer sizes follow the evaluated network; the memories, the host write
// ports, the hand-over between the layers and the placeholder covers of the
// logic layers (see logic_layer) are this design's choices.
module nullanet_mlp
  import nn_pkg::*;
#(
  parameter int N_IN  = 784,
  parameter int HID   = 100,
  parameter int N_CLS = 10,
  parameter int CUBES = 16,
  parameter int LITS  = 6,
  localparam int X_AW  = $clog2(N_IN),
  localparam int W1_AW = $clog2(N_IN * HID + HID),
  localparam int W4_AW = $clog2(HID * N_CLS + N_CLS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host load ports
  input  logic                 img_we,
  input  logic [X_AW-1:0]      img_waddr,
  input  fp32_t                img_wdata,
  input  logic                 w1_we,
  input  logic [W1_AW-1:0]     w1_waddr,
  input  fp32_t                w1_wdata,
  input  logic                 w4_we,
  input  logic [W4_AW-1:0]     w4_waddr,
  input  fp32_t                w4_wdata,
  // control and result
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output fp32_t [N_CLS-1:0]    score
);

  logic [X_AW-1:0]  x_raddr;
  logic [W1_AW-1:0] w1_raddr;
  logic [W4_AW-1:0] w4_raddr;
  fp32_t            x_rdata, w1_rdata, w4_rdata;

  param_mem #(.DEPTH(N_IN), .WIDTH(32)) u_img (
    .clk, .we(img_we), .waddr(img_waddr), .wdata(img_wdata), .raddr(x_raddr), .rdata(x_rdata));
  param_mem #(.DEPTH(N_IN * HID + HID), .WIDTH(32)) u_w1 (
    .clk, .we(w1_we), .waddr(w1_waddr), .wdata(w1_wdata), .raddr(w1_raddr), .rdata(w1_rdata));
  param_mem #(.DEPTH(HID * N_CLS + N_CLS), .WIDTH(32)) u_w4 (
    .clk, .we(w4_we), .waddr(w4_waddr), .wdata(w4_wdata), .raddr(w4_raddr), .rdata(w4_rdata));

  logic           run, fc1_done, fc4_done, core_valid;
  logic [HID-1:0] a1, a3, a3_q;

  fc_mac_layer #(.N_IN(N_IN), .N_OUT(HID)) u_fc1 (
    .clk, .rst_n, .start(start & ~run), .x_raddr, .x_rdata, .w_raddr(w1_raddr), .w_rdata(w1_rdata),
    .busy(), .done(fc1_done), .y(a1));

  binary_core #(.WIDTH(HID), .CUBES(CUBES), .LITS(LITS)) u_core (
    .clk, .rst_n, .in_valid(fc1_done), .in_bits(a1), .out_valid(core_valid), .out_bits(a3));

  // FC3 output is held for FC4, which reads it over many clocks.
  always_ff @(posedge clk)
    if (core_valid) a3_q <= a3;

  logic fc4_start;
  always_ff @(posedge clk) begin
    if (!rst_n) fc4_start <= 1'b0;
    else        fc4_start <= core_valid;
  end

  fc_addsub_layer #(.N_IN(HID), .N_OUT(N_CLS)) u_fc4 (
    .clk, .rst_n, .start(fc4_start), .a(a3_q), .w_raddr(w4_raddr), .w_rdata(w4_rdata),
    .busy(), .done(fc4_done), .score);

  always_ff @(posedge clk) begin
    if (!rst_n)          run <= 1'b0;
    else if (start)      run <= 1'b1;
    else if (fc4_done)   run <= 1'b0;
  end

  assign busy = run;
  assign done = fc4_done;

endmodule
