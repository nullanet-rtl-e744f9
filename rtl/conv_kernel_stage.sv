// conv_kernel_stage: all filters of a binary 3x3 convolution, realized as one
// logic layer, as a single macro-pipeline stage.
//
// The input is one 3x3 patch of a binary feature map with C_IN channels,
// patch bit (ky*3 + kx)*C_IN + c; the output is one bit per output channel,
// the sign of that filter's (batch-normalized) response, computed by the
// filters' sum-of-products covers (see logic_layer; the default covers are
// placeholders). A register on the patch and one on the result make this a
// stage of K_IN + C_OUT register bits (90 + 20 = 110 at the defaults); a new
// patch can enter every clock and its result leaves two clocks later with
// out_valid. No backpressure. Reset clears the valid bits only.
module conv_kernel_stage #(
  parameter int          C_IN  = 10,
  parameter int          C_OUT = 20,
  parameter int          CUBES = 16,
  parameter int          LITS  = 6,
  parameter logic [31:0] SEED  = 32'h0C0F_FEE0,
  localparam int         K_IN  = 9 * C_IN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [K_IN-1:0]  patch,
  output logic             out_valid,
  output logic [C_OUT-1:0] out_bits
);

  logic [K_IN-1:0]  patch_q;
  logic [C_OUT-1:0] y;
  logic             v_q;

  logic_layer #(.IN(K_IN), .OUT(C_OUT), .CUBES(CUBES), .LITS(LITS), .SEED(SEED))
    u_kernel (.a(patch_q), .y(y));

  always_ff @(posedge clk) begin
    patch_q  <= patch;
    out_bits <= y;
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

endmodule
