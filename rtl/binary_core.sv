// binary_core: the binary hidden layers (FC2 and FC3) as two macro-pipeline
// stages of pure logic.
//
// Each hidden layer is one logic_layer and one macro-pipeline stage; there is
// no micro-pipelining inside a layer. Registers hold the stage boundaries: the
// incoming vector, the FC2 result and the FC3 result (3 x WIDTH data bits).
// A new vector can enter every cycle; the result appears three cycles after
// it is presented with in_valid. A valid bit travels with each register; there
// is no backpressure (the consumer must take out_bits when out_valid is high).
// Reset (active low, synchronous) clears only the valid bits.
//
// Stage split and widths follow the evaluated MLP; the valid handshake, the
// register placement at the input and the covers (see logic_layer) are this
// design's choices.
module binary_core #(
  parameter int          WIDTH = 100,
  parameter int          CUBES = 16,
  parameter int          LITS  = 6,
  parameter logic [31:0] SEED2 = 32'h1234_5678,
  parameter logic [31:0] SEED3 = 32'h9ABC_DEF0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_bits,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_bits
);

  logic [WIDTH-1:0] in_q, fc2_d, fc2_q, fc3_d;
  logic             v_in, v_fc2;

  logic_layer #(.IN(WIDTH), .OUT(WIDTH), .CUBES(CUBES), .LITS(LITS), .SEED(SEED2))
    u_fc2 (.a(in_q), .y(fc2_d));

  logic_layer #(.IN(WIDTH), .OUT(WIDTH), .CUBES(CUBES), .LITS(LITS), .SEED(SEED3))
    u_fc3 (.a(fc2_q), .y(fc3_d));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_in      <= 1'b0;
      v_fc2     <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_in      <= in_valid;
      v_fc2     <= v_in;
      out_valid <= v_fc2;
    end
  end

  always_ff @(posedge clk) begin
    in_q     <= in_bits;
    fc2_q    <= fc2_d;
    out_bits <= fc3_d;
  end

endmodule
