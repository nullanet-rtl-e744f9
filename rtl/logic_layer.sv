// logic_layer: a binary-input, binary-output hidden layer realized as logic.
//
// Every one of the OUT neurons is a sum of products over the IN shared layer
// inputs (one sop_neuron each). The covers are the result of minimizing each
// neuron's incompletely specified function offline (ON-set and OFF-set taken
// from the training data, every other input combination a don't-care); the
// hardware holds no weights at all. Sharing of sub-expressions between the
// neurons of the layer is left to logic synthesis.
//
// Interface: a[IN-1:0] activations of the previous layer, y[OUT-1:0] this
// layer's activations. Combinational; registers sit around it (binary_core).
//
// The cover is a parameter: CARE[n][k] / POL[n][k] give cube k of neuron n.
// Trained covers are not available here, so the default is a placeholder,
// generated at elaboration from SEED with nn_pkg::cover_hash: every cube has
// LITS literals; literal l of cube k of neuron n is input
// h % IN with required value h[31], h = cover_hash(SEED, n, k, l) (a repeated
// input keeps the last polarity). Sizes IN = OUT = 100 follow the hidden
// layers of the evaluated MLP; CUBES and LITS are this design's choice.
module logic_layer
  import nn_pkg::*;
#(
  parameter int          IN    = 100,
  parameter int          OUT   = 100,
  parameter int          CUBES = 16,
  parameter int          LITS  = 6,
  parameter logic [31:0] SEED  = 32'h1234_5678,
  parameter logic [OUT-1:0][CUBES-1:0][IN-1:0] CARE = gen_cover(1'b1),
  parameter logic [OUT-1:0][CUBES-1:0][IN-1:0] POL  = gen_cover(1'b0)
) (
  input  logic [IN-1:0]  a,
  output logic [OUT-1:0] y
);

  typedef logic [OUT-1:0][CUBES-1:0][IN-1:0] cover_t;

  // want_care = 1 returns the care masks, 0 the polarity masks.
  function automatic cover_t gen_cover(input logic want_care);
    cover_t c;
    for (int n = 0; n < OUT; n++)
      for (int k = 0; k < CUBES; k++) begin
        logic [IN-1:0] care, pol;
        care = '0;
        pol  = '0;
        for (int l = 0; l < LITS; l++) begin
          logic [31:0] h;
          int idx;
          h   = cover_hash(SEED, n, k, l);
          idx = int'(h % 32'(IN));
          care[idx] = 1'b1;
          pol[idx]  = h[31];
        end
        c[n][k] = want_care ? care : pol;
      end
    return c;
  endfunction

  for (genvar n = 0; n < OUT; n++) begin : g_neuron
    sop_neuron #(.N(IN), .CUBES(CUBES), .CARE(CARE[n]), .POL(POL[n])) u_neuron (
      .a(a), .f(y[n])
    );
  end

endmodule
