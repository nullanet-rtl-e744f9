// sop_neuron: a neuron realized as a sum of products (DNF cover of its ON-set).
//
// This is the form in which a neuron leaves two-level minimization of its
// incompletely specified function: a list of cubes, each an AND of literals,
// ORed together. Cube k is given by CARE[k] (which inputs appear) and POL[k]
// (their required values); a cube with no care bit is always true. Input
// combinations never seen in training were don't-cares during minimization,
// so the cover decides them.
//
// Interface: a[N-1:0] inputs, f output. Purely combinational.
// Default: the Karnaugh-map cover f = a0 a1' + a0 a2 + a1' a2 of the
// three-input example neuron.
module sop_neuron #(
  parameter int N     = 3,
  parameter int CUBES = 3,
  parameter logic [CUBES-1:0][N-1:0] CARE = {3'b110, 3'b101, 3'b011},
  parameter logic [CUBES-1:0][N-1:0] POL  = {3'b100, 3'b101, 3'b001}
) (
  input  logic [N-1:0] a,
  output logic         f
);

  logic [CUBES-1:0] hit;

  always_comb begin
    for (int k = 0; k < CUBES; k++)
      hit[k] = ((a ^ POL[k]) & CARE[k]) == '0;
  end

  assign f = |hit;

endmodule
