// enum_layer: a layer of threshold neurons over shared binary inputs, each
// realized by input enumeration (see mp_neuron).
//
// All M neurons see the same N inputs. Each is an mp_neuron whose weights and
// bias are row n of W and B. Logic common to several neurons is not written
// out by hand: once the layer is flattened, synthesis finds and shares it
// (in the three-neuron example, neurons 0 and 2 compute the same function and
// collapse onto one net).
//
// Interface: a[N-1:0] inputs, y[M-1:0] outputs; combinational.
// Defaults: the three-input, three-neuron example layer with weights
// (1.4,-3.4,2.8 | -0.8,-1,0.3 | 2.3,-2.5,1.9) and biases (0.61, -1, 1.2),
// scaled by 100. Which printed weight sits on which edge was chosen here to
// agree with the gate-level realization of that example.
module enum_layer #(
  parameter int N = 3,
  parameter int M = 3,
  parameter logic signed [M-1:0][N-1:0][15:0] W = {
    {16'sd190, -16'sd250, 16'sd230},   // neuron 2
    {16'sd30,  -16'sd100, -16'sd80},   // neuron 1
    {16'sd280, -16'sd340, 16'sd140}    // neuron 0
  },
  parameter logic signed [M-1:0][15:0] B = {16'sd120, -16'sd100, 16'sd61}
) (
  input  logic [N-1:0] a,
  output logic [M-1:0] y
);

  for (genvar n = 0; n < M; n++) begin : g_neuron
    mp_neuron #(.N(N), .W(W[n]), .B(int'(signed'(B[n])))) u_neuron (.a(a), .f(y[n]));
  end

endmodule
