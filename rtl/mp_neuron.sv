// mp_neuron: a McCulloch-Pitts threshold neuron realized by input enumeration.
//
// The neuron computes f = 1 when sum_j a^j * w^j >= b, with binary inputs a^j
// in {0,1} and constant weights and bias. Instead of a multiply-accumulate,
// the full truth table of the neuron (2**N rows) is computed while the design
// is elaborated, and the output is the table entry selected by the input
// vector. Synthesis then minimizes this table into gates, so no weight is ever
// read from a memory: the weights exist only implicitly in the logic.
//
// Interface: a[j] is input a^j, f is the output. Purely combinational.
// W[j] is the weight of input j (packed, entry 0 in the low bits).
// Weights and bias are 16-bit integers scaled by 100 (1.4 -> 140), this design's
// choice so they can be parameters; the defaults are the three-input example
// neuron (weights 1.4, -3.4, 2.8, bias 0.61), whose minimized form is
// f = a0 a1' + a0 a2 + a1' a2. Enumeration suits small fan-in only: the
// table grows as 2**N.
module mp_neuron #(
  parameter int                      N = 3,
  parameter logic signed [N-1:0][15:0] W = {16'sd280, -16'sd340, 16'sd140},
  parameter int                      B = 61
) (
  input  logic [N-1:0] a,
  output logic         f
);

  function automatic logic [2**N-1:0] build_table();
    logic [2**N-1:0] tt;
    for (int row = 0; row < 2**N; row++) begin
      int acc;
      acc = 0;
      for (int j = 0; j < N; j++)
        if (row[j]) acc += int'(signed'(W[j]));  // an element select is unsigned
      tt[row] = (acc >= B);
    end
    return tt;
  endfunction

  localparam logic [2**N-1:0] TT = build_table();

  assign f = TT[a];

endmodule
