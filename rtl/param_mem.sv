// param_mem: on-chip memory for the parameters of the float layers and for
// the input image.
//
// Only the first and last layers of the network need stored weights; they are
// kept in small, close memories like this one. One write port (used by the
// host to load parameters or an image) and one read port with a registered
// output: rdata holds word raddr one clock after raddr is presented. Writes
// and reads to the same address in the same cycle return the old word.
// No reset: the contents are whatever was written. A plain array, so synthesis
// maps it to block RAM.
module param_mem #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 32,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
