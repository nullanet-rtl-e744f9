// conv2_logic: the binary second convolution of the convolutional network,
// with 2x2 max pooling.
//
// The P1 x P1 x C_IN binary feature map (bit (y*P1 + x)*C_IN + c) is scanned
// in raster order without padding; each 3x3 patch is gathered by a
// multiplexer and sent through conv_kernel_stage, one patch per clock, and
// its C_OUT result bits are stored in a (P1-2)^2 x C_OUT map. Max pooling of
// +1/-1 values is an OR, so the pooled output (P2 = (P1-2)/2 per side,
// bit (py*P2 + px)*C_OUT + c) is the OR of four stored bits, a leftover odd
// row/column is dropped.
//
// Timing: start pulse; (P1-2)^2 patches issue on consecutive clocks, done
// pulses when the last result has been stored: (P1-2)^2 + 3 clocks after
// start (124 at the defaults). fmap_in must be stable from start to done;
// pooled is valid from done until the next start.
module conv2_logic #(
  parameter int C_IN  = 10,
  parameter int C_OUT = 20,
  parameter int P1    = 13,
  parameter int CUBES = 16,
  parameter int LITS  = 6,
  localparam int O  = P1 - 2,
  localparam int P2 = O / 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [P1*P1*C_IN-1:0]    fmap_in,
  output logic                     busy,
  output logic                     done,
  output logic [P2*P2*C_OUT-1:0]   pooled
);

  localparam int OW = $clog2(O + 1);
  logic [OW-1:0] oy, ox, ry, rx;      // issue and result positions
  logic          issuing, collecting;
  logic [9*C_IN-1:0] patch;
  logic              k_valid;
  logic [C_OUT-1:0]  k_bits;
  logic [O*O*C_OUT-1:0] map;

  always_comb begin
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        patch[(ky * 3 + kx) * C_IN +: C_IN] =
          fmap_in[((int'(oy) + ky) * P1 + int'(ox) + kx) * C_IN +: C_IN];
  end

  conv_kernel_stage #(.C_IN(C_IN), .C_OUT(C_OUT), .CUBES(CUBES), .LITS(LITS)) u_stage (
    .clk, .rst_n, .in_valid(issuing), .patch, .out_valid(k_valid), .out_bits(k_bits));

  assign busy = issuing | collecting;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      issuing    <= 1'b0;
      collecting <= 1'b0;
      oy <= '0; ox <= '0; ry <= '0; rx <= '0;
    end else begin
      if (start && !busy) begin
        issuing    <= 1'b1;
        collecting <= 1'b1;
        oy <= '0; ox <= '0; ry <= '0; rx <= '0;
      end
      if (issuing) begin
        if (ox != OW'(O - 1)) ox <= ox + 1'b1;
        else begin
          ox <= '0;
          if (oy != OW'(O - 1)) oy <= oy + 1'b1;
          else issuing <= 1'b0;
        end
      end
      if (k_valid && collecting) begin
        if (rx != OW'(O - 1)) rx <= rx + 1'b1;
        else begin
          rx <= '0;
          if (ry != OW'(O - 1)) ry <= ry + 1'b1;
          else begin
            collecting <= 1'b0;
            done       <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (k_valid && collecting) map[(int'(ry) * O + int'(rx)) * C_OUT +: C_OUT] <= k_bits;

  always_comb begin
    for (int py = 0; py < P2; py++)
      for (int px = 0; px < P2; px++)
        pooled[(py * P2 + px) * C_OUT +: C_OUT] =
            map[((2 * py)     * O + 2 * px)     * C_OUT +: C_OUT]
          | map[((2 * py)     * O + 2 * px + 1) * C_OUT +: C_OUT]
          | map[((2 * py + 1) * O + 2 * px)     * C_OUT +: C_OUT]
          | map[((2 * py + 1) * O + 2 * px + 1) * C_OUT +: C_OUT];
  end

endmodule
