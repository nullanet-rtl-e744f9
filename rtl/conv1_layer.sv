// conv1_layer: the first, real-valued convolution of the convolutional
// network, with 2x2 max pooling and the sign activation.
//
// The image (IMG x IMG float pixels, row-major in an external param_mem) is
// convolved with C1 filters of 3x3 without padding, giving (IMG-2)^2 outputs
// per channel; 2x2 max pooling (stride 2, a leftover odd row/column dropped)
// and the sign follow. With batch normalization folded into the filter and
// its bias, sign(max(z)) equals OR over the window of sign(z), so each pooled
// bit is computed as the OR of the signs of its four convolution sums. Each
// sum starts at the channel bias and adds nine products with one fp32_mac.
//
// Weight memory layout: w[c][ky*3+kx] at c*9 + ky*3 + kx, bias of channel c
// at 9*C1 + c. Output bit fmap[(py*P + px)*C1 + c], P = (IMG-2)/2, is 1 for
// +1. Both memories return data one clock after the address.
//
// Timing: a one-clock start pulse; each sum takes 2 + 9*8 clocks (bias, then
// address, issue and six MAC stages per product), so an image takes
// P*P*C1*4*74 + 1 clocks to the done pulse (500,241 at the defaults).
// Sizes follow the evaluated network; the schedule, the single MAC unit and
// the order of pooling and sign are this design's choices.
module conv1_layer
  import nn_pkg::*;
#(
  parameter int IMG = 28,
  parameter int C1  = 10,
  localparam int P    = (IMG - 2) / 2,
  localparam int X_AW = $clog2(IMG * IMG),
  localparam int W_AW = $clog2(10 * C1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic [X_AW-1:0]    x_raddr,
  input  fp32_t              x_rdata,
  output logic [W_AW-1:0]    w_raddr,
  input  fp32_t              w_rdata,
  output logic               busy,
  output logic               done,
  output logic [P*P*C1-1:0]  fmap
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS_RD, S_BIAS_LD, S_RD, S_ISSUE, S_WAIT} state_t;
  state_t state;

  localparam int PW = $clog2(P + 1);
  localparam int CW = $clog2(C1 + 1);
  logic [PW-1:0] py, px;
  logic [CW-1:0] c;
  logic [1:0]    q;            // position in the pooling window: {dy, dx}
  logic [3:0]    k;            // filter tap ky*3+kx
  logic [1:0]    ky, kx;
  logic          pool_or;
  fp32_t         acc, mac_r;
  logic          mac_valid_out;

  fp32_mac u_mac (.clk, .rst_n, .in_valid(state == S_ISSUE), .a(x_rdata), .b(w_rdata), .c(acc),
                  .out_valid(mac_valid_out), .r(mac_r));

  always_comb begin
    ky = 2'(k / 4'd3);
    kx = 2'(k % 4'd3);
  end

  assign busy    = (state != S_IDLE);
  assign x_raddr = X_AW'((2 * int'(py) + int'(q[1]) + int'(ky)) * IMG + 2 * int'(px) + int'(q[0]) + int'(kx));
  assign w_raddr = (state == S_BIAS_RD) ? W_AW'(9 * C1 + int'(c)) : W_AW'(9 * int'(c) + int'(k));

  logic sum_sign_pos;
  assign sum_sign_pos = ~mac_r[31] | (mac_r[30:0] == '0);

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state   <= S_IDLE;
      py      <= '0;
      px      <= '0;
      c       <= '0;
      q       <= '0;
      k       <= '0;
      pool_or <= 1'b0;
      acc     <= FP32_ZERO;
      fmap    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          py <= '0; px <= '0; c <= '0; q <= '0; k <= '0;
          pool_or <= 1'b0;
          state   <= S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_LD;
        S_BIAS_LD: begin
          acc   <= w_rdata;
          state <= S_RD;
        end
        S_RD:    state <= S_ISSUE;
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (mac_valid_out) begin
          if (k != 4'd8) begin
            acc   <= mac_r;
            k     <= k + 4'd1;
            state <= S_RD;
          end else begin
            k <= '0;
            if (q != 2'd3) begin
              pool_or <= pool_or | sum_sign_pos;
              q       <= q + 2'd1;
              state   <= S_BIAS_RD;
            end else begin
              fmap[(int'(py) * P + int'(px)) * C1 + int'(c)] <= pool_or | sum_sign_pos;
              pool_or <= 1'b0;
              q       <= '0;
              state   <= S_BIAS_RD;
              if (c != CW'(C1 - 1)) c <= c + 1'b1;
              else begin
                c <= '0;
                if (px != PW'(P - 1)) px <= px + 1'b1;
                else begin
                  px <= '0;
                  if (py != PW'(P - 1)) py <= py + 1'b1;
                  else begin
                    done  <= 1'b1;
                    state <= S_IDLE;
                  end
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
