// fc_addsub_layer: the last fully connected layer, fed by binary activations
// (FC4 of the evaluated MLP).
//
// Because every input is +1 or -1, a product input*weight is the weight or its
// negation, and the dot product needs no multiplier: for each output k the
// accumulator starts at the bias and the four-stage fp32_add adds w[k][i]
// when a[i] = 1 and -w[k][i] (sign bit flipped) when a[i] = 0. The outputs
// are the float class scores; batch normalization of this layer is expected
// folded into the weights and bias.
//
// Weight memory (external param_mem, one clock read latency): w[k][i] at
// k*N_IN + i, bias of output k at N_IN*N_OUT + k. The activation vector a must
// stay stable from start to done.
//
// Timing: one-clock start pulse; each addition takes 6 clocks (address,
// issue, four adder stages), each output 2 more for its bias, so
// N_OUT*(6*N_IN + 2) + 1 clocks to the done pulse. score[k] then holds until
// the next start. One adder and this schedule are this design's choices.
module fc_addsub_layer
  import nn_pkg::*;
#(
  parameter int N_IN  = 100,
  parameter int N_OUT = 10,
  localparam int W_AW = $clog2(N_IN * N_OUT + N_OUT)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [N_IN-1:0]        a,
  output logic [W_AW-1:0]        w_raddr,
  input  fp32_t                  w_rdata,
  output logic                   busy,
  output logic                   done,
  output fp32_t [N_OUT-1:0]      score
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS_RD, S_BIAS_LD, S_RD, S_ISSUE, S_WAIT} state_t;
  state_t state;

  localparam int IW = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [IW-1:0]               i;
  logic [$clog2(N_OUT+1)-1:0]  k;
  logic [W_AW-1:0]             w_ptr;
  fp32_t                       acc, term, add_s;
  logic                        add_valid_out;

  assign term    = a[i] ? w_rdata : {~w_rdata[31], w_rdata[30:0]};
  assign busy    = (state != S_IDLE);
  assign w_raddr = (state == S_BIAS_RD) ? W_AW'(N_IN * N_OUT) + W_AW'(k) : w_ptr;

  fp32_add u_add (.clk, .rst_n, .in_valid(state == S_ISSUE), .a(acc), .b(term),
                  .out_valid(add_valid_out), .s(add_s));

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      i     <= '0;
      k     <= '0;
      w_ptr <= '0;
      acc   <= FP32_ZERO;
      score <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          i     <= '0;
          k     <= '0;
          w_ptr <= '0;
          state <= S_BIAS_RD;
        end
        S_BIAS_RD: state <= S_BIAS_LD;
        S_BIAS_LD: begin
          acc   <= w_rdata;
          state <= S_RD;
        end
        S_RD:    state <= S_ISSUE;
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (add_valid_out) begin
          w_ptr <= w_ptr + 1'b1;
          if (i == IW'(N_IN - 1)) begin
            score[k] <= add_s;
            i <= '0;
            if (k == $bits(k)'(N_OUT - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              k     <= k + 1'b1;
              state <= S_BIAS_RD;
            end
          end else begin
            acc   <= add_s;
            i     <= i + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
