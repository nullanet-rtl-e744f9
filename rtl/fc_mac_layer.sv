// fc_mac_layer: the first, real-valued fully connected layer with the sign
// activation (FC1 of the evaluated MLP).
//
// The inputs are float pixels, so this layer is computed conventionally: for
// each output neuron j the accumulator starts at the neuron's bias and one
// fp32_mac adds x[i]*w[j][i] for every input i; the neuron's binary output is
// 1 when the final sum is >= 0 (sign taken as +1 at zero, including -0) and 0
// otherwise. Batch normalization is expected folded into the weights and bias
// offline, so a threshold at zero is all that remains of it.
//
// Memories are external (param_mem): the input buffer x is read at x_raddr,
// the weight memory at w_raddr; both return data one clock later. Weight
// memory layout: weight w[j][i] at j*N_IN + i, bias of neuron j at
// N_IN*N_OUT + j.
//
// Timing: a one-clock start pulse begins an image. Each MAC takes 8 clocks
// (address, issue, six MAC stages; the accumulation is a true dependency and
// a single MAC unit is used), each neuron 2 more for its bias, so one image
// takes N_OUT*(8*N_IN + 2) + 1 clocks to the done pulse, after which y holds
// the layer output until the next start. The single MAC unit and the schedule
// are this design's choices; the layer sizes and the 6-stage MAC follow the
// evaluated design.
module fc_mac_layer
  import nn_pkg::*;
#(
  parameter int N_IN  = 784,
  parameter int N_OUT = 100,
  localparam int X_AW = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int W_AW = $clog2(N_IN * N_OUT + N_OUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic [X_AW-1:0]  x_raddr,
  input  fp32_t            x_rdata,
  output logic [W_AW-1:0]  w_raddr,
  input  fp32_t            w_rdata,
  output logic             busy,
  output logic             done,
  output logic [N_OUT-1:0] y
);

  typedef enum logic [2:0] {S_IDLE, S_BIAS_RD, S_BIAS_LD, S_RD, S_ISSUE, S_WAIT} state_t;
  state_t state;

  logic [X_AW-1:0] i;
  logic [$clog2(N_OUT+1)-1:0] j;
  logic [W_AW-1:0] w_ptr;        // address of w[j][i]
  fp32_t           acc;
  logic            mac_valid_in, mac_valid_out;
  fp32_t           mac_r;

  fp32_mac u_mac (.clk, .rst_n, .in_valid(mac_valid_in), .a(x_rdata), .b(w_rdata), .c(acc),
                  .out_valid(mac_valid_out), .r(mac_r));

  assign mac_valid_in = (state == S_ISSUE);
  assign busy         = (state != S_IDLE);
  assign x_raddr      = i;
  assign w_raddr      = (state == S_BIAS_RD) ? W_AW'(N_IN * N_OUT) + W_AW'(j) : w_ptr;

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      i     <= '0;
      j     <= '0;
      w_ptr <= '0;
      acc   <= FP32_ZERO;
      y     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          j     <= '0;
          i     <= '0;
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
        S_WAIT: if (mac_valid_out) begin
          w_ptr <= w_ptr + 1'b1;
          if (i == X_AW'(N_IN - 1)) begin
            y[j[$clog2(N_OUT+1)-1:0]] <= ~mac_r[31] | (mac_r[30:0] == '0);
            i <= '0;
            if (j == $bits(j)'(N_OUT - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              j     <= j + 1'b1;
              state <= S_BIAS_RD;
            end
          end else begin
            acc   <= mac_r;
            i     <= i + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
