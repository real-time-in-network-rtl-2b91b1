// nn_activation -- activation function of one output neuron, in fixed point.
//
//   ACT_NONE    : y = z                       (linear regression output)
//   ACT_RELU    : y = max(0, z)
//   ACT_LEAKY   : y = z > 0 ? z : (alpha*z) >> s   (Leaky ReLU; Parametric
//                 ReLU is the same hardware with a learned alpha)
//   ACT_SIGMOID : Taylor sigmoid of order 1, 3 or 5 (fx_taylor_sigmoid)
//
// z, y and alpha are signed with s fractional bits. ReLU is the published
// conditional; alpha is read per model from the control-plane tables, which is
// how this design makes it "learnable". The alpha product is truncated by an
// arithmetic shift; that rounding is this design's choice.
//
// Timing: purely combinational.
module nn_activation
  import nn_pkg::*;
(
  input  act_e               act,
  input  logic signed [31:0] z,
  input  logic        [4:0]  s,
  input  logic signed [31:0] alpha,
  input  logic        [2:0]  order,
  input  logic signed [31:0] c0,
  input  logic signed [31:0] c1,
  input  logic signed [31:0] c3,
  input  logic signed [31:0] c5,
  output logic signed [31:0] y
);

  logic signed [31:0] y_sig;
  logic signed [63:0] leak;

  fx_taylor_sigmoid u_sig (
    .x(z), .s(s), .order(order), .c0(c0), .c1(c1), .c3(c3), .c5(c5), .y(y_sig)
  );

  always_comb begin
    leak = (64'(alpha) * 64'(z)) >>> s;
    unique case (act)
      ACT_NONE:    y = z;
      ACT_RELU:    y = (z > 0) ? z : '0;
      ACT_LEAKY:   y = (z > 0) ? z : leak[31:0];
      ACT_SIGMOID: y = y_sig;
      default:     y = z;
    endcase
  end

endmodule
