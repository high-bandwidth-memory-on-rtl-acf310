// sgd_scalar: the ScalarEngine of the SGD engine. From a sample's dot
// product z and label b it forms alpha * (S(z) - b), where S is the identity
// for ridge regression and the sigmoid 1/(1+exp(-z)) for logistic
// regression. Numbers are signed 32-bit fixed point with SGD_FRAC fraction
// bits.
//
// The paper's engine evaluates the sigmoid with exp and a divider in
// floating point. Here it is the piecewise-linear PLAN approximation
// (Amin, Curtis, Hayes-Gill 1997), which needs only shifts and adds:
//   |z| >= 5        : 1
//   2.375 <= |z| < 5: |z|/32 + 0.84375
//   1 <= |z| < 2.375: |z|/8  + 0.625
//   |z| < 1         : |z|/4  + 0.5
// and 1 - y for negative z; the error is below 0.02.
// Timing: two registered stages, out_valid two cycles after in_valid.
module sgd_scalar
  import hbm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               logreg,
  input  logic signed [31:0] alpha,
  input  logic               in_valid,
  input  logic signed [31:0] in_dot,
  input  logic signed [31:0] in_label,
  output logic               out_valid,
  output logic signed [31:0] out_scalar
);
  localparam logic signed [31:0] ONE = 32'sd1 <<< SGD_FRAC;

  function automatic logic signed [31:0] plan_sigmoid(logic signed [31:0] z);
    logic signed [31:0] a, y;
    a = (z < 0) ? -z : z;
    if (a >= 5 * ONE)                y = ONE;
    else if (a >= (19 * ONE) / 8)    y = (a >>> 5) + (27 * ONE) / 32;
    else if (a >= ONE)               y = (a >>> 3) + (5 * ONE) / 8;
    else                             y = (a >>> 2) + ONE / 2;
    return (z < 0) ? ONE - y : y;
  endfunction

  logic               v1;
  logic signed [31:0] diff;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; diff <= '0; out_valid <= 1'b0; out_scalar <= '0;
    end else begin
      v1        <= in_valid;
      diff      <= (logreg ? plan_sigmoid(in_dot) : in_dot) - in_label;
      out_valid <= v1;
      out_scalar <= fx_mul(alpha, diff);
    end
  end
endmodule
