// sigmoid_act: combinational activation Phi(x) ~ 1 / (1 + exp(-x)) in
// binary64. The sigmoid is approximated piecewise-linearly (the PLAN
// segments): for |x| < 1, 0.25|x| + 0.5; for 1 <= |x| < 2.375,
// 0.125|x| + 0.625; for 2.375 <= |x| < 5, 0.03125|x| + 0.84375; above, 1.
// Negative inputs use Phi(-x) = 1 - Phi(x). The slopes are powers of two, so
// the product is an exponent decrement and one double adder makes the sum;
// a second adder forms 1 - y. The source names the activation only as Phi;
// the sigmoid and its piecewise-linear form are this design's own choice.
// No latency.
module sigmoid_act
  import oselm_pkg::*;
(
  input  fp64_t x,
  output fp64_t y
);
  localparam fp64_t C_2P375  = 64'h4003_0000_0000_0000;
  localparam fp64_t C_5      = 64'h4014_0000_0000_0000;
  localparam fp64_t C_0P5    = 64'h3FE0_0000_0000_0000;
  localparam fp64_t C_0P625  = 64'h3FE4_0000_0000_0000;
  localparam fp64_t C_0P8437 = 64'h3FEB_0000_0000_0000;

  fp64_t       ax, kx, c, pos, neg;
  logic [10:0] sh;

  always_comb begin
    ax = {1'b0, x[62:0]};
    // positive doubles order like unsigned integers
    if (ax < FP_ONE) begin
      sh = 11'd2; c = C_0P5;
    end else if (ax < C_2P375) begin
      sh = 11'd3; c = C_0P625;
    end else begin
      sh = 11'd5; c = C_0P8437;
    end
    if (ax[62:52] <= sh) kx = FP_ZERO;
    else                 kx = {1'b0, ax[62:52] - sh, ax[51:0]};
  end

  fp64_add u_seg (.a(kx),     .b(c),   .sub(1'b0), .y(pos));
  fp64_add u_neg (.a(FP_ONE), .b(pos), .sub(1'b1), .y(neg));

  always_comb begin
    if (ax >= C_5)    y = x[63] ? FP_ZERO : FP_ONE;
    else if (x[63])   y = neg;
    else              y = pos;
  end
endmodule
