// act_unit: piecewise-linear sigmoid or tanh on 12-bit Q4.8 data.
//
// IS_TANH = 0 gives sigmoid(x), IS_TANH = 1 gives tanh(x) = 2*sigmoid(2x) - 1.
// The sigmoid is the four-segment PLAN approximation, which needs only
// shifts and adds. For z = |x|:
//   z >= 5         : 1
//   2.375 <= z < 5 : z/32 + 0.84375
//   1 <= z < 2.375 : z/8  + 0.625
//   z < 1          : z/4  + 0.5
// and sigmoid(-z) = 1 - sigmoid(z). The unit is combinational. The paper
// names the LSTM's activations but not how they are computed; this
// approximation is this design's choice.
module act_unit
  import bc_pkg::*;
#(
  parameter bit IS_TANH = 1'b0
) (
  input  data_t x,
  output data_t y
);
  localparam int ONE = 1 << FRAC;
  logic signed [DATA_W:0] z;     // argument of the sigmoid
  logic        [DATA_W:0] mag;   // |z|
  logic        [DATA_W:0] s;     // sigmoid(|z|), Q.8

  always_comb begin
    z   = IS_TANH ? ((DATA_W+1)'(x) <<< 1) : (DATA_W+1)'(x);
    mag = z[DATA_W] ? (DATA_W+1)'(-z) : (DATA_W+1)'(z);
    if (mag >= (DATA_W+1)'(5 * ONE))
      s = (DATA_W+1)'(ONE);
    else if (mag >= (DATA_W+1)'(19 * ONE / 8))
      s = (mag >> 5) + (DATA_W+1)'(27 * ONE / 32);
    else if (mag >= (DATA_W+1)'(ONE))
      s = (mag >> 3) + (DATA_W+1)'(5 * ONE / 8);
    else
      s = (mag >> 2) + (DATA_W+1)'(ONE / 2);
    if (z[DATA_W]) s = (DATA_W+1)'(ONE) - s;
    if (IS_TANH) y = DATA_W'(({1'b0, s} << 1) - (DATA_W+2)'(ONE));
    else         y = DATA_W'(s);
  end

endmodule
