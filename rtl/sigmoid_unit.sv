// sigmoid_unit: sigmoid activation of one 16-bit value per clock (a tile has
// two). Input: signed Q8.8 (8 integer, 8 fraction bits). Output: unsigned
// Q8.8 in [0, 1.0], i.e. 0..256.
//
// The architecture names the unit but not its circuit. This design uses the
// piecewise-linear PLAN approximation, which needs only shifts and adds:
//   |x| >= 5          : y = 1
//   2.375 <= |x| < 5  : y = |x|/32 + 0.84375
//   1 <= |x| < 2.375  : y = |x|/8  + 0.625
//   |x| < 1           : y = |x|/4  + 0.5
// and y(x) = 1 - y(|x|) for x < 0. Combinational; the tile registers it.
module sigmoid_unit import pim_pkg::*; (
  input  logic signed [DATA_W-1:0] x,
  output logic        [DATA_W-1:0] y
);
  localparam int ONE = 1 << FRAC_W;
  logic [DATA_W-1:0] a;      // |x|, saturated to 32767
  logic [DATA_W-1:0] ya;     // sigmoid(|x|)

  always_comb begin
    a = x[DATA_W-1] ? ((x == {1'b1, {(DATA_W-1){1'b0}}}) ? {1'b0, {(DATA_W-1){1'b1}}} : DATA_W'(-x))
                    : DATA_W'(x);
    if (int'(a) >= 5 * ONE)                ya = DATA_W'(ONE);
    else if (int'(a) >= (19 * ONE) / 8)    ya = (a >> 5) + DATA_W'((27 * ONE) / 32);
    else if (int'(a) >= ONE)               ya = (a >> 3) + DATA_W'((5 * ONE) / 8);
    else                                   ya = (a >> 2) + DATA_W'(ONE / 2);
    y = x[DATA_W-1] ? DATA_W'(ONE) - ya : ya;
  end
endmodule
