// input_encoder -- in-situ signed multibit input expansion on the source lines.
//
// Each signed input x drives the two source lines of a dual-block pair with complementary
// current-limiting voltages. The string current is set by V_SL: V0.5, V1, V1.5, V2 give
// 0.5, 1, 1.5, 2 times I0. Following the paper's input table:
//     x  : -2    -1     0    +1    +2
//     SL1: V2   V1.5   V1   V0.5   0
//     SL2: 0    V0.5   V1   V1.5   V2
// i.e. SL1 = (2 - x) and SL2 = (2 + x) in units of I0/2 (sl_level_t). Together with the
// complementary weight coding of weight_encoder this makes the pair current 2H + x*W (in I0).
//
// Interface: x in -2..+2; sl[0] drives the first block of the pair, sl[1] the second.
// in_range is low for x = -4, -3 or +3 (not valid inputs); x is then clamped to -2..+2.
// Purely combinational. The clamp is this design's choice.
module input_encoder
  import nasic_pkg::*;
(
  input  x_t        x,
  output sl_level_t sl[2],
  output logic      in_range
);

  always_comb begin
    x_t xc;
    in_range = (x >= -x_t'(X_MAX)) && (x <= x_t'(X_MAX));
    if (x < -x_t'(X_MAX))     xc = -x_t'(X_MAX);
    else if (x > x_t'(X_MAX)) xc = x_t'(X_MAX);
    else                      xc = x;
    sl[0]    = sl_level_t'(3'(X_MAX) - 3'(xc));
    sl[1]    = sl_level_t'(3'(X_MAX) + 3'(xc));
  end

endmodule
