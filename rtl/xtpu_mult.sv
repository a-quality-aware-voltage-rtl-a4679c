// xtpu_mult: the multiplier of one processing element, kept in a module of
// its own because it is the approximate voltage region of the PE.
//
// It forms the full signed 8 x 8 -> 16-bit product of an activation and a
// weight, combinationally.  In silicon this instance is the only part of the
// PE supplied from the column's selectable (possibly overscaled) rail; its
// 16-bit output crosses a level shifter into the nominal-supply region that
// holds the adder and the registers.  Timing errors caused by a low supply
// are an electrical effect and are not part of this logic: the RTL is the
// error-free function that the circuit computes at the nominal voltage.
// Separating the instance lets a power-intent file place it in its own
// supply domain.  Signed operands are this design's choice (weights are
// stated to span -128..127; activation signedness is not stated).
module xtpu_mult
  import xtpu_pkg::*;
(
  input  act_t  a,   // activation
  input  wgt_t  b,   // stationary weight
  output prod_t p    // 16-bit product, to the level shifter and adder
);
  assign p = prod_t'(a) * prod_t'(b);
endmodule
