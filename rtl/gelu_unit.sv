// gelu_unit: LANES parallel GELU lanes on int8 activations, combinational.
//
// The paper puts GELU on the PL after the FFN1 Receiver (Fig. 3) but does not
// say how it is computed. Here each lane evaluates the integer i-GELU
// polynomial of cat_pkg::gelu_q4 on a Q4 value (real value = x/16):
// |x|/sqrt2 by a multiply by 181/256, erf by a clipped second-order
// polynomial (a = -0.2888 as -74/256, clip at 28/16 = 1.75), then
// x/2 * (1 + erf) rounded and saturated to int8. No state, no latency.
module gelu_unit
  import cat_pkg::*;
#(
  parameter int LANES = 64
) (
  input  logic [LANES*8-1:0] x,
  output logic [LANES*8-1:0] y
);
  always_comb
    for (int j = 0; j < LANES; j++) y[j*8 +: 8] = gelu_q4(signed'(x[j*8 +: 8]));
endmodule
