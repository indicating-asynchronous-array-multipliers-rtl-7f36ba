// c_element: two-input Muller C-element, the state-holding gate from which
// every register, completion detector, AND function and full adder of the
// multiplier is built.
//
// The output z goes to 1 when both inputs are 1, to 0 when both are 0, and
// holds its value while the inputs differ. The cell the design is based on
// is an AO222 gate with its output fed back to two of its inputs,
// z = a&b | a&z | b&z; here the same behaviour is written as a level-sensitive
// latch that is transparent while a == b, which simulators and synthesis
// handle without a combinational loop (the latch is the intended state
// element, not an accident).
//
// rst is this design's addition: while it is high the output is forced to
// INIT, the spacer level of the protocol in use (0 for RTZ, 1 for RTO), so
// that a circuit starts in the spacer. There is no clock; the gate is purely
// input driven.
module c_element #(
  parameter logic INIT = 1'b0
) (
  input  logic rst,
  input  logic a,
  input  logic b,
  output logic z
);

  always_latch begin
    if (rst)         z = INIT;
    else if (a == b) z = a;
  end

endmodule
