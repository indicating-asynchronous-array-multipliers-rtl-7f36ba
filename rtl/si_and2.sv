// si_and2: strongly indicating dual-rail two-input AND, used for every
// partial product A[i]B[j] of the multiplier.
//
// Four C-elements decode the four input combinations: C1 = (A1,B1) drives the
// output rail Z1 directly; C2 = (A0,B0), C3 = (A0,B1) and C4 = (A1,B0) are the
// three combinations whose product is 0 and are merged onto Z0 by an OR gate
// (RTZ) or an AND gate (RTO). Exactly one C-element fires per data word, so
// the product terms are disjoint, and the output can only change after both
// inputs have changed: data and spacer are both strongly indicated.
//
// Structure (four C-elements, OR for RTZ, AND for RTO) follows the paper's
// figure of the AND function; which input pair goes to C2, C3 and C4 is
// not legible there and was derived from the logic function.
// No clock; rst puts every C-element at the spacer level.
module si_and2
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTO
) (
  input  logic rst,
  input  dr_t  a,
  input  dr_t  b,
  output dr_t  z
);

  localparam logic INIT = spacer_level(PROTOCOL);

  logic c1, c2, c3, c4;

  c_element #(.INIT(INIT)) u_c1 (.rst(rst), .a(a.r1), .b(b.r1), .z(c1));
  c_element #(.INIT(INIT)) u_c2 (.rst(rst), .a(a.r0), .b(b.r0), .z(c2));
  c_element #(.INIT(INIT)) u_c3 (.rst(rst), .a(a.r0), .b(b.r1), .z(c3));
  c_element #(.INIT(INIT)) u_c4 (.rst(rst), .a(a.r1), .b(b.r0), .z(c4));

  assign z.r1 = c1;
  assign z.r0 = merge3(PROTOCOL, c2, c3, c4);

endmodule
