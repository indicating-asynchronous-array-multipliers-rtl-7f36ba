// wi_full_adder: weakly indicating dual-rail full adder, the cell placed at
// every node of the multiplier array.
//
// Four C-elements first decode the (a, b) pair: ab00, ab01, ab10, ab11 (one
// fires per data word). Eight more C-elements combine each of them with a
// carry-input rail, giving the eight minterms of (a, b, ci). The rails are
//   co.r1 = ab11 | ab10.ci1 | ab01.ci1
//   co.r0 = ab00 | ab01.ci0 | ab10.ci0
//   s.r1  = ab10.ci0 | ab01.ci0 | ab00.ci1 | ab11.ci1
//   s.r0  = ab00.ci0 | ab11.ci0 | ab10.ci1 | ab01.ci1
// where "." is a C-element and "|" an OR gate (an AND gate for RTO). All
// terms of one rail are disjoint (monotonic cover), so exactly one path is
// activated per data word. The carry can appear, and return to the spacer,
// from a and b alone when a == b; the sum always waits for all three inputs.
// That makes the cell weakly indicating: all but one output may switch early,
// the last only when the last input has arrived.
//
// CIN_RESET = 1 builds the cell for an array position whose carry input is
// the constant 0; the C-elements that would wait on the carry input are then
// removed (ci is ignored) and the cell works as a half adder from a and b.
//
// The paper uses a published biased weak-indication full adder without giving
// its gates; this netlist is this design's own weakly indicating adder with
// the same function, protocols and indication class.
// No clock; rst puts every C-element at the spacer level.
module wi_full_adder
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL  = RTO,
  parameter bit        CIN_RESET = 1'b0
) (
  input  logic rst,
  input  dr_t  a,
  input  dr_t  b,
  input  dr_t  ci,
  output dr_t  s,
  output dr_t  co
);

  localparam logic INIT = spacer_level(PROTOCOL);

  logic ab00, ab01, ab10, ab11;

  c_element #(.INIT(INIT)) u_ab00 (.rst(rst), .a(a.r0), .b(b.r0), .z(ab00));
  c_element #(.INIT(INIT)) u_ab01 (.rst(rst), .a(a.r0), .b(b.r1), .z(ab01));
  c_element #(.INIT(INIT)) u_ab10 (.rst(rst), .a(a.r1), .b(b.r0), .z(ab10));
  c_element #(.INIT(INIT)) u_ab11 (.rst(rst), .a(a.r1), .b(b.r1), .z(ab11));

  if (CIN_RESET) begin : g_half
    // Carry input is the constant 0: co = a.b, s = a ^ b.
    assign co.r1 = ab11;
    assign co.r0 = merge3(PROTOCOL, ab00, ab01, ab10);
    assign s.r1  = merge2(PROTOCOL, ab10, ab01);
    assign s.r0  = merge2(PROTOCOL, ab00, ab11);
  end else begin : g_full
    logic m000, m010, m100, m110;  // (a b) pair with ci = 0
    logic m001, m011, m101, m111;  // (a b) pair with ci = 1

    c_element #(.INIT(INIT)) u_m000 (.rst(rst), .a(ab00), .b(ci.r0), .z(m000));
    c_element #(.INIT(INIT)) u_m010 (.rst(rst), .a(ab01), .b(ci.r0), .z(m010));
    c_element #(.INIT(INIT)) u_m100 (.rst(rst), .a(ab10), .b(ci.r0), .z(m100));
    c_element #(.INIT(INIT)) u_m110 (.rst(rst), .a(ab11), .b(ci.r0), .z(m110));
    c_element #(.INIT(INIT)) u_m001 (.rst(rst), .a(ab00), .b(ci.r1), .z(m001));
    c_element #(.INIT(INIT)) u_m011 (.rst(rst), .a(ab01), .b(ci.r1), .z(m011));
    c_element #(.INIT(INIT)) u_m101 (.rst(rst), .a(ab10), .b(ci.r1), .z(m101));
    c_element #(.INIT(INIT)) u_m111 (.rst(rst), .a(ab11), .b(ci.r1), .z(m111));

    assign co.r1 = merge3(PROTOCOL, ab11, m101, m011);
    assign co.r0 = merge3(PROTOCOL, ab00, m010, m100);
    assign s.r1  = merge4(PROTOCOL, m100, m010, m001, m111);
    assign s.r0  = merge4(PROTOCOL, m000, m110, m101, m011);
  end

endmodule
