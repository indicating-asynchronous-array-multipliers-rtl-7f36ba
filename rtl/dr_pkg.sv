// dr_pkg: shared types and helper functions for the dual-rail, four-phase
// indicating logic used by every module of the array multiplier.
//
// A single-rail bit X travels on two rails, (X1, X0), held here in the packed
// struct dr_t {r1, r0}. Two four-phase protocols are supported:
//   RTZ (return-to-zero): spacer = (0,0); value 1 = (1,0); value 0 = (0,1);
//                         (1,1) is illegal.
//   RTO (return-to-one):  spacer = (1,1); value 1 = (0,1); value 0 = (1,0);
//                         (0,0) is illegal.
// In both protocols a rail is "active" when it differs from the spacer level,
// and rail r1 is the one that becomes active for the value 1. An RTO circuit
// is the dual of its RTZ circuit: C-elements are kept, OR gates become AND
// gates, and constants and reset levels are inverted. The merge* functions
// below are that OR/AND gate, chosen by the protocol parameter.
package dr_pkg;

  typedef enum logic {
    RTZ = 1'b0,
    RTO = 1'b1
  } protocol_e;

  typedef struct packed {
    logic r1;  // rail that is active for the value 1
    logic r0;  // rail that is active for the value 0
  } dr_t;

  // Level of every rail in the spacer (also the reset level of C-elements).
  function automatic logic spacer_level(protocol_e p);
    return (p == RTO);
  endfunction

  function automatic dr_t dr_spacer(protocol_e p);
    return (p == RTO) ? 2'b11 : 2'b00;
  endfunction

  // Dual-rail code word for the single-rail value v.
  function automatic dr_t dr_encode(protocol_e p, logic v);
    dr_t x;
    x.r1 = v ^ (p == RTO);
    x.r0 = ~v ^ (p == RTO);
    return x;
  endfunction

  // True when x holds a valid data word (exactly one rail active).
  function automatic logic dr_is_data(dr_t x);
    return x.r1 != x.r0;
  endfunction

  function automatic logic dr_is_spacer(protocol_e p, dr_t x);
    return x == dr_spacer(p);
  endfunction

  function automatic logic dr_is_illegal(protocol_e p, dr_t x);
    return x == ~dr_spacer(p);
  endfunction

  // Single-rail value carried by a data word.
  function automatic logic dr_value(protocol_e p, dr_t x);
    return (p == RTO) ? x.r0 : x.r1;
  endfunction

  // OR of the active rails in RTZ, AND in RTO (the protocol dual of OR).
  function automatic logic merge2(protocol_e p, logic a, logic b);
    return (p == RTO) ? (a & b) : (a | b);
  endfunction

  function automatic logic merge3(protocol_e p, logic a, logic b, logic c);
    return (p == RTO) ? (a & b & c) : (a | b | c);
  endfunction

  function automatic logic merge4(protocol_e p, logic a, logic b, logic c, logic d);
    return (p == RTO) ? (a & b & c & d) : (a | b | c | d);
  endfunction

endpackage
