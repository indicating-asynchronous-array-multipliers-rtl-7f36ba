// dr_register: the register bank that sits in front of an indicating
// circuit stage. Each rail of each dual-rail input passes through its own
// two-input C-element, whose second input is the stage's Ackin (the
// complement of the next stage's Ackout).
//
// With Ackin = 1 a rail can rise and with Ackin = 0 it can fall, so the bank
// lets data in (RTZ) or the spacer in (RTO) only once the next stage has asked
// for it, and otherwise holds what it has: this is the elastic latch of a
// four-phase pipeline. Both protocols use the same structure; only the reset
// level differs (spacer level: 0 for RTZ, 1 for RTO).
//
// Interface: d/q are WIDTH dual-rail words, ackin is a single wire, rst forces
// q to the spacer. No clock; q follows d as soon as ackin permits.
// The C-element per rail and the Ackin gating follow the stage diagram of the
// paper the design comes from; the reset is this design's addition.
module dr_register
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL = RTO,
  parameter int unsigned WIDTH    = 16
) (
  input  logic                  rst,
  input  logic                  ackin,
  input  dr_t  [WIDTH-1:0]      d,
  output dr_t  [WIDTH-1:0]      q
);

  localparam logic INIT = spacer_level(PROTOCOL);

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    logic q1, q0;
    c_element #(.INIT(INIT)) u_r1 (.rst(rst), .a(d[i].r1), .b(ackin), .z(q1));
    c_element #(.INIT(INIT)) u_r0 (.rst(rst), .a(d[i].r0), .b(ackin), .z(q0));
    assign q[i] = '{r1: q1, r0: q0};
  end

endmodule
