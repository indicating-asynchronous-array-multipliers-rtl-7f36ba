// async_array_multiplier: one indicating asynchronous multiplier stage, the
// top of the design.
//
// The 2N dual-rail operand bits enter a register bank (one C-element per
// rail, gated by Ackin), whose outputs feed the array multiplier core. A
// completion detector on the register outputs gives Ackout to the sender:
// it reports when the whole operand word (data or spacer) has been captured.
// Ackin is the complement of the receiver's Ackout (ack_rcv), inverted here.
//
// Protocol (PROTOCOL = RTZ or RTO, four-phase, dual-rail):
//   RTZ: sender drives data when ackout = 0; ackout rises when it is captured;
//        sender returns to the spacer; ackout falls. The register lets data
//        in while ack_rcv = 0 and the spacer in while ack_rcv = 1.
//   RTO: the same sequence with the spacer and all levels inverted; after
//        reset ackout = 1 and the stage waits for data.
// The product p (2N dual-rail bits) is complete when every bit is data; a
// receiver acknowledges it with ack_rcv (RTZ: 1, RTO: 0 when it has the data).
//
// Defaults are the paper's preferred configuration: the 8 x 8 array and
// RTO handshaking. rst (this design's addition) puts every C-element at the
// spacer level; release it with the inputs at the spacer and ack_rcv at its
// idle level (RTZ: 0, RTO: 1).
module async_array_multiplier
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL = RTO,
  parameter int unsigned N        = 8
) (
  input  logic              rst,
  input  dr_t [N-1:0]       a,
  input  dr_t [N-1:0]       b,
  output logic              ackout,
  output dr_t [2*N-1:0]     p,
  input  logic              ack_rcv
);

  logic        ackin;
  dr_t [2*N-1:0] reg_d, reg_q;
  dr_t [N-1:0]   a_q, b_q;

  assign ackin = ~ack_rcv;
  assign reg_d = {a, b};
  assign a_q   = reg_q[2*N-1:N];
  assign b_q   = reg_q[N-1:0];

  dr_register #(.PROTOCOL(PROTOCOL), .WIDTH(2 * N)) u_reg (
    .rst(rst), .ackin(ackin), .d(reg_d), .q(reg_q));

  completion_detector #(.PROTOCOL(PROTOCOL), .WIDTH(2 * N)) u_cd (
    .rst(rst), .d(reg_q), .ackout(ackout));

  array_multiplier_core #(.PROTOCOL(PROTOCOL), .N(N)) u_core (
    .rst(rst), .a(a_q), .b(b_q), .p(p));

endmodule
