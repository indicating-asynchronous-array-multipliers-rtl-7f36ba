// completion_detector: produces a stage's Ackout from the dual-rail words
// held in its register bank.
//
// Each dual-rail pair is first reduced to one wire that is active when the
// pair carries data: an OR of the two rails for RTZ, an AND for RTO (the
// AND is 0 as soon as one rail has fallen to its data level). The WIDTH
// wires are then synchronised by a tree of two-input C-elements. Ackout
// therefore changes only when every pair has data (RTZ: 1, RTO: 0), or every
// pair is back at the spacer (RTZ: 0, RTO: 1), and holds in between.
//
// The OR/AND-plus-C-tree structure is the one drawn for both protocols in
// the stage diagram of the paper. The C-tree is balanced; the paper leaves its
// shape open. An immediate assertion flags an illegal code word (both rails
// active) on any input outside reset.
module completion_detector
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL = RTO,
  parameter int unsigned WIDTH    = 16
) (
  input  logic             rst,
  input  dr_t [WIDTH-1:0]  d,
  output logic             ackout
);

  localparam logic INIT = spacer_level(PROTOCOL);

  logic [WIDTH-1:0] pair_done;

  for (genvar i = 0; i < WIDTH; i++) begin : g_pair
    assign pair_done[i] = merge2(PROTOCOL, d[i].r1, d[i].r0);
  end

  c_tree #(.WIDTH(WIDTH), .INIT(INIT)) u_tree (.rst(rst), .in(pair_done), .out(ackout));

  always_comb begin
    for (int i = 0; i < WIDTH; i++) begin
      if (!rst) assert (!dr_is_illegal(PROTOCOL, d[i]))
        else $error("completion_detector: illegal dual-rail code on pair %0d", i);
    end
  end

endmodule
