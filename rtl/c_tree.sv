// c_tree: a WIDTH-input C-element built as a balanced tree of two-input
// C-elements. Its output becomes 1 only when all inputs are 1 and 0 only when
// all are 0, and holds in between, which is what a wide C-element does for
// inputs that change monotonically (as rails of a four-phase circuit do).
//
// The tree halves its inputs recursively; a single input is passed on
// unchanged. The design uses only two-input C-elements, so every wider
// synchronisation (completion detection, three-input product terms) goes
// through this tree. rst forces every element to INIT.
module c_tree #(
  parameter int unsigned WIDTH = 2,
  parameter logic        INIT  = 1'b0
) (
  input  logic             rst,
  input  logic [WIDTH-1:0] in,
  output logic             out
);

  if (WIDTH == 1) begin : g_leaf
    assign out = in[0];
  end else if (WIDTH == 2) begin : g_pair
    c_element #(.INIT(INIT)) u_c (.rst(rst), .a(in[0]), .b(in[1]), .z(out));
  end else begin : g_split
    localparam int unsigned LO = WIDTH / 2;
    localparam int unsigned HI = WIDTH - LO;
    logic lo_out, hi_out;
    c_tree #(.WIDTH(LO), .INIT(INIT)) u_lo (.rst(rst), .in(in[LO-1:0]),     .out(lo_out));
    c_tree #(.WIDTH(HI), .INIT(INIT)) u_hi (.rst(rst), .in(in[WIDTH-1:LO]), .out(hi_out));
    c_element #(.INIT(INIT)) u_c (.rst(rst), .a(lo_out), .b(hi_out), .z(out));
  end

endmodule
