// tb_async_array_multiplier_full: the multiplier stage at its default
// parameters (8 x 8, RTO handshaking), taken through all 65,536 operand
// pairs with a complete four-phase handshake each: data in, Ackout, product
// checked against a*b, receiver acknowledge, spacer in, product back at the
// spacer, Ackout and acknowledge back to idle.
`timescale 1ns/1ps
module tb_async_array_multiplier_full;
  import dr_pkg::*;
  localparam int N = 8;
  localparam protocol_e P = RTO;
  localparam logic SPC = spacer_level(P);

  int checks = 0, failures = 0;
  logic rst, ackout, ack_rcv;
  dr_t [N-1:0] a, b;
  dr_t [2*N-1:0] p;

  async_array_multiplier dut (.rst(rst), .a(a), .b(b), .ackout(ackout), .p(p), .ack_rcv(ack_rcv));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic all_data(dr_t [2*N-1:0] v);
    for (int i = 0; i < 2*N; i++) if (!dr_is_data(v[i])) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic all_spacer(dr_t [2*N-1:0] v);
    for (int i = 0; i < 2*N; i++) if (!dr_is_spacer(P, v[i])) return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [2*N-1:0] decode(dr_t [2*N-1:0] v);
    logic [2*N-1:0] r;
    for (int i = 0; i < 2*N; i++) r[i] = dr_value(P, v[i]);
    return r;
  endfunction

  initial begin
    #3000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] x, y;
    rst = 1; ack_rcv = SPC;
    for (int i = 0; i < N; i++) begin a[i] = dr_spacer(P); b[i] = dr_spacer(P); end
    #2; rst = 0; #1;
    check(ackout == SPC && all_spacer(p), "idle after reset");
    for (int n = 0; n < (1 << (2*N)); n++) begin
      {x, y} = (2*N)'(n);
      for (int i = 0; i < N; i++) begin a[i] = dr_encode(P, x[i]); b[i] = dr_encode(P, y[i]); end
      #1;
      check(ackout == ~SPC, "Ackout after data");
      check(all_data(p) && decode(p) == (2*N)'(x) * (2*N)'(y),
            $sformatf("%0d * %0d: got %0d", x, y, decode(p)));
      ack_rcv = ~SPC;
      for (int i = 0; i < N; i++) begin a[i] = dr_spacer(P); b[i] = dr_spacer(P); end
      #1;
      check(ackout == SPC && all_spacer(p), "spacer after data");
      ack_rcv = SPC;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
