// mult_env: four-phase sender and receiver around one async_array_multiplier
// stage, shared by the end-to-end testbench.
//
// With EXHAUSTIVE set every one of the 2^(2N) operand pairs is multiplied once.
// Sender: waits for the stage's Ackout at its spacer level (RTZ 0, RTO 1),
// drives the 2N operand bits to data one at a time in random order, waits for
// Ackout to show the data was captured, waits a random time, returns the
// operand bits to the spacer one at a time, and waits for Ackout again.
// Receiver: waits until every product bit is data, checks the product against
// a*b, waits a random time and raises its acknowledge (RTZ 1, RTO 0); waits
// until every product bit is back at the spacer, waits a random time and
// returns its acknowledge to idle.
// Counted mechanisms: completed handshakes; early product bits (some product
// bits valid while operand bits are still missing, the weak-indication
// behaviour); register stalls (the sender already shows the spacer but the
// register keeps the product's data because the receiver has not yet
// acknowledged it). Checked besides the products: the product is never
// complete before the last operand bit has arrived, and it stays correct
// through a stall.
`timescale 1ns/1ps
module mult_env
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL = RTO,
  parameter int unsigned N        = 8,
  parameter int unsigned OPS      = 100,
  parameter bit          EXHAUSTIVE = 1'b0  // run all 2^(2N) operand pairs instead of OPS
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   handshakes,
  output int   early_outputs,
  output int   stalls
);
  localparam logic SPC = spacer_level(PROTOCOL);  // idle level of both acks

  logic rst, ackout, ack_rcv;
  dr_t [N-1:0] a, b;
  dr_t [2*N-1:0] p;
  logic [2*N-1:0] expected;
  logic [N-1:0] x, y;

  async_array_multiplier #(.PROTOCOL(PROTOCOL), .N(N)) dut (
    .rst(rst), .a(a), .b(b), .ackout(ackout), .p(p), .ack_rcv(ack_rcv));

  function automatic int n_data(dr_t [2*N-1:0] v);
    int c = 0;
    for (int i = 0; i < 2*N; i++) if (dr_is_data(v[i])) c++;
    return c;
  endfunction

  function automatic int n_spacer(dr_t [2*N-1:0] v);
    int c = 0;
    for (int i = 0; i < 2*N; i++) if (dr_is_spacer(PROTOCOL, v[i])) c++;
    return c;
  endfunction

  function automatic logic [2*N-1:0] decode(dr_t [2*N-1:0] v);
    logic [2*N-1:0] r;
    for (int i = 0; i < 2*N; i++) r[i] = dr_value(PROTOCOL, v[i]);
    return r;
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL stage N=%0d %s: %s at %0t", N, PROTOCOL.name(), what, $time);
    end
  endtask

  function automatic int total_ops();
    return EXHAUSTIVE ? (1 << (2*N)) : int'(OPS);
  endfunction

  task automatic set_bit(input int idx, input logic to_data);
    dr_t v;
    logic [2*N-1:0] bits;
    bits = {y, x};
    v = to_data ? dr_encode(PROTOCOL, bits[idx]) : dr_spacer(PROTOCOL);
    if (idx < N) a[idx] = v;
    else         b[idx - N] = v;
  endtask

  // Sender
  initial begin
    int order [2*N];
    logic early;
    done = 0; checks = 0; failures = 0; handshakes = 0; early_outputs = 0; stalls = 0;
    rst = 1; ack_rcv = SPC;
    for (int i = 0; i < N; i++) begin a[i] = dr_spacer(PROTOCOL); b[i] = dr_spacer(PROTOCOL); end
    x = '0; y = '0; expected = '0;
    #2; rst = 0; #1;
    check(ackout == SPC, "Ackout idle after reset");
    for (int n = 0; n < total_ops(); n++) begin
      while (ackout != SPC) #1;
      if (EXHAUSTIVE)  {x, y} = (2*N)'(n);
      else if (n == 0) begin x = '1; y = '1; end
      else if (n == 1) begin x = '0; y = N'($urandom); end
      else             begin x = N'($urandom); y = N'($urandom); end
      expected = (2*N)'(x) * (2*N)'(y);
      for (int i = 0; i < 2*N; i++) order[i] = i;
      order.shuffle();
      early = 0;
      for (int k = 0; k < 2*N; k++) begin
        set_bit(order[k], 1'b1);
        #1;
        if (k < 2*N - 1) begin
          check(n_data(p) < 2*N, "product complete before last operand bit");
          if (n_data(p) > 0) early = 1;
        end
      end
      if (early) early_outputs++;
      while (ackout == SPC) #1;
      #($urandom_range(0, 3));
      order.shuffle();
      for (int k = 0; k < 2*N; k++) begin
        set_bit(order[k], 1'b0);
        #1;
      end
      if (ackout != SPC && n_data(p) == 2*N) begin
        stalls++;
        check(decode(p) == expected, "product held during stall");
      end
    end
    while (ackout != SPC || ack_rcv != SPC) #1;
    done = 1;
  end

  // Receiver
  initial begin
    #3;
    forever begin
      while (n_data(p) != 2*N) #1;
      check(decode(p) == expected,
            $sformatf("%0d * %0d = %0d, got %0d", x, y, expected, decode(p)));
      #($urandom_range(0, 3 * N));
      ack_rcv = ~SPC;
      while (n_spacer(p) != 2*N) #1;
      #($urandom_range(0, 3));
      ack_rcv = SPC;
      handshakes++;
    end
  end
endmodule
