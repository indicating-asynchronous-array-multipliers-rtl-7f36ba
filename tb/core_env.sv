// core_env: stimulus and checking for one array_multiplier_core instance,
// shared by the core testbench. For OPS operand pairs (all pairs when
// EXHAUSTIVE and 2N <= 16) it applies the data word, checks the decoded
// product against a*b computed with the * operator, then the spacer, and
// checks that every product bit is back at the spacer. Every other operation
// the 2N operand bits arrive one at a time in random order, and the same is
// done on the way back: the product must not be complete (all data, or all
// spacer) before the last operand bit has arrived, and product bits that
// appear earlier are counted as early outputs (weak indication).
`timescale 1ns/1ps
module core_env
  import dr_pkg::*;
#(
  parameter protocol_e   PROTOCOL   = RTO,
  parameter int unsigned N          = 8,
  parameter int unsigned OPS        = 100,
  parameter bit          EXHAUSTIVE = 1'b0
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   early_data,
  output int   early_spacer
);
  logic rst;
  dr_t [N-1:0] a, b;
  dr_t [2*N-1:0] p;

  array_multiplier_core #(.PROTOCOL(PROTOCOL), .N(N)) dut (.rst(rst), .a(a), .b(b), .p(p));

  function automatic int n_data(dr_t [2*N-1:0] x);
    int c = 0;
    for (int i = 0; i < 2*N; i++) if (dr_is_data(x[i])) c++;
    return c;
  endfunction

  function automatic int n_spacer(dr_t [2*N-1:0] x);
    int c = 0;
    for (int i = 0; i < 2*N; i++) if (dr_is_spacer(PROTOCOL, x[i])) c++;
    return c;
  endfunction

  function automatic logic [2*N-1:0] decode(dr_t [2*N-1:0] x);
    logic [2*N-1:0] v;
    for (int i = 0; i < 2*N; i++) v[i] = dr_value(PROTOCOL, x[i]);
    return v;
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL core N=%0d %s: %s at %0t", N, PROTOCOL.name(), what, $time);
    end
  endtask

  task automatic set_bit(input int idx, input logic to_data, input logic [2*N-1:0] v);
    dr_t x;
    x = to_data ? dr_encode(PROTOCOL, v[idx]) : dr_spacer(PROTOCOL);
    if (idx < N) a[idx] = x;
    else         b[idx - N] = x;
  endtask

  initial begin
    int total;
    int order [2*N];
    logic [N-1:0] x, y;
    logic [2*N-1:0] v, expected;
    done = 0; checks = 0; failures = 0; early_data = 0; early_spacer = 0;
    rst = 1;
    for (int i = 0; i < N; i++) begin a[i] = dr_spacer(PROTOCOL); b[i] = dr_spacer(PROTOCOL); end
    #1; rst = 0; #1;
    check(n_spacer(p) == 2*N, "spacer after reset");
    total = (EXHAUSTIVE && 2*N <= 16) ? (1 << (2*N)) : OPS;
    for (int n = 0; n < total; n++) begin
      if (EXHAUSTIVE && 2*N <= 16) {x, y} = (2*N)'(n);
      else if (n == 0) begin x = '1; y = '1; end
      else if (n == 1) begin x = '0; y = '0; end
      else begin x = N'($urandom); y = N'($urandom); end
      v = {y, x};                 // bit i < N: a[i]; bit N+j: b[j]
      expected = (2*N)'(x) * (2*N)'(y);
      for (int i = 0; i < 2*N; i++) order[i] = i;
      if (n % 2 == 1) begin
        order.shuffle();
        for (int k = 0; k < 2*N - 1; k++) begin
          set_bit(order[k], 1'b1, v);
          #1;
          check(n_data(p) < 2*N, "product complete before last input");
          if (n_data(p) > 0) early_data++;
        end
        set_bit(order[2*N-1], 1'b1, v);
      end else begin
        for (int i = 0; i < 2*N; i++) set_bit(i, 1'b1, v);
      end
      #1;
      check(n_data(p) == 2*N, "all product bits data");
      check(decode(p) == expected, $sformatf("%0d * %0d: got %0d", x, y, decode(p)));
      if (n % 2 == 1) begin
        order.shuffle();
        for (int k = 0; k < 2*N - 1; k++) begin
          set_bit(order[k], 1'b0, v);
          #1;
          check(n_spacer(p) < 2*N, "product spacer before last input");
          if (n_spacer(p) > 0) early_spacer++;
        end
        set_bit(order[2*N-1], 1'b0, v);
      end else begin
        for (int i = 0; i < 2*N; i++) set_bit(i, 1'b0, v);
      end
      #1;
      check(n_spacer(p) == 2*N, "all product bits spacer");
    end
    done = 1;
  end
endmodule
