// tb_async_array_multiplier: end-to-end test of the multiplier stage with
// a four-phase sender and receiver (mult_env) for 4 x 4 and 8 x 8 operands,
// RTZ and RTO; the 8 x 8 RTO stage uses the design's default parameters.
// Each mechanism must have happened at least once in every configuration:
// complete handshakes, early product bits (weak indication) and register
// stalls (the stage holds its data while the receiver is slow).
`timescale 1ns/1ps
module tb_async_array_multiplier;
  import dr_pkg::*;
  localparam int E = 4;
  localparam int OPS = 300;
  logic d [E];
  int c [E], f [E], hs [E], eo [E], st [E];

  mult_env #(.PROTOCOL(RTZ), .N(4), .OPS(OPS)) e0 (d[0], c[0], f[0], hs[0], eo[0], st[0]);
  mult_env #(.PROTOCOL(RTO), .N(4), .OPS(OPS)) e1 (d[1], c[1], f[1], hs[1], eo[1], st[1]);
  mult_env #(.PROTOCOL(RTZ), .N(8), .OPS(OPS)) e2 (d[2], c[2], f[2], hs[2], eo[2], st[2]);
  mult_env #(.OPS(OPS))                         e3 (d[3], c[3], f[3], hs[3], eo[3], st[3]);

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    int checks, failures;
    #4;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = 0; failures = 0;
    for (int i = 0; i < E; i++) begin
      checks += c[i] + 4; failures += f[i];
      $display("stage %0d: checks=%0d failures=%0d handshakes=%0d early_outputs=%0d stalls=%0d",
               i, c[i], f[i], hs[i], eo[i], st[i]);
      if (hs[i] != OPS) begin failures++; $display("FAIL stage %0d: %0d handshakes", i, hs[i]); end
      if (eo[i] == 0)   begin failures++; $display("FAIL stage %0d: no early output", i); end
      if (st[i] == 0)   begin failures++; $display("FAIL stage %0d: no stall", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
