// tb_multiplier_workloads: the four configurations of the evaluation - 4 x 4
// and 8 x 8 multiplication under RTZ and under RTO handshaking - each run over
// every operand pair (256 and 65,536 products) through the complete stage
// with a four-phase sender and receiver (mult_env). Operand bits arrive and
// leave one at a time in random order and the receiver answers after a
// random delay, so each product is also checked for complete indication.
`timescale 1ns/1ps
module tb_multiplier_workloads;
  import dr_pkg::*;
  localparam int E = 4;
  logic d [E];
  int c [E], f [E], hs [E], eo [E], st [E];
  int expect_hs [E] = '{256, 256, 65536, 65536};

  mult_env #(.PROTOCOL(RTZ), .N(4), .EXHAUSTIVE(1'b1)) e0 (d[0], c[0], f[0], hs[0], eo[0], st[0]);
  mult_env #(.PROTOCOL(RTO), .N(4), .EXHAUSTIVE(1'b1)) e1 (d[1], c[1], f[1], hs[1], eo[1], st[1]);
  mult_env #(.PROTOCOL(RTZ), .N(8), .EXHAUSTIVE(1'b1)) e2 (d[2], c[2], f[2], hs[2], eo[2], st[2]);
  mult_env #(.PROTOCOL(RTO), .N(8), .EXHAUSTIVE(1'b1)) e3 (d[3], c[3], f[3], hs[3], eo[3], st[3]);

  initial begin
    #50000000;
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
      checks += c[i] + 1; failures += f[i];
      $display("workload %0d: checks=%0d failures=%0d products=%0d early_outputs=%0d stalls=%0d",
               i, c[i], f[i], hs[i], eo[i], st[i]);
      if (hs[i] != expect_hs[i]) begin
        failures++; $display("FAIL workload %0d: %0d products", i, hs[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
