// tb_array_multiplier_core: runs the array multiplier core without its
// register: 4 x 4 exhaustively (256 products) for RTZ and RTO, and 8 x 8 with
// random operands for both protocols, the RTO one at the module's default
// parameters. Besides the products it checks, for half of the operations, that
// the product is not complete before the last operand bit arrives (every
// operand is indicated by the outputs) and counts early product bits, which
// must occur for a weakly indicating array.
`timescale 1ns/1ps
module tb_array_multiplier_core;
  import dr_pkg::*;
  logic d [4];
  int c [4], f [4], ed [4], es [4];
  int checks, failures;

  core_env #(.PROTOCOL(RTZ), .N(4), .EXHAUSTIVE(1'b1)) e0 (d[0], c[0], f[0], ed[0], es[0]);
  core_env #(.PROTOCOL(RTO), .N(4), .EXHAUSTIVE(1'b1)) e1 (d[1], c[1], f[1], ed[1], es[1]);
  core_env #(.PROTOCOL(RTZ), .N(8), .OPS(400))         e2 (d[2], c[2], f[2], ed[2], es[2]);
  core_env #(.OPS(400))                                 e3 (d[3], c[3], f[3], ed[3], es[3]);

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end

  initial begin
    #2;
    wait (d[0] && d[1] && d[2] && d[3]);
    checks = 0; failures = 0;
    for (int i = 0; i < 4; i++) begin
      checks += c[i] + 2; failures += f[i];
      $display("env %0d: checks=%0d failures=%0d early data=%0d early spacer=%0d",
               i, c[i], f[i], ed[i], es[i]);
      if (ed[i] == 0) begin failures++; $display("FAIL env %0d: no early product bit on data", i); end
      if (es[i] == 0) begin failures++; $display("FAIL env %0d: no early product bit on spacer", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
