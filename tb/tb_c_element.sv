// tb_c_element: checks the two-input C-element against a behavioural
// reference (output follows the inputs when they agree, holds otherwise) for
// both reset levels. Every (a, b) transition sequence of length 400 is random;
// reset is checked first. Ends with the TB_RESULT line.
`timescale 1ns/1ps
module tb_c_element;
  int checks = 0, failures = 0;
  logic rst, a, b;
  logic z0, z1;        // DUT outputs, INIT = 0 and INIT = 1
  logic r0, r1;        // reference model state

  c_element #(.INIT(1'b0)) dut0 (.rst(rst), .a(a), .b(b), .z(z0));
  c_element #(.INIT(1'b1)) dut1 (.rst(rst), .a(a), .b(b), .z(z1));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%b b=%b got %b expected %b", what, a, b, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; a = 0; b = 1;
    #1;
    check(z0, 1'b0, "reset INIT=0");
    check(z1, 1'b1, "reset INIT=1");
    r0 = 1'b0; r1 = 1'b1;
    rst = 0;
    #1;
    check(z0, r0, "hold after reset INIT=0");
    check(z1, r1, "hold after reset INIT=1");
    for (int i = 0; i < 400; i++) begin
      a = 1'($urandom_range(0, 1));
      b = 1'($urandom_range(0, 1));
      #1;
      if (a == b) begin r0 = a; r1 = a; end
      check(z0, r0, "INIT=0");
      check(z1, r1, "INIT=1");
    end
    // Directed: hold 1 while inputs disagree, then fall only when both fall.
    a = 1; b = 1; #1; check(z0, 1'b1, "both high");
    a = 0;        #1; check(z0, 1'b1, "hold high");
    a = 1; b = 0; #1; check(z0, 1'b1, "hold high, swapped");
    a = 0;        #1; check(z0, 1'b0, "both low");
    b = 1;        #1; check(z0, 1'b0, "hold low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
