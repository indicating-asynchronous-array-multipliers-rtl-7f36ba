// tb_si_and2: checks the strongly indicating dual-rail AND for RTZ and RTO.
// For every input pair and both arrival orders: the output stays at the
// spacer while only one input has data, equals the encoded a&b once both
// have, stays at that data while only one input has returned to the spacer,
// and returns to the spacer once both have.
`timescale 1ns/1ps
module tb_si_and2;
  import dr_pkg::*;
  int checks = 0, failures = 0;
  logic rst;
  dr_t az, bz, zz, ao, bo, zo;

  si_and2 #(.PROTOCOL(RTZ)) dut_z (.rst(rst), .a(az), .b(bz), .z(zz));
  si_and2 #(.PROTOCOL(RTO)) dut_o (.rst(rst), .a(ao), .b(bo), .z(zo));

  task automatic check(input dr_t got, input dr_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
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
    rst = 1;
    az = dr_spacer(RTZ); bz = dr_spacer(RTZ); ao = dr_spacer(RTO); bo = dr_spacer(RTO);
    #1; rst = 0; #1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int c = 0; c < 8; c++) begin
        logic va, vb, a_first;
        va = c[0]; vb = c[1]; a_first = c[2];
        if (a_first) begin az = dr_encode(RTZ, va); ao = dr_encode(RTO, va); end
        else         begin bz = dr_encode(RTZ, vb); bo = dr_encode(RTO, vb); end
        #1;
        check(zz, dr_spacer(RTZ), "RTZ one input data");
        check(zo, dr_spacer(RTO), "RTO one input data");
        az = dr_encode(RTZ, va); ao = dr_encode(RTO, va);
        bz = dr_encode(RTZ, vb); bo = dr_encode(RTO, vb);
        #1;
        check(zz, dr_encode(RTZ, va & vb), "RTZ product");
        check(zo, dr_encode(RTO, va & vb), "RTO product");
        if (a_first) begin bz = dr_spacer(RTZ); bo = dr_spacer(RTO); end
        else         begin az = dr_spacer(RTZ); ao = dr_spacer(RTO); end
        #1;
        check(zz, dr_encode(RTZ, va & vb), "RTZ one input spacer");
        check(zo, dr_encode(RTO, va & vb), "RTO one input spacer");
        az = dr_spacer(RTZ); bz = dr_spacer(RTZ); ao = dr_spacer(RTO); bo = dr_spacer(RTO);
        #1;
        check(zz, dr_spacer(RTZ), "RTZ spacer");
        check(zo, dr_spacer(RTO), "RTO spacer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
