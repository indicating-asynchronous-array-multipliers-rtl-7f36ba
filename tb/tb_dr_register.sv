// tb_dr_register: checks the dual-rail register bank for RTZ and RTO.
// Part 1 drives random rail and Ackin values and compares every rail with a
// per-rail C-element reference. Part 2 runs the four-phase sequence: data
// passes only while Ackin permits it, is held while the sender already shows
// the spacer and Ackin has not changed, and the spacer then passes.
`timescale 1ns/1ps
module tb_dr_register;
  import dr_pkg::*;
  localparam int W = 4;
  int checks = 0, failures = 0;
  logic rst, ackin_z, ackin_o;
  dr_t [W-1:0] dz, qz, do_, qo;
  logic [2*W-1:0] refz, refo;

  dr_register #(.PROTOCOL(RTZ), .WIDTH(W)) dut_z (.rst(rst), .ackin(ackin_z), .d(dz),  .q(qz));
  dr_register #(.PROTOCOL(RTO), .WIDTH(W)) dut_o (.rst(rst), .ackin(ackin_o), .d(do_), .q(qo));

  task automatic check(input logic [2*W-1:0] got, input logic [2*W-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  function automatic dr_t [W-1:0] word(protocol_e p, logic [W-1:0] v);
    dr_t [W-1:0] x;
    for (int i = 0; i < W; i++) x[i] = dr_encode(p, v[i]);
    return x;
  endfunction

  function automatic dr_t [W-1:0] spacer(protocol_e p);
    dr_t [W-1:0] x;
    for (int i = 0; i < W; i++) x[i] = dr_spacer(p);
    return x;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    rst = 1; dz = spacer(RTZ); do_ = spacer(RTO); ackin_z = 1; ackin_o = 1;
    #1;
    check(qz, spacer(RTZ), "RTZ reset");
    check(qo, spacer(RTO), "RTO reset");
    rst = 0;
    refz = '0; refo = '1;
    // Part 1: random rails against a per-rail reference.
    for (int n = 0; n < 300; n++) begin
      dz = (2*W)'($urandom); do_ = (2*W)'($urandom);
      ackin_z = 1'($urandom_range(0, 1)); ackin_o = 1'($urandom_range(0, 1));
      #1;
      for (int i = 0; i < 2*W; i++) begin
        if (dz[i/2][i%2] == ackin_z)  refz[i] = ackin_z;
        if (do_[i/2][i%2] == ackin_o) refo[i] = ackin_o;
      end
      check(qz, refz, "RTZ random");
      check(qo, refo, "RTO random");
    end
    // Part 2: four-phase sequence. Bring both to the spacer first.
    dz = spacer(RTZ); ackin_z = 0; do_ = spacer(RTO); ackin_o = 1; #1;
    check(qz, spacer(RTZ), "RTZ spacer");
    check(qo, spacer(RTO), "RTO spacer");
    for (int n = 0; n < 20; n++) begin
      v = W'($urandom);
      // data waits while Ackin blocks it
      dz = word(RTZ, v); do_ = word(RTO, v); #1;
      check(qz, spacer(RTZ), "RTZ data blocked");
      check(qo, spacer(RTO), "RTO data blocked");
      ackin_z = 1; ackin_o = 0; #1;
      check(qz, word(RTZ, v), "RTZ data passed");
      check(qo, word(RTO, v), "RTO data passed");
      // sender returns to the spacer, but Ackin has not changed: data held
      dz = spacer(RTZ); do_ = spacer(RTO); #1;
      check(qz, word(RTZ, v), "RTZ data held");
      check(qo, word(RTO, v), "RTO data held");
      ackin_z = 0; ackin_o = 1; #1;
      check(qz, spacer(RTZ), "RTZ spacer passed");
      check(qo, spacer(RTO), "RTO spacer passed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
