// tb_wi_full_adder: checks the weakly indicating dual-rail full adder for RTZ
// and RTO, with a live carry input and with the constant-0 carry input
// (CIN_RESET). Inputs arrive one at a time in random order. Checked: the sum
// is not produced before the last input has arrived; the carry is produced
// as soon as a and b agree (early output of a weakly indicating cell); the
// final sum and carry equal a+b+ci; on the return to the spacer the sum keeps
// its data until the last input is spacer, and both outputs end at spacer.
`timescale 1ns/1ps
module tb_wi_full_adder;
  import dr_pkg::*;
  int checks = 0, failures = 0;
  int early_carries = 0;
  logic rst;
  dr_t in_z [3], in_o [3], hz [3], ho [3];  // a, b, ci
  dr_t sz, cz, so, co, hsz, hcz, hso, hco;

  wi_full_adder #(.PROTOCOL(RTZ), .CIN_RESET(1'b0)) dut_z (.rst(rst),
    .a(in_z[0]), .b(in_z[1]), .ci(in_z[2]), .s(sz), .co(cz));
  wi_full_adder #(.PROTOCOL(RTO), .CIN_RESET(1'b0)) dut_o (.rst(rst),
    .a(in_o[0]), .b(in_o[1]), .ci(in_o[2]), .s(so), .co(co));
  wi_full_adder #(.PROTOCOL(RTZ), .CIN_RESET(1'b1)) dut_hz (.rst(rst),
    .a(hz[0]), .b(hz[1]), .ci(hz[2]), .s(hsz), .co(hcz));
  wi_full_adder #(.PROTOCOL(RTO), .CIN_RESET(1'b1)) dut_ho (.rst(rst),
    .a(ho[0]), .b(ho[1]), .ci(ho[2]), .s(hso), .co(hco));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [3];
    logic [2:0] v;
    logic [1:0] sum, hsum;
    rst = 1;
    for (int i = 0; i < 3; i++) begin
      in_z[i] = dr_spacer(RTZ); in_o[i] = dr_spacer(RTO);
      hz[i]   = dr_spacer(RTZ); ho[i]   = dr_spacer(RTO);
    end
    hz[2] = dr_encode(RTZ, 1'b0); ho[2] = dr_encode(RTO, 1'b0);  // constant 0
    #1; rst = 0; #1;
    for (int n = 0; n < 64; n++) begin
      v = 3'(n % 8);
      sum  = v[0] + v[1] + v[2];
      hsum = v[0] + v[1];
      order = '{0, 1, 2};
      order.shuffle();
      for (int k = 0; k < 3; k++) begin
        automatic int i = order[k];
        in_z[i] = dr_encode(RTZ, v[i]); in_o[i] = dr_encode(RTO, v[i]);
        if (i < 2) begin hz[i] = dr_encode(RTZ, v[i]); ho[i] = dr_encode(RTO, v[i]); end
        #1;
        if (k < 2) begin
          check(dr_is_spacer(RTZ, sz) && dr_is_spacer(RTO, so), "sum waits for all inputs");
          // a and b both in and equal: the carry is already known
          if (order[2] == 2 && k == 1 && v[0] == v[1]) begin
            check(cz == dr_encode(RTZ, v[0]) && co == dr_encode(RTO, v[0]), "early carry");
            early_carries++;
          end
        end
      end
      check(sz == dr_encode(RTZ, sum[0]) && cz == dr_encode(RTZ, sum[1]), "RTZ sum/carry");
      check(so == dr_encode(RTO, sum[0]) && co == dr_encode(RTO, sum[1]), "RTO sum/carry");
      check(hsz == dr_encode(RTZ, hsum[0]) && hcz == dr_encode(RTZ, hsum[1]), "RTZ half sum/carry");
      check(hso == dr_encode(RTO, hsum[0]) && hco == dr_encode(RTO, hsum[1]), "RTO half sum/carry");
      order.shuffle();
      for (int k = 0; k < 3; k++) begin
        automatic int i = order[k];
        in_z[i] = dr_spacer(RTZ); in_o[i] = dr_spacer(RTO);
        if (i < 2) begin hz[i] = dr_spacer(RTZ); ho[i] = dr_spacer(RTO); end
        #1;
        if (k < 2)
          check(sz == dr_encode(RTZ, sum[0]) && so == dr_encode(RTO, sum[0]),
                "sum holds until all inputs are spacer");
      end
      check(dr_is_spacer(RTZ, sz) && dr_is_spacer(RTZ, cz), "RTZ back to spacer");
      check(dr_is_spacer(RTO, so) && dr_is_spacer(RTO, co), "RTO back to spacer");
      check(dr_is_spacer(RTZ, hsz) && dr_is_spacer(RTZ, hcz), "RTZ half back to spacer");
      check(dr_is_spacer(RTO, hso) && dr_is_spacer(RTO, hco), "RTO half back to spacer");
    end
    check(early_carries > 0, "early carry seen");
    $display("early carries observed: %0d", early_carries);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
