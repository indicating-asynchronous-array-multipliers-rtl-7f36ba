// tb_completion_detector: checks Ackout of the RTZ and RTO completion
// detectors (5 pairs, an odd width to exercise an unbalanced C-tree). Pairs
// turn to data one at a time in random order: Ackout must keep its spacer
// level until the last pair is data, then change; on the way back it must keep
// its data level until the last pair is spacer again.
`timescale 1ns/1ps
module tb_completion_detector;
  import dr_pkg::*;
  localparam int W = 5;
  int checks = 0, failures = 0;
  logic rst, ack_z, ack_o;
  dr_t [W-1:0] dz, do_;

  completion_detector #(.PROTOCOL(RTZ), .WIDTH(W)) dut_z (.rst(rst), .d(dz),  .ackout(ack_z));
  completion_detector #(.PROTOCOL(RTO), .WIDTH(W)) dut_o (.rst(rst), .d(do_), .ackout(ack_o));

  task automatic check(input logic got, input logic exp, input string what);
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
    int order [W];
    logic [W-1:0] v;
    rst = 1;
    for (int i = 0; i < W; i++) begin dz[i] = dr_spacer(RTZ); do_[i] = dr_spacer(RTO); end
    #1; rst = 0; #1;
    check(ack_z, 1'b0, "RTZ idle");
    check(ack_o, 1'b1, "RTO idle");
    for (int n = 0; n < 40; n++) begin
      v = W'($urandom);
      for (int i = 0; i < W; i++) order[i] = i;
      order.shuffle();
      for (int k = 0; k < W; k++) begin
        dz[order[k]]  = dr_encode(RTZ, v[order[k]]);
        do_[order[k]] = dr_encode(RTO, v[order[k]]);
        #1;
        check(ack_z, (k == W - 1) ? 1'b1 : 1'b0, "RTZ data arrival");
        check(ack_o, (k == W - 1) ? 1'b0 : 1'b1, "RTO data arrival");
      end
      order.shuffle();
      for (int k = 0; k < W; k++) begin
        dz[order[k]]  = dr_spacer(RTZ);
        do_[order[k]] = dr_spacer(RTO);
        #1;
        check(ack_z, (k == W - 1) ? 1'b0 : 1'b1, "RTZ spacer arrival");
        check(ack_o, (k == W - 1) ? 1'b1 : 1'b0, "RTO spacer arrival");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
