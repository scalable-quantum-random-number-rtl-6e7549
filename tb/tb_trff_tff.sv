// tb_trff_tff: self-checking test of the detection-clocked T flip-flop.
//
// Drives bursts of detection pulses with T high and T low and checks after
// each pulse that q equals the parity of the pulses seen with T high, and that
// q_n is its complement. Also checks the asynchronous reset.
`timescale 1ps/1ps
module tb_trff_tff;

  logic det, rst_n, t, q, q_n;
  int checks = 0, failures = 0;
  logic expected;

  trff_tff dut (.det(det), .rst_n(rst_n), .t(t), .q(q), .q_n(q_n));

  task automatic check(string what);
    checks++;
    if (q !== expected || q_n !== ~expected) begin
      failures++;
      $display("FAIL %s: q=%0b q_n=%0b expected %0b", what, q, q_n, expected);
    end
  endtask

  task automatic pulse();
    det = 1'b1; #1000;
    det = 1'b0; #1000;
    if (t) expected = ~expected;
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    det = 0; t = 1; rst_n = 1; #1000 rst_n = 0; expected = 0;
    #2000; check("reset");
    rst_n = 1; #1000;
    for (int i = 0; i < 200; i++) begin
      t = ($urandom_range(0, 3) != 0);
      pulse();
      check("after pulse");
    end
    // reset in the middle of operation
    t = 1; pulse(); pulse(); pulse();
    rst_n = 0; expected = 0; #500; check("async reset");
    rst_n = 1; #500;
    pulse(); check("toggle after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
