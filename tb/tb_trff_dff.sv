// tb_trff_dff: self-checking test of the sampling D flip-flop.
//
// Changes d at random points inside each clock period and checks that q holds
// the value d had at the preceding rising clock edge, that q_n is its
// complement and that the reset clears q.
`timescale 1ps/1ps
module tb_trff_dff;

  localparam int PERIOD_PS = 50_000;  // 20 MHz bit clock

  logic clk = 0, rst_n, d, q, q_n;
  int checks = 0, failures = 0;
  logic expected;

  trff_dff dut (.clk(clk), .rst_n(rst_n), .d(d), .q(q), .q_n(q_n));

  always #(PERIOD_PS/2) clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1; #1000 rst_n = 0; d = 1; expected = 0;
    #(PERIOD_PS + 1001);
    checks++; if (q !== 1'b0) begin failures++; $display("FAIL reset"); end
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      // d toggles a few times between edges; only its value at the edge counts
      repeat ($urandom_range(0, 3)) begin
        #($urandom_range(1000, 5000)) d = 1'($urandom_range(0, 1));
      end
      @(posedge clk); expected = d;
      #1001;
      checks++;
      if (q !== expected || q_n !== ~expected) begin
        failures++;
        $display("FAIL cycle %0d: q=%0b q_n=%0b expected %0b", i, q, q_n, expected);
      end
      d = 1'($urandom_range(0, 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
