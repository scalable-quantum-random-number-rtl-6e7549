// tb_trff_double: self-checking test of the multi-stage (XOR) random flip-flop.
//
// Part 1 (directed): two cells, one with the default two stages and one with
// three, receive a random number of detections per stage in every 50 ns bit
// period, sometimes on all stages at the same instant (crosstalk). After each
// clock edge each output must equal the XOR of the detection-count parities of
// its stages. Simultaneous toggles of all stages of the two-stage cell must
// leave its output unchanged; the number of such crosstalk periods is counted
// and must be non-zero.
// Part 2 (statistics): two independent Poisson sources without dead time at
// lambda = f_DET/f_BIT drive the two-stage cell; its lag-1 autocorrelation
// must match the square of a single stage's, exp(-4 lambda), within four
// standard errors.
`timescale 1ps/1ps
module tb_trff_double;

  localparam int PERIOD_PS = 50_000;
  localparam int NSTAT     = 20_000;
  localparam real LAMBDA   = 0.5;

  logic clk = 0, rst_n, t;
  logic [1:0] det_dir2 = '0, det_p, det2;
  logic [2:0] det_dir3 = '0;
  logic en_poisson = 0;
  logic q2, q3;
  int checks = 0, failures = 0, n_crosstalk = 0;
  logic [1:0] par2;
  logic [2:0] par3;

  assign det2 = det_dir2 | det_p;

  trff_double dut2 (.clk(clk), .rst_n(rst_n), .t(t), .det(det2), .q(q2));
  trff_double #(.STAGES(3)) dut3 (.clk(clk), .rst_n(rst_n), .t(t), .det(det_dir3), .q(q3));

  spad_pixel_model #(.MEAN_WAIT_PS(real'(PERIOD_PS) / LAMBDA), .DEAD_TIME_PS(0),
                     .PULSE_PS(10), .SEED(11)) u_spad0 (.en(en_poisson), .det(det_p[0]));
  spad_pixel_model #(.MEAN_WAIT_PS(real'(PERIOD_PS) / LAMBDA), .DEAD_TIME_PS(0),
                     .PULSE_PS(10), .SEED(23)) u_spad1 (.en(en_poisson), .det(det_p[1]));

  always #(PERIOD_PS/2) clk = ~clk;

  initial begin
    #2_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real sum_x, sum_xx1, a1, b, sigma, theory;
  logic prev_bit, q2_before;

  initial begin
    rst_n = 1; #1000 rst_n = 0; t = 1; par2 = '0; par3 = '0;
    #(PERIOD_PS + 1001);
    checks++; if (q2 !== 1'b0 || q3 !== 1'b0) begin failures++; $display("FAIL reset"); end
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      bit xtalk;
      xtalk = ($urandom_range(0, 3) == 0);
      q2_before = q2;
      if (xtalk) begin
        // crosstalk: every SPAD fires at the same instant
        #2001 det_dir2 = '1; det_dir3 = '1; #1000 det_dir2 = '0; det_dir3 = '0;
        par2 = ~par2; par3 = ~par3;
        n_crosstalk++;
      end else begin
        for (int s = 0; s < 3; s++) begin
          repeat ($urandom_range(0, 3)) begin
            #2001;
            if (s < 2) det_dir2[s] = 1'b1;
            det_dir3[s] = 1'b1;
            #1000 det_dir2 = '0; det_dir3 = '0;
            if (s < 2) par2[s] = ~par2[s];
            par3[s] = ~par3[s];
          end
        end
      end
      @(posedge clk); #1001;
      checks++;
      if (q2 !== ^par2) begin failures++; $display("FAIL 2-stage cycle %0d: q=%0b expected %0b", i, q2, ^par2); end
      checks++;
      if (q3 !== ^par3) begin failures++; $display("FAIL 3-stage cycle %0d: q=%0b expected %0b", i, q3, ^par3); end
      if (xtalk) begin
        checks++;
        if (q2 !== q2_before) begin failures++; $display("FAIL crosstalk changed the 2-stage output"); end
      end
      @(negedge clk);
    end
    checks++; if (n_crosstalk == 0) begin failures++; $display("FAIL no crosstalk period"); end

    en_poisson = 1;
    repeat (10) @(posedge clk);
    sum_x = 0; sum_xx1 = 0;
    @(negedge clk); prev_bit = q2;
    repeat (NSTAT) begin
      @(negedge clk);
      sum_x += real'(q2);
      sum_xx1 += (real'(q2) - 0.5) * (real'(prev_bit) - 0.5);
      prev_bit = q2;
    end
    b = sum_x / NSTAT - 0.5;
    a1 = 4.0 * sum_xx1 / NSTAT;
    sigma = 1.0 / $sqrt(real'(NSTAT));
    theory = $exp(-4.0 * LAMBDA);
    $display("two stages, lambda=%0.2f: bias=%0.4f a1=%0.4f theory a1=%0.4f (sigma %0.4f)",
             LAMBDA, b, a1, theory, sigma);
    checks++;
    if (a1 - theory > 4.0 * sigma || theory - a1 > 4.0 * sigma) begin
      failures++; $display("FAIL autocorrelation is not the square of the single-stage value");
    end
    checks++;
    if (b > 4.0 * sigma || -b > 4.0 * sigma) begin
      failures++; $display("FAIL bias not consistent with zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
