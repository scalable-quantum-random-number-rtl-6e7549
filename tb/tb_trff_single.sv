// tb_trff_single: self-checking test of the single-stage random flip-flop.
//
// Part 1 (directed): in each 50 ns bit period a random number (0..3) of
// detection pulses is applied away from the clock edge. After the edge the
// bit must equal the previous bit when that number was even and its
// complement when it was odd, i.e. the parity of all detections so far. Both
// outcomes (repeat, flip) are counted and must occur.
// Part 2 (statistics): a Poisson detection source without dead time at mean
// rate f_DET = lambda * f_BIT drives the cell; the measured lag-1
// autocorrelation must match exp(-2 lambda) within four standard errors, and
// the bias must be consistent with zero.
`timescale 1ps/1ps
module tb_trff_single;

  localparam int PERIOD_PS = 50_000;       // f_BIT = 20 MHz
  localparam int NSTAT     = 20_000;       // bits in the statistical part
  localparam real LAMBDA   = 0.5;          // f_DET / f_BIT

  logic clk = 0, rst_n, t;
  logic det_dir = 0, det_poisson, det, en_poisson = 0;
  logic rnd_bit, rnd_bit_n;
  int checks = 0, failures = 0;
  int n_repeat = 0, n_flip = 0;
  logic expected;

  assign det = det_dir | det_poisson;

  trff_single dut (.clk(clk), .rst_n(rst_n), .t(t), .det(det),
                   .rnd_bit(rnd_bit), .rnd_bit_n(rnd_bit_n));

  spad_pixel_model #(.MEAN_WAIT_PS(real'(PERIOD_PS) / LAMBDA), .DEAD_TIME_PS(0),
                     .PULSE_PS(10), .SEED(7))
    u_spad (.en(en_poisson), .det(det_poisson));

  always #(PERIOD_PS/2) clk = ~clk;

  initial begin
    #2_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // statistics of the sampled bits
  real sum_x, sum_xx1;
  int  n_bits;
  logic prev_bit;
  bit  collect = 0;

  initial begin
    int k;
    real mean, a1, b, sigma;
    rst_n = 1; #1000 rst_n = 0; t = 1; expected = 0;
    #(PERIOD_PS + 1001);
    checks++; if (rnd_bit !== 1'b0 || rnd_bit_n !== 1'b1) begin failures++; $display("FAIL reset"); end
    @(negedge clk); rst_n = 1;
    // Part 1: directed detection counts
    for (int i = 0; i < 400; i++) begin
      k = $urandom_range(0, 3);
      repeat (k) begin
        #2001 det_dir = 1; #1000 det_dir = 0;
      end
      @(posedge clk);
      if (k % 2 == 0) n_repeat++; else n_flip++;
      if (k % 2 == 1) expected = ~expected;
      #1001;
      checks++;
      if (rnd_bit !== expected || rnd_bit_n !== ~expected) begin
        failures++;
        $display("FAIL directed cycle %0d: k=%0d bit=%0b expected %0b", i, k, rnd_bit, expected);
      end
      @(negedge clk);
    end
    checks++; if (n_repeat == 0) begin failures++; $display("FAIL no repeated bit"); end
    checks++; if (n_flip == 0)   begin failures++; $display("FAIL no flipped bit"); end

    // Part 2: Poisson source, compare lag-1 autocorrelation with exp(-2 lambda)
    en_poisson = 1;
    repeat (10) @(posedge clk);
    sum_x = 0; sum_xx1 = 0; n_bits = 0;
    @(negedge clk); prev_bit = rnd_bit; collect = 1;
    repeat (NSTAT) begin
      @(negedge clk);
      n_bits++;
      sum_x += real'(rnd_bit);
      sum_xx1 += (real'(rnd_bit) - 0.5) * (real'(prev_bit) - 0.5);
      prev_bit = rnd_bit;
    end
    mean = sum_x / n_bits;
    b = mean - 0.5;
    // for a balanced stream, a1 = 4 * E[(x_i - 1/2)(x_{i+1} - 1/2)]
    a1 = 4.0 * sum_xx1 / n_bits;
    sigma = 1.0 / $sqrt(real'(n_bits));
    $display("single stage, lambda=%0.2f: bias=%0.4f a1=%0.4f theory a1=%0.4f (sigma %0.4f)",
             LAMBDA, b, a1, $exp(-2.0 * LAMBDA), sigma);
    checks++;
    if ((a1 - $exp(-2.0 * LAMBDA)) > 4.0 * sigma || ($exp(-2.0 * LAMBDA) - a1) > 4.0 * sigma) begin
      failures++; $display("FAIL autocorrelation off the exp(-2 lambda) law");
    end
    checks++;
    // bias standard error grows with autocorrelation: sigma_b ~ 0.5/sqrt(N) * sqrt((1+a1)/(1-a1))
    if (b > 4.0 * 0.5 * sigma * $sqrt(3.0) || -b > 4.0 * 0.5 * sigma * $sqrt(3.0)) begin
      failures++; $display("FAIL bias not consistent with zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
