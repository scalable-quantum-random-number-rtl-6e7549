// tb_autocorr_sweep: statistical workload test of single- and double-stage TRFFs.
//
// Part A, the detector without dead time: a single-stage TRFF and a
// two-stage TRFF are driven by independent Poisson detection sources with a
// mean waiting time of 400 ns. The bit clock period is set to lambda * 400 ns
// for lambda = f_DET / f_BIT in {0.1, 0.25, 0.5, 1.0, 1.5}. For every lambda
// the lag-1 serial autocorrelation of the single stage must match
// exp(-2 lambda), and that of the two-stage XOR must match its square,
// exp(-4 lambda), each within four standard errors (1/sqrt(N)).
// Part B, the operating points of the bit-rate study: both cells are driven by
// detector models with 6 ns dead time at 45 Mcps, and sampled at 10, 15, 20 and
// 25 MHz. a1..a4 and the bias are printed; at 10-20 MHz the two-stage cell's
// |a1| and both cells' bias must be below four standard errors. Bias from
// unequal rise and fall times is an analog effect that a logic simulation
// does not contain, so simulated bias is statistical only.
`timescale 1ps/1ps
module tb_autocorr_sweep;

  import trff_tb_pkg::*;

  localparam int  NBITS = 200_000;
  localparam real TDET_A_PS = 400_000.0;
  localparam real MEAN_B_PS = 1.0e12 / real'(F_DET_CPS) - real'(DEAD_TIME_PS);

  logic clk = 0, rst_n, t = 1;
  logic en_a = 0, en_b = 0;
  logic [2:0] det_a, det_b, det;
  logic single_bit, single_bit_n, double_bit;
  int half_ps = 25_000;
  int checks = 0, failures = 0;

  assign det = det_a | det_b;

  always #(half_ps) clk = ~clk;

  trff_single u_single (.clk(clk), .rst_n(rst_n), .t(t), .det(det[0]),
                        .rnd_bit(single_bit), .rnd_bit_n(single_bit_n));
  trff_double u_double (.clk(clk), .rst_n(rst_n), .t(t), .det(det[2:1]), .q(double_bit));

  for (genvar i = 0; i < 3; i++) begin : g_src
    spad_pixel_model #(.MEAN_WAIT_PS(TDET_A_PS), .DEAD_TIME_PS(0), .PULSE_PS(10),
                       .SEED(300 + i)) u_a (.en(en_a), .det(det_a[i]));
    spad_pixel_model #(.MEAN_WAIT_PS(MEAN_B_PS), .DEAD_TIME_PS(DEAD_TIME_PS), .PULSE_PS(2_000),
                       .SEED(400 + i)) u_b (.en(en_b), .det(det_b[i]));
  end

  initial begin
    #1_000_000_000_000;  // 1 s
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit s_bits[], d_bits[];

  task automatic collect();
    s_bits = new[NBITS];
    d_bits = new[NBITS];
    repeat (20) @(posedge clk);
    for (int i = 0; i < NBITS; i++) begin
      @(negedge clk);
      s_bits[i] = single_bit;
      d_bits[i] = double_bit;
    end
  endtask

  task automatic expect_close(string what, real got, real want, real tol);
    checks++;
    if (got - want > tol || want - got > tol) begin
      failures++;
      $display("FAIL %s: %0.5f, expected %0.5f +- %0.5f", what, got, want, tol);
    end
  endtask

  real lambdas [5] = '{0.1, 0.25, 0.5, 1.0, 1.5};
  int  fbit_mhz [4] = '{10, 15, 20, 25};

  initial begin
    real sigma, a1s, a1d;
    sigma = 1.0 / $sqrt(real'(NBITS));
    rst_n = 1; #1000 rst_n = 0; #1000 rst_n = 1;

    $display("Part A: no dead time, N=%0d bits per point, sigma=%0.4f", NBITS, sigma);
    $display("  lambda   a1 single  exp(-2L)   a1 double  exp(-4L)");
    en_a = 1;
    foreach (lambdas[j]) begin
      half_ps = 2 * int'(lambdas[j] * TDET_A_PS / 4.0);   // even, so edges fall on even ps
      collect();
      a1s = autocorr(s_bits, 1);
      a1d = autocorr(d_bits, 1);
      $display("  %5.2f   %8.5f   %8.5f   %8.5f   %8.5f", lambdas[j], a1s, $exp(-2.0 * lambdas[j]),
               a1d, $exp(-4.0 * lambdas[j]));
      expect_close("single-stage a1", a1s, $exp(-2.0 * lambdas[j]), 4.0 * sigma);
      expect_close("double-stage a1", a1d, $exp(-4.0 * lambdas[j]), 4.0 * sigma);
    end
    en_a = 0;

    $display("Part B: 45 Mcps, 6 ns dead time");
    $display("  f_BIT   cell       bias        a1        a2        a3        a4");
    en_b = 1;
    foreach (fbit_mhz[j]) begin
      half_ps = 2 * ((1_000_000 / fbit_mhz[j]) / 4);
      collect();
      $display("  %2d MHz  single  %8.5f  %8.5f  %8.5f  %8.5f  %8.5f", fbit_mhz[j], bias(s_bits),
               autocorr(s_bits, 1), autocorr(s_bits, 2), autocorr(s_bits, 3), autocorr(s_bits, 4));
      $display("  %2d MHz  double  %8.5f  %8.5f  %8.5f  %8.5f  %8.5f", fbit_mhz[j], bias(d_bits),
               autocorr(d_bits, 1), autocorr(d_bits, 2), autocorr(d_bits, 3), autocorr(d_bits, 4));
      if (fbit_mhz[j] <= 20) begin
        expect_close("double-stage a1", autocorr(d_bits, 1), 0.0, 4.0 * sigma);
        expect_close("single-stage bias", bias(s_bits), 0.0, 4.0 * 0.5 * sigma);
        expect_close("double-stage bias", bias(d_bits), 0.0, 4.0 * 0.5 * sigma);
      end
    end
    en_b = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
