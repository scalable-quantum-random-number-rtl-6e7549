// tb_bias_model: bias of the random flip-flop under unequal output edges.
//
// The bias of a sampled toggle flip-flop comes from analog edges, which the
// RTL cannot contain. This test inserts a behavioural edge model
// (tff_edge_model) between the T flip-flop (trff_tff) and the sampling D
// flip-flop (trff_dff) of two stages. The model delays rising transitions by
// 0.5 ns and falling ones by 2.5 ns, which gives alpha = (2.5 - 0.5) / 2 ns
// = 1 ns. That is about 150 times the value measured on a real FPGA, so that
// the bias can be resolved in 10^6 bits. The expected bias is
// b = alpha * f_DET. Detectors have a 6 ns dead time.
//   1. At a 20 MHz bit clock and 15, 30 and 45 Mcps, the single-stage bias
//      must equal alpha * f_DET within five standard errors.
//   2. At 45 Mcps and a 10 MHz bit clock the bias must be the same: it does
//      not depend on the bit rate.
//   3. The XOR of the two stages at 20 MHz and 45 Mcps must have bias
//      -2 b^2 within five standard errors.
`timescale 1ps/1ps
module tb_bias_model;

  import trff_tb_pkg::*;

  localparam int  NBITS    = 1_000_000;
  localparam int  RISE_PS  = 500;
  localparam int  FALL_PS  = 2_500;
  localparam real ALPHA_S  = real'(FALL_PS - RISE_PS) / 2.0 * 1.0e-12;
  localparam int  NRATES   = 3;
  localparam int  RATES_MCPS [NRATES] = '{15, 30, 45};

  logic clk = 0, rst_n, t = 1;
  int half_ps = 25_000;
  logic [NRATES-1:0] en = '0;
  logic [NRATES-1:0][1:0] det_src;
  logic [1:0] det, tq, tq_n_unused, seen, bit_q, bit_q_n_unused;
  int checks = 0, failures = 0;

  always #(half_ps) clk = ~clk;

  for (genvar r = 0; r < NRATES; r++) begin : g_rate
    for (genvar s = 0; s < 2; s++) begin : g_s
      spad_pixel_model #(.MEAN_WAIT_PS(1.0e6 / real'(RATES_MCPS[r]) - real'(DEAD_TIME_PS)),
                         .DEAD_TIME_PS(DEAD_TIME_PS), .PULSE_PS(2_000),
                         .SEED(500 + 10 * r + s))
        u_spad (.en(en[r]), .det(det_src[r][s]));
    end
  end

  for (genvar s = 0; s < 2; s++) begin : g_stage
    always_comb begin
      det[s] = 1'b0;
      for (int r = 0; r < NRATES; r++) det[s] = det[s] | det_src[r][s];
    end
    trff_tff u_tff (.det(det[s]), .rst_n(rst_n), .t(t), .q(tq[s]), .q_n(tq_n_unused[s]));
    tff_edge_model #(.RISE_SEEN_PS(RISE_PS), .FALL_SEEN_PS(FALL_PS))
      u_edge (.q(tq[s]), .q_seen(seen[s]));
    trff_dff u_dff (.clk(clk), .rst_n(rst_n), .d(seen[s]), .q(bit_q[s]), .q_n(bit_q_n_unused[s]));
  end

  initial begin
    #1_000_000_000_000;  // 1 s
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit s_bits[], x_bits[];

  task automatic collect();
    s_bits = new[NBITS];
    x_bits = new[NBITS];
    repeat (20) @(posedge clk);
    for (int i = 0; i < NBITS; i++) begin
      @(negedge clk);
      s_bits[i] = bit_q[0];
      x_bits[i] = bit_q[0] ^ bit_q[1];
    end
  endtask

  task automatic expect_close(string what, real got, real want, real tol);
    checks++;
    $display("  %-34s %9.5f  expected %9.5f +- %7.5f", what, got, want, tol);
    if (got - want > tol || want - got > tol) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    real sigma, b1, want;
    sigma = 0.5 / $sqrt(real'(NBITS));
    rst_n = 1; #1000 rst_n = 0; #1000 rst_n = 1;
    $display("alpha = %0.1f ps, N = %0d bits per point, sigma_b = %0.5f", ALPHA_S * 1.0e12, NBITS, sigma);
    for (int r = 0; r < NRATES; r++) begin
      en = '0; en[r] = 1'b1;
      half_ps = 25_000;
      collect();
      want = ALPHA_S * real'(RATES_MCPS[r]) * 1.0e6;
      expect_close($sformatf("bias, 20 MHz, %0d Mcps", RATES_MCPS[r]), bias(s_bits), want, 5.0 * sigma);
      if (RATES_MCPS[r] == 45) begin
        b1 = bias(s_bits);
        expect_close("XOR bias, 20 MHz, 45 Mcps", bias(x_bits), -2.0 * b1 * b1, 5.0 * sigma);
        half_ps = 50_000;
        collect();
        expect_close("bias, 10 MHz, 45 Mcps", bias(s_bits), want, 5.0 * sigma);
      end
    end
    en = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
