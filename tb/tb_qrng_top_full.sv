// tb_qrng_top_full: end-to-end test of the QRNG with every parameter at its default.
//
// The default generator, one two-stage cell fed by two SPAD pixel models
// (6 ns dead time, 45 Mcps each), is sampled by a 20 MHz bit clock. A reference model counts
// the detections on every line and predicts each word bit as the XOR of the
// detection parities of its cell's stages; every word is compared with it
// 1 ns after its sampling edge, which checks both the rate (one new word per
// clock edge, 20 Mbit/s per cell at 20 MHz) and the latency (the word is
// out within 1 ns of its edge, with no added cycle for the second stage).
// The test also drives, and counts, each mechanism of the design:
//   - strobe rising after reset, then one new word per clock edge
//   - bits repeating (even detection count) and flipping (odd count)
//   - crosstalk: all SPADs of a cell firing together must not change its bit
//   - T low: toggling stops and the word holds
//   - reset during operation
// and measures bias and lag-1 autocorrelation of the word bits, which at
// this operating point must be consistent with zero.
`timescale 1ps/1ps
module tb_qrng_top_full;

  localparam int W         = trff_pkg::QRNG_WORD_BITS;
  import trff_tb_pkg::*;

  localparam int S         = trff_pkg::TRFF_STAGES;
  localparam int PERIOD_PS = 1_000_000_000 / (F_BIT_HZ / 1000);  // 50 ns
  localparam real MEAN_WAIT_PS = 1.0e12 / real'(F_DET_CPS) - real'(DEAD_TIME_PS);
  localparam int NWORDS    = 1_000_000;

  logic clk = 0, rst_n, t;
  logic [W-1:0][S-1:0] det, det_p, det_dir = '0;
  logic [W-1:0] rnd_word;
  logic strobe;
  logic en_poisson = 0;
  wire  [W-1:0][S-1:0] par;   // reference detection parities

  assign det = det_p | det_dir;

  always #(PERIOD_PS/2) clk = ~clk;

  qrng_top dut (.clk(clk), .rst_n(rst_n), .t(t), .det(det),
                                 .rnd_word(rnd_word), .strobe(strobe));

  for (genvar w = 0; w < W; w++) begin : g_w
    for (genvar s = 0; s < S; s++) begin : g_s
      spad_pixel_model #(.MEAN_WAIT_PS(MEAN_WAIT_PS), .DEAD_TIME_PS(DEAD_TIME_PS),
                         .PULSE_PS(2_000), .SEED(101 + 7 * (w * S + s)))
        u_spad (.en(en_poisson), .det(det_p[w][s]));
      // reference model: parity of detections seen while T was high
      logic p;
      always @(posedge det[w][s] or negedge rst_n)
        if (!rst_n) p <= 1'b0;
        else        p <= p ^ t;
      assign par[w][s] = p;
    end
  end

  logic [W-1:0] expected, prev_word;
  int checks = 0, failures = 0;
  int n_words = 0, n_repeat = 0, n_flip = 0, n_crosstalk = 0, n_hold = 0, n_reset = 0, n_strobe = 0;
  longint n_det = 0;
  real sum_x [W], sum_xx1 [W];
  bit collect = 0, compare = 0;

  longint n_cycles_poisson = 0;
  always @(posedge det[0][0]) n_det++;
  always @(posedge clk) if (en_poisson) n_cycles_poisson++;

  // Predicted word at each sampling edge; compared 1 ns after the edge.
  always @(posedge clk) begin
    for (int w = 0; w < W; w++) expected[w] = ^par[w];
    if (compare) begin
      #1000;
      checks++;
      if (rnd_word !== expected || strobe !== 1'b1) begin
        failures++;
        $display("FAIL word %0d: got %h expected %h strobe %0b", n_words, rnd_word, expected, strobe);
      end
      n_words++;
      for (int w = 0; w < W; w++) begin
        if (rnd_word[w] == prev_word[w]) n_repeat++; else n_flip++;
        if (collect) begin
          sum_x[w] += real'(rnd_word[w]);
          sum_xx1[w] += (real'(rnd_word[w]) - 0.5) * (real'(prev_word[w]) - 0.5);
        end
      end
      prev_word = rnd_word;
    end
  end

  initial begin
    #(2 * (longint'(NWORDS) + 2_000) * longint'(PERIOD_PS));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic count_mechanism(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", name); end
    else $display("mechanism %-12s seen %0d times", name, n);
  endtask

  initial begin
    logic [W-1:0] held;
    real a1, b, sigma;
    for (int w = 0; w < W; w++) begin sum_x[w] = 0; sum_xx1[w] = 0; end
    rst_n = 1; #1000 rst_n = 0; t = 1;
    #(2 * PERIOD_PS + 1001);
    checks++; if (strobe !== 1'b0 || rnd_word !== '0) begin failures++; $display("FAIL reset state"); end
    @(negedge clk); rst_n = 1;
    @(posedge clk); #1000;
    checks++; if (strobe !== 1'b1) begin failures++; $display("FAIL strobe did not rise"); end
    else n_strobe++;
    prev_word = rnd_word;

    // Crosstalk: all SPADs of every cell fire together; no bit may change.
    @(negedge clk); compare = 1;
    repeat (50) begin
      held = rnd_word;
      #2001 det_dir = '1; #1000 det_dir = '0;
      @(posedge clk); #1001;
      checks++;
      if (rnd_word !== held) begin failures++; $display("FAIL crosstalk changed the word"); end
      n_crosstalk++;
      // one stage of cell 0 alone: its bit must flip
      @(negedge clk); held = rnd_word;
      #2001 det_dir[0][0] = 1'b1; #1000 det_dir = '0;
      @(posedge clk); #1001;
      checks++;
      if (rnd_word[0] === held[0]) begin failures++; $display("FAIL single detection did not flip bit 0"); end
      @(negedge clk);
    end

    // Poisson detections at the paper's operating point.
    en_poisson = 1;
    repeat (200) @(posedge clk);
    collect = 1;
    repeat (NWORDS) @(posedge clk);
    collect = 0;

    // T low: toggling stops, the word holds.
    @(negedge clk); t = 0;
    @(posedge clk); #1001; held = rnd_word;
    repeat (40) begin
      @(posedge clk); #1001;
      checks++;
      if (rnd_word !== held) begin failures++; $display("FAIL word changed with T low"); end
      n_hold++;
    end
    @(negedge clk); t = 1;

    // Reset during operation.
    repeat (20) @(posedge clk);
    @(negedge clk); compare = 0; rst_n = 0; #1000;
    checks++; if (strobe !== 1'b0 || rnd_word !== '0) begin failures++; $display("FAIL reset during operation"); end
    n_reset++;
    @(negedge clk); rst_n = 1; compare = 1;
    repeat (200) @(posedge clk);
    en_poisson = 0; compare = 0;
    #(PERIOD_PS);

    for (int w = 0; w < W; w++) begin
      b = sum_x[w] / NWORDS - 0.5;
      a1 = 4.0 * sum_xx1[w] / NWORDS;
      sigma = 1.0 / $sqrt(real'(NWORDS));
      $display("bit %0d: bias=%0.5f a1=%0.5f (sigma %0.4f)", w, b, a1, sigma);
      checks++;
      if (b > 4.0 * sigma || -b > 4.0 * sigma || a1 > 4.0 * sigma || -a1 > 4.0 * sigma) begin
        failures++; $display("FAIL bit %0d not consistent with an unbiased, uncorrelated stream", w);
      end
    end
    $display("words %0d, detections on line [0][0] %0d, measured f_DET/f_BIT = %0.3f",
             n_words, n_det, real'(n_det) / real'(n_cycles_poisson));
    count_mechanism("strobe", n_strobe);
    count_mechanism("repeat", n_repeat);
    count_mechanism("flip", n_flip);
    count_mechanism("crosstalk", n_crosstalk);
    count_mechanism("T-low hold", n_hold);
    count_mechanism("reset", n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
