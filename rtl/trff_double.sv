// trff_double: improved multi-stage T-type random flip-flop.
//
// STAGES single-stage TRFFs (trff_single), each toggled by its own SPAD and
// all sampled by the same bit clock, are combined by an XOR into one bit.
// XORing independent bit streams shrinks both imperfections of a single
// stage: for two stages with bias b and lag-1 autocorrelation a1 the result
// has bias -2b^2 and autocorrelation a1^2 + 8 a1 b^2. Crosstalk that makes
// both SPADs fire together toggles both stages at once and leaves the XOR
// unchanged, so it adds no correlation.
//
// Interface:  clk   - bit clock, shared by all stages
//             rst_n - asynchronous active-low reset
//             t     - toggle enable, shared by all stages (1 in normal use)
//             det   - one SPAD detection pulse per stage
//             q     - random bit
// Timing:     the XOR is combinational after the sampling flip-flops, so the
//             clock-to-bit latency equals that of a single stage.
//
// Two stages with a shared T and clock and an XOR on the sampled outputs is
// the paper's improved circuit. Making the number of stages a parameter
// follows the paper's remark that more stages can be XORed; STAGES = 1
// reduces to the single-stage TRFF.
module trff_double #(
  parameter int unsigned STAGES = trff_pkg::TRFF_STAGES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              t,
  input  logic [STAGES-1:0] det,
  output logic              q
);

  logic [STAGES-1:0] stage_bit;
  logic [STAGES-1:0] stage_bit_n_unused;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    trff_single u_stage (
      .clk       (clk),
      .rst_n     (rst_n),
      .t         (t),
      .det       (det[s]),
      .rnd_bit   (stage_bit[s]),
      .rnd_bit_n (stage_bit_n_unused[s])
    );
  end

  assign q = ^stage_bit;

  initial begin
    assert (STAGES >= 1) else $error("trff_double: STAGES must be at least 1");
  end

endmodule
