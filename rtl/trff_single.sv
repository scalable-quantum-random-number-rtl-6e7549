// trff_single: single-stage T-type random flip-flop (TRFF).
//
// A T flip-flop (trff_tff) toggles on every photon detection of one SPAD; a D
// flip-flop (trff_dff) samples it on every rising edge of the bit clock. The
// sampled value is a random bit: it equals the previous bit when an even
// number of detections fell into the clock period and its complement when the
// number was odd. With detections at mean rate f_DET and sampling at f_BIT the
// lag-1 autocorrelation of the bits is exp(-2 f_DET / f_BIT) for a detector
// without dead time.
//
// Interface:  clk      - bit clock
//             rst_n    - asynchronous active-low reset of both flip-flops
//             t        - toggle enable of the T flip-flop (1 in normal use)
//             det      - SPAD detection pulse (clock of the T flip-flop)
//             rnd_bit, rnd_bit_n - random bit and its complement
// Timing:     a fresh bit appears one clock-to-q delay after each rising clk
//             edge; it reflects all detections before that edge.
//
// The structure (two flip-flops, Q of the T flip-flop into D, Q and Q-bar of
// the D flip-flop as outputs) follows the paper's circuit exactly.
module trff_single (
  input  logic clk,
  input  logic rst_n,
  input  logic t,
  input  logic det,
  output logic rnd_bit,
  output logic rnd_bit_n
);

  logic tff_q;
  logic tff_q_n_unused;

  trff_tff u_tff (
    .det   (det),
    .rst_n (rst_n),
    .t     (t),
    .q     (tff_q),
    .q_n   (tff_q_n_unused)
  );

  trff_dff u_dff (
    .clk   (clk),
    .rst_n (rst_n),
    .d     (tff_q),
    .q     (rnd_bit),
    .q_n   (rnd_bit_n)
  );

endmodule
