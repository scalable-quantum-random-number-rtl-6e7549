// trff_dff: D flip-flop that samples the toggling T flip-flop once per bit clock.
//
// On each rising edge of the bit clock `clk` (frequency f_BIT) it stores `d`,
// the state of a detection-clocked T flip-flop. The stored value is the random
// bit; it stays valid for one full clock period.
//
// Interface:  clk   - bit clock
//             rst_n - asynchronous active-low reset, clears q
//             d     - state of the T flip-flop (asynchronous to clk)
//             q, q_n - random bit and its complement
// Timing:     one clock edge from sample to output, no further latency.
//
// The paper's circuit is a plain D flip-flop with no synchroniser, to keep a
// direct path from the physical process to the output bit; this design keeps
// that. `d` changes asynchronously to `clk`, so the flip-flop can go
// metastable on an edge that coincides with a toggle; resolving this is left
// to the flip-flop, as in the paper. The reset is this design's own addition.
module trff_dff (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q,
  output logic q_n
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= 1'b0;
    else        q <= d;
  end

  assign q_n = ~q;

endmodule
