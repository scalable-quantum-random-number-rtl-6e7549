// trff_tff: T flip-flop clocked by single-photon detections.
//
// This is the randomly toggling half of a T-type random flip-flop. Its clock
// is the digital detection pulse of an LED-illuminated SPAD pixel, so the
// state changes at the random, Poisson-distributed arrival times of photon
// detections. With T high the state inverts on every rising edge of `det`;
// with T low it holds. The D flip-flop in trff_dff samples `q`.
//
// Interface:  det   - detection pulse, used as this flip-flop's clock
//             rst_n - asynchronous active-low reset, clears q
//             t     - toggle enable (tied to 1 in the paper's circuit)
//             q, q_n
// Timing:     q changes one clock-to-q delay after a rising edge of det. It is
//             asynchronous to the bit clock by design.
//
// The toggle behaviour and T input follow the paper's circuit. The reset is
// this design's own addition: the paper notes that the initial state does not
// matter, and the reset only makes simulation repeatable.
module trff_tff (
  input  logic det,
  input  logic rst_n,
  input  logic t,
  output logic q,
  output logic q_n
);

  always_ff @(posedge det or negedge rst_n) begin
    if (!rst_n) q <= 1'b0;
    else        q <= q ^ t;
  end

  assign q_n = ~q;

endmodule
