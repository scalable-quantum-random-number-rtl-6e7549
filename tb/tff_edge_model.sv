// tff_edge_model: behavioural model of the analog edge between a T flip-flop
// output and the D input that samples it.
//
// Not synthesizable; testbench use only. A real output takes a rise time t_R
// and a fall time t_F to swing, and the D input switches when the voltage
// crosses a threshold eta (a fraction of the swing). Seen from the D input, a
// rising output therefore arrives eta * t_R late and a falling one
// (1 - eta) * t_F late. This model delays the two kinds of transition by
// RISE_SEEN_PS and FALL_SEEN_PS (transport delay). A sampler behind it sees
// the high state for FALL_SEEN_PS - RISE_SEEN_PS longer per toggle pair than
// the low state, which yields a bias of f_DET * (FALL_SEEN_PS - RISE_SEEN_PS) / 2.
// Both delays must be shorter than the shortest time between toggles.
//
// Ports:  q      - T flip-flop output
//         q_seen - the value the sampling D input sees
`timescale 1ps/1ps
module tff_edge_model #(
  parameter int unsigned RISE_SEEN_PS = 500,
  parameter int unsigned FALL_SEEN_PS = 2_500
) (
  input  logic q,
  output logic q_seen
);

  initial q_seen = 1'b0;

  always @(posedge q) q_seen <= #(RISE_SEEN_PS) 1'b1;
  always @(negedge q) q_seen <= #(FALL_SEEN_PS) 1'b0;

endmodule
