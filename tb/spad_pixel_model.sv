// spad_pixel_model: behavioural model of one LED-illuminated SPAD pixel.
//
// Not synthesizable; testbench use only. It produces the digital detection
// pulses that clock a T flip-flop. Waiting times between detections are the
// dead time plus an exponentially distributed time with mean MEAN_WAIT_PS, so
// detections form a Poisson process with dead time. The detection rate is
// 1 / (DEAD_TIME_PS + MEAN_WAIT_PS). Every rising edge is placed on an odd
// picosecond, so with bit-clock edges on even picoseconds no detection ever
// coincides with a sampling edge in simulation (in hardware such a
// coincidence can make the sampling flip-flop metastable).
//
// Ports:  en  - pulses are produced only while en is high
//         det - detection pulse, PULSE_PS wide
`timescale 1ps/1ps
module spad_pixel_model #(
  parameter real         MEAN_WAIT_PS = 16_222.0,
  parameter int unsigned DEAD_TIME_PS = 6_000,
  parameter int unsigned PULSE_PS     = 2_000,
  parameter int unsigned SEED         = 1
) (
  input  logic en,
  output logic det
);

  int unsigned seed_state;
  longint next_edge;
  longint last_edge;

  // Exponential waiting time from a uniform number in (0, 1].
  function automatic real exp_wait(real mean);
    real u;
    u = (real'($urandom()) + 1.0) / 4294967296.0;
    return -mean * $ln(u);
  endfunction

  initial begin
    det = 1'b0;
    seed_state = $urandom(SEED);
    last_edge = -longint'(DEAD_TIME_PS);
    forever begin
      wait (en);
      // waiting time is measured from the previous detection's rising edge
      next_edge = last_edge + longint'(DEAD_TIME_PS) + longint'(exp_wait(MEAN_WAIT_PS));
      if (next_edge <= longint'($time)) next_edge = longint'($time) + 1;
      next_edge = next_edge | 64'd1;
      #(next_edge - longint'($time));
      if (en) begin
        last_edge = longint'($time);
        det = 1'b1;
        #(PULSE_PS);
        det = 1'b0;
      end
    end
  end

endmodule
