// trff_pkg: constants shared by the random flip-flop (TRFF) generator.
//
// The generator samples T flip-flops that toggle on single-photon detections.
// One "stage" is one SPAD-driven T flip-flop plus the D flip-flop that samples
// it; a cell XORs STAGES such stages into one random bit, and the top places
// WORD_BITS cells on one bit clock to deliver a WORD_BITS-wide word per clock.
//
// Values that follow the paper: two stages per cell (the "double-stage TRFF"),
// and a single cell as the generator that was built and tested. The bit-clock
// rate and the detector's rate and dead time are not properties of this logic;
// the testbenches take them from trff_tb_pkg.
package trff_pkg;

  // Stages XORed into one random bit (the paper's improved, double-stage TRFF).
  localparam int unsigned TRFF_STAGES = 2;

  // Random bits produced per bit-clock edge (the tested generator has one cell).
  localparam int unsigned QRNG_WORD_BITS = 1;

endpackage
