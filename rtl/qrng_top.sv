// qrng_top: clocked quantum random number generator built from random flip-flops.
//
// WORD_BITS multi-stage TRFF cells (trff_double) share one bit clock and one
// toggle enable, so every rising clock edge delivers a fresh WORD_BITS-wide
// random word with no buffering. Each cell is driven by its own STAGES SPAD
// detection lines. Raising the word width or the clock rate scales the bit
// rate; at the paper's 20 MHz bit clock one cell gives 20 Mbit/s.
//
// Interface:  clk      - bit clock (f_BIT)
//             rst_n    - asynchronous active-low reset
//             t        - toggle enable of all T flip-flops (1 in normal use)
//             det      - detection pulses, det[w][s] drives stage s of cell w;
//                        these come from the SPAD pixels off this logic
//             rnd_word - random word, bit w from cell w
//             strobe   - high from the first sampling edge after reset on;
//                        while it is high each rising clk edge presents a new word
// Timing:     rnd_word changes one clock-to-q delay after each rising clk
//             edge and holds for the rest of the period.
//
// The paper shares one clock among N random flip-flops to form an N-bit word
// and routes the clock itself out as the strobe. Here the strobe is a
// registered qualifier instead of the forwarded clock: this keeps the clock
// off the data path, which is this design's own choice. The default of one
// cell with two stages is the generator the paper built and tested.
module qrng_top #(
  parameter int unsigned WORD_BITS = trff_pkg::QRNG_WORD_BITS,
  parameter int unsigned STAGES    = trff_pkg::TRFF_STAGES
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             t,
  input  logic [WORD_BITS-1:0][STAGES-1:0] det,
  output logic [WORD_BITS-1:0]             rnd_word,
  output logic                             strobe
);

  for (genvar w = 0; w < WORD_BITS; w++) begin : g_cell
    trff_double #(.STAGES(STAGES)) u_cell (
      .clk   (clk),
      .rst_n (rst_n),
      .t     (t),
      .det   (det[w]),
      .q     (rnd_word[w])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) strobe <= 1'b0;
    else        strobe <= 1'b1;
  end

endmodule
