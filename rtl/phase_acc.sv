// Phase accumulator of one tone (direct digital synthesis).
//
// Every clock the frequency word is added to the phase, modulo 2^PHASE_W.
// With the 250 MHz sample clock and the 17-bit width of the original design,
// a tone sits at freq_word * 250 MHz / 2^17, in steps of about 1.9 kHz. The
// phase feeds the CORDIC as its angle, one full turn being 2^PHASE_W.
// The frequency word may be changed at any time: the phase goes on from its
// present value, so a retuned tone has no phase jump and the other tones are
// untouched. Reset to phase 0 is this design's choice.
// Timing: phase is a register; a new freq_word is used from the next clock.
module phase_acc #(
  parameter int unsigned PHASE_W = kid_pkg::PHASE_W
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] freq_word,
  output logic [PHASE_W-1:0] phase
);

  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + freq_word;
  end

endmodule
