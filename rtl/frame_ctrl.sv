// Accumulation frame timer.
//
// Counts samples while `run` is high and marks the last sample of every
// frame of 2^LOG2_N samples with a one-clock frame_end strobe; frame_no
// counts the completed frames (it wraps). The frame length, 2^18 samples,
// is the original design's averaging length; it is a multiple of the 2^17
// period of the phase accumulators, so every tone turns a whole number of
// times per frame and no beat appears in the sums. One timer shared by all
// tone managers and both attenuators is this design's choice.
// Timing: frame_end is combinational from the sample counter and is high
// during the clock of the frame's last sample; frame_no steps on the next.
module frame_ctrl #(
  parameter int unsigned LOG2_N  = kid_pkg::LOG2_FRAME,
  parameter int unsigned FRAME_W = kid_pkg::FRAME_NO_W
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               run,
  output logic               frame_end,
  output logic [FRAME_W-1:0] frame_no
);

  logic [LOG2_N-1:0] cnt;

  assign frame_end = run && (&cnt);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      frame_no <= '0;
    end else if (run) begin
      cnt <= cnt + 1'b1;
      if (frame_end) frame_no <= frame_no + 1'b1;
    end
  end

endmodule
