// Comb attenuator with over-range detection and counting.
//
// The IN_W = 19-bit comb sum is shifted right (arithmetic) by `shift` bits,
// 0 to IN_W-OUT_W = 5, to reach the OUT_W = 14-bit DAC range; larger shift
// values are clamped to 5. If the shifted value still does not fit 14 bits,
// that is if the bits above the DAC range are not a sign extension, the
// sample is over-range: it is saturated to the 14-bit limit and flagged.
// Over-range samples are counted over each accumulation frame; at
// frame_end the count (including that clock's sample) is latched into
// or_count and the counter restarts, so software can choose the shift.
// The shifting, the 19/14-bit widths and the per-frame count follow the
// original design; saturation (rather than wrap-around) and the counter
// details are this design's choices.
// Timing: dout/over_range 1 clock after din; or_count updated 1 clock after
// frame_end and held for a frame.
module attenuator #(
  parameter int unsigned IN_W  = kid_pkg::SUM_W,
  parameter int unsigned OUT_W = kid_pkg::DAC_W,
  parameter int unsigned CNT_W = kid_pkg::OR_CNT_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  din,
  input  logic [2:0]              shift,
  input  logic                    frame_end,
  output logic signed [OUT_W-1:0] dout,
  output logic                    over_range,
  output logic [CNT_W-1:0]        or_count
);

  localparam int unsigned MAX_SHIFT = IN_W - OUT_W;
  localparam logic signed [IN_W-1:0] HI = IN_W'(2**(OUT_W-1) - 1);
  localparam logic signed [IN_W-1:0] LO = -IN_W'(2**(OUT_W-1));

  logic [2:0]              sh;
  logic signed [IN_W-1:0]  shifted;
  logic                    ovr;
  logic [CNT_W-1:0]        cnt;

  assign sh      = (shift > 3'(MAX_SHIFT)) ? 3'(MAX_SHIFT) : shift;
  assign shifted = din >>> sh;
  assign ovr     = (shifted > HI) || (shifted < LO);

  always_ff @(posedge clk) begin
    if (rst) begin
      dout       <= '0;
      over_range <= 1'b0;
      cnt        <= '0;
      or_count   <= '0;
    end else begin
      over_range <= ovr;
      if (shifted > HI)      dout <= HI[OUT_W-1:0];
      else if (shifted < LO) dout <= LO[OUT_W-1:0];
      else                   dout <= shifted[OUT_W-1:0];
      if (frame_end) begin
        or_count <= cnt + CNT_W'(ovr);
        cnt      <= '0;
      end else if (ovr && !(&cnt)) begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
