// Pipelined rotation-mode CORDIC: phase to sine and cosine.
//
// One angle enters and one sine/cosine pair leaves every clock. The angle is
// a binary angle (2^PHASE_W per turn) left-aligned to the 20-bit resolution
// of the arctangent table. A first stage folds the left half-plane onto the
// right one (subtract pi, negate the start vector); then ITER = 12 stages of
// shifts, additions and subtractions rotate the vector (x, y) = (K*A, 0) by
// the remaining angle, A = 2^(OUT_W-1)-1 and K = 0.6072529 the CORDIC gain,
// pre-compensated so no multiplier is needed. A last stage rounds away the
// GUARD bits and saturates to +-A.
// Following the original design: pipelining, adders/subtracters only, 12
// iterations, 12 precalculated 20-bit arctangents, 12-bit outputs. The angle
// unit, the folding stage, the guard bits and the rounding are this design's
// own choices. Residual angle error is below atan(2^-11), about one LSB.
// Timing: latency ITER + 2 = 14 clocks, throughput 1 per clock.
module cordic #(
  parameter int unsigned PHASE_W = kid_pkg::PHASE_W,
  parameter int unsigned OUT_W   = kid_pkg::SC_W,
  parameter int unsigned GUARD   = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [PHASE_W-1:0]       phase,
  output logic signed [OUT_W-1:0]  sin_o,
  output logic signed [OUT_W-1:0]  cos_o
);

  localparam int unsigned ITER    = kid_pkg::CORDIC_ITER;
  localparam int unsigned ATAN_W  = kid_pkg::ATAN_W;
  localparam int unsigned XY_W    = OUT_W + GUARD + 1;
  localparam int signed   AMP     = 2**(OUT_W-1) - 1;
  // start vector K * AMP * 2^GUARD, K = prod 1/sqrt(1+2^-2i) = 0.607252959
  localparam int signed   X0      = int'(0.607252959138945 * real'(AMP) * real'(2**GUARD));

  logic signed [XY_W-1:0]   x [ITER+1];
  logic signed [XY_W-1:0]   y [ITER+1];
  logic signed [ATAN_W-1:0] z [ITER+1];

  // Stage 0: quadrant folding.
  logic [ATAN_W-1:0] ang;
  assign ang = ATAN_W'({phase, {(ATAN_W-PHASE_W){1'b0}}});

  always_ff @(posedge clk) begin
    if (rst) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0;
    end else if (ang[ATAN_W-1] ^ ang[ATAN_W-2]) begin
      // angle in [pi/2, 3*pi/2): rotate by pi
      x[0] <= XY_W'(-X0);
      y[0] <= '0;
      z[0] <= $signed(ang - (ATAN_W'(1) << (ATAN_W-1)));
    end else begin
      x[0] <= XY_W'(X0);
      y[0] <= '0;
      z[0] <= $signed(ang);
    end
  end

  // Stages 1..ITER: micro-rotations.
  for (genvar i = 0; i < ITER; i++) begin : g_iter
    always_ff @(posedge clk) begin
      if (rst) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0;
      end else if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - $signed(kid_pkg::ATAN_LUT[i]);
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + $signed(kid_pkg::ATAN_LUT[i]);
      end
    end
  end

  // Output stage: round off the guard bits and saturate.
  function automatic logic signed [OUT_W-1:0] round_sat(input logic signed [XY_W-1:0] v);
    logic signed [XY_W:0] r;
    r = ((XY_W+1)'(v) + (XY_W+1)'(2**(GUARD-1))) >>> GUARD;
    if (r > (XY_W+1)'(AMP))       return OUT_W'(AMP);
    else if (r < -(XY_W+1)'(AMP)) return OUT_W'(-AMP);
    else               return OUT_W'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sin_o <= '0; cos_o <= '0;
    end else begin
      sin_o <= round_sat(y[ITER]);
      cos_o <= round_sat(x[ITER]);
    end
  end

endmodule
