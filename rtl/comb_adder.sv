// Pipelined adder tree building one comb sample from N tone samples.
//
// The N = 128 signed 12-bit tone values are summed pairwise in a binary tree
// of log2(N) = 7 levels with one register per level ("one stage per
// addition"), giving a 19-bit sum every clock. Each level needs one bit more
// than the one below it, so 12 + 7 = 19 bits can never overflow. The adders
// here are all OUT_W wide; synthesis trims the unused upper bits. Two
// instances build the sine comb and the cosine comb.
// N must be a power of two (this design's restriction).
// Timing: latency log2(N) clocks, one sum per clock.
module comb_adder #(
  parameter int unsigned N     = kid_pkg::N_TONES,
  parameter int unsigned IN_W  = kid_pkg::SC_W,
  parameter int unsigned OUT_W = kid_pkg::SUM_W
) (
  input  logic                    clk,
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = $clog2(N);

  logic signed [OUT_W-1:0] lvl [LEVELS+1][N];

  for (genvar j = 0; j < N; j++) begin : g_in
    assign lvl[0][j] = OUT_W'(din[j]);
  end

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    for (genvar j = 0; j < N; j++) begin : g_node
      if (j < (N >> l)) begin : g_add
        always_ff @(posedge clk) lvl[l][j] <= lvl[l-1][2*j] + lvl[l-1][2*j+1];
      end else begin : g_unused
        assign lvl[l][j] = '0;
      end
    end
  end

  assign sum = lvl[LEVELS][0];

  initial assert (N == (1 << LEVELS)) else $error("comb_adder: N must be a power of two");

endmodule
