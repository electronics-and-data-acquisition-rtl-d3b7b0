// Workload testbench: 64 detectors read simultaneously, full-size design.
//
// kid_daq_top runs at its default parameters (128 tone managers, 2^18-sample
// frames). 64 tones are tuned 1049 frequency steps (about 2.0 MHz) apart,
// as in a 64-pixel array with 2 MHz resonator spacing. The testbench plays
// the detector array: the ADC input is the sum of the 64 tones, each with
// its own amplitude and phase (a resonator's complex transmission), built
// from the testbench's own model of the tone phases. Between frame 1 and
// frame 2, pixel 20 responds to a source: its transmitted amplitude drops by
// 30 % and its phase turns by 0.4 rad. Its neighbour, tone 21, stays
// unchanged, like an off-resonance blind tone.
// Checks on frames 1 and 2 (frame 0 holds the configuration transient):
// every tone's I&Q magnitude within 2 % and angle within 0.02 rad of the
// programmed response, and the blind neighbour's I&Q moving by less than
// 0.1 % of its magnitude when the pixel changes (no cross-talk).
module tb_kid_optical64;
  localparam int unsigned NT = 64, FRAME = 1 << 18, AW = 8;
  localparam int unsigned PIX = 20, BLIND = 21;
  localparam real PI = 3.14159265358979;
  localparam real A = 28.0;               // ADC amplitude of one tone, LSB

  logic clk = 0, rst = 1;
  logic signed [11:0] adc_data = '0;
  logic signed [13:0] dac_i, dac_q;
  logic over_range_i, over_range_q;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [31:0] rd_data;
  logic rd_valid, rd_last;
  logic rd_ready = 1;
  int checks = 0, failures = 0, frames_read = 0;

  kid_daq_top dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (4 * FRAME) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic logic [16:0] tone_f(int k); return 17'(1049 * k + 524); endfunction
  function automatic real wrap(real a);
    while (a > PI) a -= 2.0 * PI;
    while (a < -PI) a += 2.0 * PI;
    return a;
  endfunction

  // resonator response of tone k during frame f
  function automatic real gain(int k, int f);
    return (k == PIX && f >= 2) ? 0.7 * (0.8 + 0.004 * k) : (0.8 + 0.004 * k);
  endfunction
  function automatic real phs(int k, int f);
    return (k == PIX && f >= 2) ? 0.1 * k + 0.4 : 0.1 * k;
  endfunction

  logic [31:0] words [$];
  logic [16:0] ph [NT];
  logic [16:0] ph_h [NT][16];
  real res_i [3][NT], res_q [3][NT];

  initial begin
    int cyc, f;
    real s, th, mag, ang, exp_mag, d;
    for (int k = 0; k < NT; k++) begin ph[k] = '0; for (int j = 0; j < 16; j++) ph_h[k][j] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    cyc = 0;
    while (frames_read < 3) begin
      wr_en = 0;
      if (cyc >= 4 && cyc < 4 + NT) begin
        wr_en = 1; wr_addr = AW'(cyc - 4); wr_data = {1'b1, 14'b0, tone_f(cyc - 4)};
      end else if (cyc == 4 + NT) begin
        wr_en = 1; wr_addr = AW'(128); wr_data = 32'd4;
      end
      @(negedge clk);
      cyc++;
      for (int k = 0; k < NT; k++) begin
        ph[k] = ph[k] + ((cyc - 1 > 4 + k) ? tone_f(k) : 17'd0);
        ph_h[k][cyc % 16] = ph[k];
      end
      // the detector array's output, aligned with the tone's CORDIC output
      f = cyc / FRAME;
      s = 0.0;
      for (int k = 0; k < NT; k++) begin
        th = 2.0 * PI * real'(ph_h[k][(cyc + 16 - 14) % 16]) / 131072.0;
        s += A * gain(k, f) * $cos(th + phs(k, f));
      end
      adc_data = 12'($rtoi($floor(s + 0.5)));
      if (rd_valid) begin
        words.push_back(rd_data);
        if (rd_last) begin
          checks++;
          if (words.size() != 3 + 2 * 128) begin failures++; $display("frame length %0d", words.size()); end
          for (int k = 0; k < NT; k++) begin
            res_i[frames_read][k] = real'($signed(words[3 + 2*k]));
            res_q[frames_read][k] = real'($signed(words[4 + 2*k]));
          end
          frames_read++;
          words.delete();
        end
      end
    end
    // per-tone response: |IQ| = 2^18 * A*g * 2047/2 / 2^10, angle = -phase
    for (int fr = 1; fr <= 2; fr++) begin
      for (int k = 0; k < NT; k++) begin
        exp_mag = real'(FRAME) * A * gain(k, fr) * 2047.0 / 2.0 / 1024.0;
        mag = $sqrt(res_i[fr][k] ** 2 + res_q[fr][k] ** 2);
        ang = $atan2(res_q[fr][k], res_i[fr][k]);
        checks += 2;
        if (rabs(mag - exp_mag) > 0.02 * exp_mag) begin
          failures++; $display("frame %0d tone %0d magnitude %0f vs %0f", fr, k, mag, exp_mag);
        end
        if (rabs(wrap(ang + phs(k, fr))) > 0.02) begin
          failures++; $display("frame %0d tone %0d angle %0f vs %0f", fr, k, ang, wrap(-phs(k, fr)));
        end
      end
    end
    // the pixel moved, its blind neighbour did not
    mag = $sqrt(res_i[1][BLIND] ** 2 + res_q[1][BLIND] ** 2);
    d = $sqrt((res_i[2][BLIND] - res_i[1][BLIND]) ** 2 + (res_q[2][BLIND] - res_q[1][BLIND]) ** 2);
    $display("blind tone moved by %0f of its magnitude", d / mag);
    checks++;
    if (d > 0.001 * mag) begin failures++; $display("cross-talk on the blind tone"); end
    mag = $sqrt(res_i[1][PIX] ** 2 + res_q[1][PIX] ** 2);
    d = $sqrt((res_i[2][PIX] - res_i[1][PIX]) ** 2 + (res_q[2][PIX] - res_q[1][PIX]) ** 2);
    $display("pixel moved by %0f of its magnitude", d / mag);
    checks++;
    if (d < 0.2 * mag) begin failures++; $display("pixel response not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
