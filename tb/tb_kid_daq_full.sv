// Full-size testbench of kid_daq_top at its default parameters: 128 tones,
// 2^18-sample frames, 17-bit frequency words.
//
// The I DAC output is looped back to the ADC input (DAC sample >>> 2). All
// 128 tones are tuned 512 frequency steps (about 0.98 MHz) apart; 120 are
// switched on and every 16th tone is left off as a blind channel. The
// attenuator shift is 5, the worst-case setting that keeps 128 in-phase
// tones inside the DAC range. Two complete frames are accumulated; the
// second one (clean, the configuration having settled during the first) is
// read out and checked: frame length and number, zero over-range counts, and
// for every tone the I&Q magnitude against the loopback amplitude
// 2^18 * (2047/2^5/4) * (2047/2) / 2^10 within 3 %, blind tones below 2 %
// of it. Every 61st DAC sample is also compared with a real-valued model of
// the comb.
module tb_kid_daq_full;
  localparam int unsigned N = 128, FRAME = 1 << 18, AW = 8;
  localparam int unsigned LAT_DAC = 22;   // phase register to DAC port: 14 + 7 + 1
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1;
  logic signed [11:0] adc_data;
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

  assign adc_data = 12'(dac_i >>> 2);

  always #2 clk = ~clk;

  initial begin
    repeat (3 * FRAME) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic logic [16:0] tone_f(int k); return 17'(512 * k + 256); endfunction
  function automatic bit tone_on(int k); return (k % 16) != 15; endfunction

  logic [31:0] words [$];
  logic [16:0] ph [N];      // testbench phase accumulators (value after each edge)
  logic [16:0] ph_h [N][32];

  initial begin
    int cyc, idx, e, s;
    real c;
    real exp_mag, mag;
    for (int k = 0; k < N; k++) begin ph[k] = '0; for (int j = 0; j < 32; j++) ph_h[k][j] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    cyc = 0;
    while (frames_read < 2) begin
      // configuration during the first clocks of frame 0
      wr_en = 0;
      if (cyc >= 4 && cyc < 4 + N) begin
        wr_en = 1; wr_addr = AW'(cyc - 4);
        wr_data = {tone_on(cyc - 4), 14'b0, tone_f(cyc - 4)};
      end else if (cyc == 4 + N) begin
        wr_en = 1; wr_addr = AW'(N); wr_data = 32'd5;
      end
      @(negedge clk);
      cyc++;
      idx = cyc % 32;
      for (int k = 0; k < N; k++) begin
        ph[k] = ph[k] + ((cyc - 1 > 4 + k) ? tone_f(k) : 17'd0);
        ph_h[k][idx] = ph[k];
      end
      // sparse comb check once the configuration has settled
      if (cyc > 200 && cyc % 61 == 0) begin
        c = 0.0;
        for (int k = 0; k < N; k++) if (tone_on(k))
          c += 2047.0 * $cos(2.0 * PI * real'(ph_h[k][(cyc + 32 - LAT_DAC) % 32]) / 131072.0);
        s = $rtoi($floor(c / 32.0));
        e = int'(dac_i) - s;
        checks++;
        if (e > 10 || e < -10) begin failures++; if (failures < 8) $display("cycle %0d dac_i %0d vs %0d", cyc, dac_i, s); end
      end
      // readout
      if (rd_valid) begin
        words.push_back(rd_data);
        if (rd_last) begin
          frames_read++;
          checks += 3;
          if (words.size() != 3 + 2 * N) begin failures++; $display("frame length %0d", words.size()); end
          if (int'(words[0][15:0]) != frames_read || words[0][31]) begin failures++; $display("header %h", words[0]); end
          // frame 1 saw the tones switched on before the shift was set
          if (frames_read == 2 && (words[1] != 0 || words[2] != 0)) begin failures++; $display("over-range %0d %0d", words[1], words[2]); end
          if (frames_read == 2) begin
            exp_mag = real'(FRAME) * (2047.0 / 128.0) * (2047.0 / 2.0) / 1024.0;
            for (int k = 0; k < N; k++) begin
              mag = $sqrt(real'($signed(words[3 + 2*k])) ** 2 + real'($signed(words[4 + 2*k])) ** 2);
              checks++;
              if (tone_on(k) ? rabs(mag - exp_mag) > 0.03 * exp_mag : mag > 0.02 * exp_mag) begin
                failures++; $display("tone %0d (on=%0b) magnitude %0f vs %0f", k, tone_on(k), mag, exp_mag);
              end
            end
            $display("frame 2 read out at clock %0d", cyc);
          end
          words.delete();
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
