// Self-checking testbench of tone_manager.
// The ADC input is a sinusoid at the tone's own frequency with a chosen
// phase offset, computed by the testbench with real arithmetic from the
// tone's phase. Frames of 1024 samples are dumped; each I and Q sum must
// match, within 0.5 %, the real-valued sum of adc*2047*cos and adc*2047*sin
// over exactly that frame's samples, scaled by 2^-10 (4 product LSBs and 6
// accumulator LSBs dropped). The tone is retuned between frames and the
// comb outputs are checked to be zero while the tone is disabled and equal
// to the CORDIC's when enabled.
module tb_tone_manager;
  logic clk = 0, rst = 1;
  logic [16:0] freq_word = '0;
  logic enable = 0;
  logic signed [11:0] adc = '0;
  logic dump = 0;
  logic signed [11:0] sin_o, cos_o;
  logic signed [31:0] i_o, q_o;
  logic iq_valid;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979;

  tone_manager dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [16:0] ph_hist [$];

  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction

  initial begin
    real acc_i, acc_q, exp_i, exp_q, th, phi, tol;
    bit expect_valid, dumped;
    int frames_checked;
    acc_i = 0; acc_q = 0; expect_valid = 0; dumped = 0; frames_checked = 0; exp_i = 0; exp_q = 0;
    phi = 0.7;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    freq_word = 17'd128 * 37;
    for (int m = 0; m < 24 * 1024; m++) begin
      ph_hist.push_back(dut.phase);
      if (ph_hist.size() > 15) void'(ph_hist.pop_front());
      // frame results of the previous dump
      if (expect_valid) begin
        tol = 0.005 * $sqrt(exp_i * exp_i + exp_q * exp_q) + 4.0;
        checks += 3;
        if (!iq_valid) begin failures++; $display("iq_valid missing"); end
        if (rabs(real'(i_o) - exp_i) > tol || rabs(real'(q_o) - exp_q) > tol) begin
          failures++; $display("frame %0d: I %0d Q %0d vs %0f %0f", m / 1024, i_o, q_o, exp_i, exp_q);
        end
        frames_checked++;
      end else begin
        checks++;
        if (iq_valid != dumped) begin failures++; $display("iq_valid without dump"); end
      end
      // comb outputs follow the enable
      checks++;
      if (enable ? (sin_o != dut.sin_w || cos_o != dut.cos_w) : (sin_o != 0 || cos_o != 0)) begin
        failures++; $display("comb output wrong, enable=%b", enable);
      end
      // frame boundaries every 1024 samples; retune and re-phase between frames
      expect_valid = 0;
      dump = (m % 1024 == 1023);
      dumped = dump;
      if (dump) begin
        exp_i = acc_i / 1024.0; exp_q = acc_q / 1024.0;
        expect_valid = (m / 1024 >= 1) && (m / 1024) % 4 != 0;  // skip frames after a retune
        acc_i = 0; acc_q = 0;
        if ((m / 1024) % 4 == 3) begin
          freq_word = 17'd128 * 17'($urandom_range(1, 500));
          phi = real'($urandom_range(0, 628)) / 100.0;
        end
        enable = ((m / 1024) % 3 != 0);
      end
      // ADC sample at the phase of the CORDIC output now visible
      th = (ph_hist.size() == 15) ? 2.0 * PI * real'(ph_hist[0]) / 131072.0 : 0.0;
      adc = 12'($rtoi($floor(1500.0 * $cos(th + phi) + 0.5)));
      acc_i += real'(adc) * 2047.0 * $cos(th);
      acc_q += real'(adc) * 2047.0 * $sin(th);
      @(negedge clk);
    end
    checks++;
    if (frames_checked < 10) begin failures++; $display("too few frames checked"); end
    $display("frames checked %0d", frames_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
