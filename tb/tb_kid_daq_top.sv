// End-to-end testbench of kid_daq_top with 8 tones and 2^12-sample frames.
//
// The I DAC output is looped back to the ADC input (14-bit DAC sample >>> 2
// gives the 12-bit ADC sample), which is the electronics-only loopback used
// to measure the readout noise floor. The testbench programs the tones over
// slow control, reads every frame from the readout stream with a randomly
// stalling consumer and checks:
//  - every DAC sample of the I and Q combs against a model built from the
//    testbench's own phase accumulators and real sine/cosine (2 LSB per tone
//    plus rounding), including saturation and the over-range flags;
//  - each frame's header, frame number and both over-range counts against
//    counts taken at the DAC ports;
//  - on clean frames, the I&Q magnitude of every enabled tone against the
//    expected loopback amplitude (within 3 %), and that the disabled
//    "blind" tone reads below 1 % of it (no cross-talk).
// Mechanisms forced and counted: an on-line retune, a tone switched on,
// attenuator shift change, over-range saturation, a readout stall and a
// readout overrun (frame dropped while the consumer holds off).
module tb_kid_daq_top;
  localparam int unsigned N = 8, LF = 12, FRAME = 1 << LF, AW = 4;
  localparam int unsigned LAT_DAC = 18;   // phase register to DAC port: 14 + log2(N) + 1
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
  logic rd_ready = 0;

  int checks = 0, failures = 0;
  int n_retune = 0, n_enable = 0, n_shift = 0, n_overrange = 0, n_stall = 0, n_overrun = 0, n_frames = 0, n_blind = 0;

  kid_daq_top #(.N_TONES(N), .LOG2_FRAME(LF)) dut (.*);

  assign adc_data = 12'(dac_i >>> 2);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(real v); return v < 0.0 ? -v : v; endfunction

  // ---------------- model state
  logic [16:0] m_fw [N];        // frequency registers
  logic [N-1:0] m_en = '0;
  int m_shift = 0;
  logic [16:0] ph_h [N][32];    // phase history, indexed by cycle % 32
  logic [N-1:0] en_h [32];
  int shift_h [32];
  int cyc = 0;                  // clocks since reset release
  int last_write = -1000000;
  int or_i = 0, or_q = 0, or_i_l [int], or_q_l [int];
  bit shift0_frame [int];
  int write_cyc [$];

  // slow-control writes scheduled by clock
  typedef struct { int at; logic [AW-1:0] addr; logic [31:0] data; } wr_t;
  wr_t sched [$];

  function automatic logic [16:0] tone_f(int k, int v); return 17'(32 * (7 + 11 * k + v)); endfunction

  int sat_count = 0;

  // ---------------- stimulus and DAC checks, one iteration per clock
  initial begin
    wr_t w;
    int idx, e_i, e_q, s_i, s_q, sh, tol;
    real ci, cq;
    for (int k = 0; k < N; k++) begin
      m_fw[k] = '0;
      for (int j = 0; j < 32; j++) ph_h[k][j] = '0;
    end
    for (int j = 0; j < 32; j++) begin en_h[j] = '0; shift_h[j] = 0; end
    // configuration: tones 0..5 on, tone 6 tuned but off (blind), tone 7 off
    for (int k = 0; k < N; k++) sched.push_back('{at: 5 + k, addr: AW'(k), data: {(k < 6), 14'b0, tone_f(k, 0)}});
    sched.push_back('{at: 20, addr: AW'(N), data: 32'd1});
    sched.push_back('{at: 4 * FRAME + 100, addr: AW'(2), data: {1'b1, 14'b0, tone_f(2, 3)}});   // retune
    sched.push_back('{at: 7 * FRAME + 100, addr: AW'(N), data: 32'd0});                            // shift 0
    sched.push_back('{at: 10 * FRAME + 100, addr: AW'(N), data: 32'd1});                           // shift 1
    sched.push_back('{at: 10 * FRAME + 101, addr: AW'(7), data: {1'b1, 14'b0, tone_f(7, 0)}});   // tone on
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    while (cyc < 16 * FRAME) begin
      // drive the write for the next edge
      wr_en = 0;
      if (sched.size() > 0 && sched[0].at == cyc) begin
        w = sched.pop_front();
        wr_en = 1; wr_addr = w.addr; wr_data = w.data;
        last_write = cyc;
      end
      @(negedge clk);
      cyc++;
      // model the edge just passed: phase update, then the register write
      idx = cyc % 32;
      for (int k = 0; k < N; k++) ph_h[k][idx] = ph_h[k][(cyc + 31) % 32] + m_fw[k];
      if (wr_en) begin
        if (wr_addr < N) begin
          if (m_fw[wr_addr] != wr_data[16:0] && m_fw[wr_addr] != 0) n_retune++;
          if (!m_en[wr_addr] && wr_data[31] && cyc > FRAME) n_enable++;
          m_fw[wr_addr] = wr_data[16:0]; m_en[wr_addr] = wr_data[31];
        end else if (wr_addr == N) begin
          if (cyc > FRAME) n_shift++;
          m_shift = int'(wr_data[2:0]);
        end
      end
      en_h[idx] = m_en;
      shift_h[idx] = m_shift;
      // DAC samples now visible
      if (cyc > 40) begin
        ci = 0.0; cq = 0.0;
        for (int k = 0; k < N; k++) if (en_h[(cyc + 32 - 4) % 32][k]) begin
          real th;
          th = 2.0 * PI * real'(ph_h[k][(cyc + 32 - LAT_DAC) % 32]) / 131072.0;
          ci += 2047.0 * $cos(th);
          cq += 2047.0 * $sin(th);
        end
        sh = shift_h[(cyc + 31) % 32];
        if (sh > 1) sh = 1;   // 8 tones: 15-bit sums, at most 1 bit to drop
        s_i = $rtoi($floor(ci / real'(1 << sh)));
        s_q = $rtoi($floor(cq / real'(1 << sh)));
        tol = 2 * N / (1 << sh) + 2;
        e_i = (s_i > 8191) ? 8191 : (s_i < -8192) ? -8192 : s_i;
        e_q = (s_q > 8191) ? 8191 : (s_q < -8192) ? -8192 : s_q;
        checks += 2;
        if ((int'(dac_i) - e_i) > tol || (e_i - int'(dac_i)) > tol) begin
          failures++; if (failures < 8) $display("cycle %0d dac_i %0d vs %0d", cyc, dac_i, e_i);
        end
        if ((int'(dac_q) - e_q) > tol || (e_q - int'(dac_q)) > tol) begin
          failures++; if (failures < 8) $display("cycle %0d dac_q %0d vs %0d", cyc, dac_q, e_q);
        end
        // flags: only far from the limit is the model's verdict certain
        if (s_i > 8191 + tol || s_i < -8192 - tol) begin
          checks++; if (!over_range_i) begin failures++; $display("cycle %0d over_range_i missing", cyc); end
        end
        if (s_i < 8191 - tol && s_i > -8192 + tol) begin
          checks++; if (over_range_i) begin failures++; $display("cycle %0d spurious over_range_i", cyc); end
        end
      end
      if (over_range_i) begin
        checks++;
        if (dac_i != 14'sh1fff && dac_i != -14'sh2000) begin failures++; $display("over-range but not saturated"); end
        sat_count++;
      end
      // over-range counts per frame, as seen at the DAC ports
      or_i += int'(over_range_i);
      or_q += int'(over_range_q);
      if (cyc % FRAME == 0) begin
        or_i_l[cyc / FRAME - 1] = or_i; or_q_l[cyc / FRAME - 1] = or_q;
        shift0_frame[cyc / FRAME - 1] = (or_i + or_q) > 0;
        or_i = 0; or_q = 0;
      end
    end
    // ---------------- summary
    $display("frames %0d retunes %0d enables %0d shift changes %0d over-range frames %0d stalls %0d overruns %0d blind checks %0d",
             n_frames, n_retune, n_enable, n_shift, n_overrange, n_stall, n_overrun, n_blind);
    checks += 8;
    if (n_frames < 10)   begin failures++; $display("too few frames"); end
    if (n_retune == 0)   begin failures++; $display("no retune"); end
    if (n_enable == 0)   begin failures++; $display("no tone switched on"); end
    if (n_shift == 0)    begin failures++; $display("no shift change"); end
    if (n_overrange == 0) begin failures++; $display("no over-range frame"); end
    if (n_stall == 0)    begin failures++; $display("no readout stall"); end
    if (n_overrun == 0)  begin failures++; $display("no readout overrun"); end
    if (n_blind == 0)    begin failures++; $display("no blind-tone check"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- readout consumer
  logic [31:0] words [$];
  int last_frame_no = 0;

  always @(negedge clk) begin
    if (!rst) begin
      // ready for the coming edge; the word on the bus now is taken there
      rd_ready = !(cyc > 11 * FRAME + 8 && cyc < 12 * FRAME + 100) && ($urandom_range(0, 7) != 0);
      if (rd_valid && rd_ready) begin
        words.push_back(rd_data);
        if (rd_last) check_frame();
      end else if (rd_valid) n_stall++;
    end
  end

  task automatic check_frame();
    int fno, f, cnt_i, cnt_q;
    bit ovr, clean;
    real mag, exp_mag;
    fno = int'(words[0][15:0]);
    ovr = words[0][31];
    f = fno - 1;                         // 0-based index of the frame read
    n_frames++;
    checks += 2;
    if (words.size() != 3 + 2 * N) begin failures++; $display("frame length %0d", words.size()); end
    if (ovr) n_overrun++;
    if (ovr != (fno > last_frame_no + 1)) begin failures++; $display("frame %0d overrun flag %0b after %0d", fno, ovr, last_frame_no); end
    last_frame_no = fno;
    // over-range counts
    cnt_i = int'(words[1]); cnt_q = int'(words[2]);
    if (f >= 1) begin
      checks += 2;
      if (cnt_i != or_i_l[f] || cnt_q != or_q_l[f]) begin
        failures++; $display("frame %0d over-range %0d %0d vs %0d %0d", f, cnt_i, cnt_q, or_i_l[f], or_q_l[f]);
      end
      if (cnt_i + cnt_q > 0) n_overrange++;
    end
    // tone magnitudes on clean frames
    clean = f >= 1 && !shift0_frame[f] && !(last_write > f * int'(FRAME) - 60 && last_write < (f + 1) * int'(FRAME));
    if (clean && f != 4 && !(f >= 7 && f <= 10)) begin
      // loopback amplitude at the ADC: 2047 / 2^shift / 4 (shift 1)
      exp_mag = real'(FRAME) * (2047.0 / 8.0) * (2047.0 / 2.0) / 1024.0;
      for (int k = 0; k < N; k++) begin
        bit on;
        mag = $sqrt(real'($signed(words[3 + 2*k])) ** 2 + real'($signed(words[4 + 2*k])) ** 2);
        on = (k < 6) || (k == 7 && f > 10);
        checks++;
        if (on && rabs(mag - exp_mag) > 0.03 * exp_mag) begin
          failures++; $display("frame %0d tone %0d magnitude %0f vs %0f", f, k, mag, exp_mag);
        end
        if (!on && mag > 0.01 * exp_mag) begin
          failures++; $display("frame %0d blind tone %0d magnitude %0f", f, k, mag);
        end
        if (!on && k == 6) n_blind++;
      end
    end
    words.delete();
  endtask
endmodule
