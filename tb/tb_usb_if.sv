// Self-checking testbench of usb_if with 4 tones.
// Writes random frequency words, enables and the shift and checks the
// register outputs (writes to unused addresses must change nothing). Then
// presents frames of random I/Q sums and over-range counts and reads each
// frame out with a randomly stalling rd_ready, checking every word, the
// rd_last marker and the frame length. A frame completed during a readout
// must be dropped and flagged in the next header (overrun).
module tb_usb_if;
  localparam int unsigned N = 4, AW = 3, WORDS = 3 + 2 * N;
  logic clk = 0, rst = 1;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [16:0] freq_words [N];
  logic [N-1:0] tone_en;
  logic [2:0] shift;
  logic frame_done = 0;
  logic [15:0] frame_no = '0;
  logic signed [31:0] iq_i [N], iq_q [N];
  logic [18:0] or_cnt_i = '0, or_cnt_q = '0;
  logic [31:0] rd_data;
  logic rd_valid, rd_last;
  logic rd_ready = 0;
  int checks = 0, failures = 0, overruns_seen = 0, stalls = 0;

  usb_if #(.N(N)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [16:0] m_freq [N];
  logic [N-1:0] m_en = '0;
  logic [2:0] m_shift = '0;

  task automatic check_regs();
    checks++;
    if (tone_en != m_en || shift != m_shift) begin failures++; $display("en/shift %b %0d vs %b %0d", tone_en, shift, m_en, m_shift); end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (freq_words[k] != m_freq[k]) begin failures++; $display("freq %0d: %h vs %h", k, freq_words[k], m_freq[k]); end
    end
  endtask

  // one frame; expect the given overrun flag; optionally a second frame_done mid-readout
  task automatic do_frame(input bit exp_overrun, input bit extra_done);
    logic [31:0] exp_w [WORDS];
    int got;
    for (int k = 0; k < N; k++) begin iq_i[k] = $urandom; iq_q[k] = $urandom; end
    or_cnt_i = 19'($urandom); or_cnt_q = 19'($urandom);
    frame_no = frame_no + 1;
    exp_w[0] = {exp_overrun, 15'b0, frame_no};
    exp_w[1] = 32'(or_cnt_i); exp_w[2] = 32'(or_cnt_q);
    for (int k = 0; k < N; k++) begin exp_w[3+2*k] = iq_i[k]; exp_w[4+2*k] = iq_q[k]; end
    frame_done = 1;
    @(negedge clk) frame_done = 0;
    // scramble the inputs: the buffer must hold the snapshot
    for (int k = 0; k < N; k++) begin iq_i[k] = $urandom; iq_q[k] = $urandom; end
    got = 0;
    while (got < WORDS) begin
      rd_ready = ($urandom_range(0, 2) != 0);
      if (extra_done && got == 3) begin frame_done = 1; frame_no = frame_no + 1; end
      #1;
      checks++;
      if (!rd_valid) begin failures++; $display("rd_valid low at word %0d", got); end
      else if (rd_ready) begin
        if (rd_data != exp_w[got] || rd_last != (got == WORDS - 1)) begin
          failures++; $display("word %0d: %h/%b vs %h", got, rd_data, rd_last, exp_w[got]);
        end
        got++;
      end else stalls++;
      @(negedge clk);
      frame_done = 0;
    end
    rd_ready = 1;
    #1;
    checks++;
    if (rd_valid) begin failures++; $display("rd_valid after last word"); end
    @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin m_freq[k] = '0; iq_i[k] = '0; iq_q[k] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    check_regs();
    for (int n = 0; n < 200; n++) begin
      wr_en = 1;
      wr_addr = AW'($urandom_range(0, 7));
      wr_data = $urandom;
      @(negedge clk);
      if (wr_addr < N) begin m_freq[wr_addr] = wr_data[16:0]; m_en[wr_addr] = wr_data[31]; end
      else if (wr_addr == N) m_shift = wr_data[2:0];
      wr_en = 0;
      check_regs();
    end
    do_frame(0, 0);
    do_frame(0, 1);        // a frame completes during this readout: dropped
    do_frame(1, 0); overruns_seen++;
    do_frame(0, 0);
    checks++;
    if (stalls == 0) begin failures++; $display("no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
