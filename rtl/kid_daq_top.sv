// Readout firmware of a frequency-multiplexed kinetic inductance detector
// (KID) array: direct digital synthesis of a comb of N_TONES tones and
// channelised direct down-conversion of the returning signal.
//
// Each of the N_TONES tone managers owns one tone: a phase accumulator and
// CORDIC generate its sine and cosine, which are summed over all tones by
// two pipelined adder trees into a sine comb and a cosine comb. Each comb is
// attenuated (right shift chosen by software, saturation with over-range
// counting) to 14 bits for the dual DAC: the cosine comb drives the I
// channel and the sine comb the Q channel of the analog IQ up-mixer. The
// signal back from the detector array is digitised to 12 bits; every tone
// manager multiplies it with its own cosine and sine and accumulates the two
// products over a frame of 2^LOG2_FRAME samples. At each frame end all I&Q
// sums and both over-range counts go to the USB interface, which streams
// them out; the same interface writes the tone frequencies, enables and the
// attenuator shift.
// The block structure and all widths follow the original firmware; the
// enable bits, register map, readout format and DAC channel assignment are
// this design's choices. The ADC and DAC I/O cells and the chips outside
// the FPGA are not part of this module: samples enter and leave as plain
// two's complement ports, one per 250 MHz clock.
// Timing: comb latency from a frequency write to the DAC ports is
// 1 (register) + 1 (phase) + 14 (CORDIC) + log2(N_TONES) (adders) + 1
// (attenuator) clocks; a readout starts 2 clocks after a frame's last sample.
module kid_daq_top #(
  parameter int unsigned N_TONES    = kid_pkg::N_TONES,
  parameter int unsigned LOG2_FRAME = kid_pkg::LOG2_FRAME,
  parameter int unsigned ADDR_W     = $clog2(N_TONES + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  // ADC interface
  input  logic signed [kid_pkg::ADC_W-1:0]  adc_data,
  // DAC interface
  output logic signed [kid_pkg::DAC_W-1:0]  dac_i,
  output logic signed [kid_pkg::DAC_W-1:0]  dac_q,
  output logic                     over_range_i,
  output logic                     over_range_q,
  // USB micro-controller: slow control
  input  logic                     wr_en,
  input  logic [ADDR_W-1:0]        wr_addr,
  input  logic [31:0]              wr_data,
  // USB micro-controller: readout stream
  output logic [31:0]              rd_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic                     rd_last
);

  localparam int unsigned SUM_WIDTH = kid_pkg::SC_W + $clog2(N_TONES);

  logic [kid_pkg::PHASE_W-1:0]      freq_words [N_TONES];
  logic [N_TONES-1:0]      tone_en;
  logic [kid_pkg::SHIFT_W-1:0]      shift;
  logic                    frame_end;
  logic [kid_pkg::FRAME_NO_W-1:0]   frame_no;
  logic signed [kid_pkg::SC_W-1:0]  sin_t [N_TONES];
  logic signed [kid_pkg::SC_W-1:0]  cos_t [N_TONES];
  logic signed [kid_pkg::IQ_W-1:0]  iq_i  [N_TONES];
  logic signed [kid_pkg::IQ_W-1:0]  iq_q  [N_TONES];
  logic [N_TONES-1:0]      iq_valid;
  logic signed [SUM_WIDTH-1:0] sum_sin, sum_cos;
  logic [kid_pkg::OR_CNT_W-1:0]     or_cnt_i, or_cnt_q;

  frame_ctrl #(.LOG2_N(LOG2_FRAME), .FRAME_W(kid_pkg::FRAME_NO_W)) u_frame (
    .clk, .rst, .run(1'b1), .frame_end, .frame_no
  );

  for (genvar k = 0; k < N_TONES; k++) begin : g_tone
    tone_manager u_tone (
      .clk, .rst,
      .freq_word (freq_words[k]),
      .enable    (tone_en[k]),
      .adc       (adc_data),
      .dump      (frame_end),
      .sin_o     (sin_t[k]),
      .cos_o     (cos_t[k]),
      .i_o       (iq_i[k]),
      .q_o       (iq_q[k]),
      .iq_valid  (iq_valid[k])
    );
  end

  comb_adder #(.N(N_TONES), .IN_W(kid_pkg::SC_W), .OUT_W(SUM_WIDTH)) u_add_cos (
    .clk, .din(cos_t), .sum(sum_cos)
  );
  comb_adder #(.N(N_TONES), .IN_W(kid_pkg::SC_W), .OUT_W(SUM_WIDTH)) u_add_sin (
    .clk, .din(sin_t), .sum(sum_sin)
  );

  attenuator #(.IN_W(SUM_WIDTH), .OUT_W(kid_pkg::DAC_W), .CNT_W(kid_pkg::OR_CNT_W)) u_att_i (
    .clk, .rst, .din(sum_cos), .shift, .frame_end,
    .dout(dac_i), .over_range(over_range_i), .or_count(or_cnt_i)
  );
  attenuator #(.IN_W(SUM_WIDTH), .OUT_W(kid_pkg::DAC_W), .CNT_W(kid_pkg::OR_CNT_W)) u_att_q (
    .clk, .rst, .din(sum_sin), .shift, .frame_end,
    .dout(dac_q), .over_range(over_range_q), .or_count(or_cnt_q)
  );

  usb_if #(.N(N_TONES), .ADDR_W(ADDR_W)) u_usb (
    .clk, .rst,
    .wr_en, .wr_addr, .wr_data,
    .freq_words, .tone_en, .shift,
    .frame_done (iq_valid[0]),
    .frame_no, .iq_i, .iq_q, .or_cnt_i, .or_cnt_q,
    .rd_data, .rd_valid, .rd_ready, .rd_last
  );

endmodule
