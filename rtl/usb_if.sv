// FPGA side of the USB micro-controller link: slow control and readout.
//
// Slow control: a write strobe with word address and 32-bit data sets the
// registers (reset value 0):
//   address k < N : bits [PHASE_W-1:0] frequency word of tone k, bit 31 its enable
//   address N     : bits [2:0] right shift of both comb attenuators
// A tone's frequency can thus be changed on-line without disturbing the
// other tones.
// Readout: on frame_done (the clock the tone managers present new sums) the
// header, both over-range counts and the N I/Q pairs are copied into a
// readout buffer and streamed out as 32-bit words on a valid/ready
// interface, 3 + 2N words per frame:
//   word 0: header {overrun, 15'b0, frame_no}
//   word 1: I comb over-range count, word 2: Q comb over-range count
//   word 3+2k: I of tone k, word 4+2k: Q of tone k; rd_last on the final word.
// The buffer frees the tone managers to accumulate the next frame while the
// previous one is read. A frame that completes while a readout is still in
// progress is dropped and the next header has `overrun` set.
// The original design only states that each tone manager hands its I&Q to the
// USB interface at the end of every accumulation cycle and that slow
// control (frequencies, settings) passes the same way; the micro-controller
// bus, the register map and the frame format are this design's choices.
// Timing: a register write takes effect on the next clock. rd_valid rises
// the clock after frame_done; one word per clock while rd_ready is high.
module usb_if
  import kid_pkg::*;
#(
  parameter int unsigned N      = kid_pkg::N_TONES,
  parameter int unsigned ADDR_W = $clog2(N + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  // slow control from the micro-controller
  input  logic                     wr_en,
  input  logic [ADDR_W-1:0]        wr_addr,
  input  logic [31:0]              wr_data,
  output logic [PHASE_W-1:0]       freq_words [N],
  output logic [N-1:0]             tone_en,
  output logic [SHIFT_W-1:0]       shift,
  // frame results
  input  logic                     frame_done,
  input  logic [FRAME_NO_W-1:0]    frame_no,
  input  logic signed [IQ_W-1:0]   iq_i [N],
  input  logic signed [IQ_W-1:0]   iq_q [N],
  input  logic [OR_CNT_W-1:0]      or_cnt_i,
  input  logic [OR_CNT_W-1:0]      or_cnt_q,
  // readout stream to the micro-controller
  output logic [31:0]              rd_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic                     rd_last
);

  localparam int unsigned WORDS  = 3 + 2 * N;
  localparam int unsigned TONE_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned REG_SHIFT = N;  // shift register address
  localparam int unsigned IDX_W = $clog2(WORDS);

  // ---------------- slow-control registers
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) freq_words[k] <= '0;
      tone_en <= '0;
      shift   <= '0;
    end else if (wr_en) begin
      if (wr_addr < ADDR_W'(N)) begin
        freq_words[wr_addr[TONE_W-1:0]] <= wr_data[PHASE_W-1:0];
        tone_en[wr_addr[TONE_W-1:0]]    <= wr_data[31];
      end else if (wr_addr == ADDR_W'(REG_SHIFT)) begin
        shift <= wr_data[SHIFT_W-1:0];
      end
    end
  end

  // ---------------- readout buffer and sequencer
  logic [31:0]        buf_w [WORDS];
  readout_state_e     state;
  logic [IDX_W-1:0]   idx;
  logic               overrun_pend;
  frame_header_t      hdr;

  assign hdr = '{overrun: overrun_pend, reserved: '0, frame_no: frame_no};

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= RO_IDLE;
      idx          <= '0;
      overrun_pend <= 1'b0;
      for (int w = 0; w < WORDS; w++) buf_w[w] <= '0;
    end else begin
      if (frame_done && state == RO_IDLE) begin
        buf_w[0] <= hdr;
        buf_w[1] <= 32'(or_cnt_i);
        buf_w[2] <= 32'(or_cnt_q);
        for (int k = 0; k < N; k++) begin
          buf_w[3 + 2*k] <= iq_i[k];
          buf_w[4 + 2*k] <= iq_q[k];
        end
        overrun_pend <= 1'b0;
        idx          <= '0;
        state        <= RO_SEND;
      end else begin
        if (frame_done) overrun_pend <= 1'b1;   // busy: frame dropped
        if (state == RO_SEND && rd_ready) begin
          if (idx == IDX_W'(WORDS - 1)) begin
            state <= RO_IDLE;
            idx   <= '0;
          end else begin
            idx <= idx + 1'b1;
          end
        end
      end
    end
  end

  assign rd_valid = (state == RO_SEND);
  assign rd_data  = buf_w[idx];
  assign rd_last  = rd_valid && (idx == IDX_W'(WORDS - 1));

  // A word offered and not taken stays offered, unchanged.
  a_hold: assert property (@(posedge clk) disable iff (rst)
                           rd_valid && !rd_ready |=> rd_valid && $stable(rd_data));

endmodule
