// Shared constants and types of the KID-array readout firmware.
//
// The firmware synthesises a comb of up to 128 tones with per-tone phase
// accumulators and pipelined CORDICs, sends the comb to a dual DAC, and
// demodulates the 12-bit ADC stream against every tone with an I&Q
// multiplier pair and an accumulate-and-dump low-pass filter. The widths
// below are those of the original firmware block diagram (17-bit phase,
// 12-bit sine/cosine and ADC, 20-bit products, 38-bit accumulators, 32-bit
// readout words, 19-bit comb sums, 14-bit DAC samples, 2^18-sample frames).
// The arctangent table is the CORDIC's 12 precalculated angles with 20-bit
// resolution; its angle unit (2^20 per full turn) is this design's choice:
// entry i = round(atan(2^-i) * 2^20 / (2*pi)).
package kid_pkg;

  localparam int unsigned N_TONES    = 128; // tone managers
  localparam int unsigned PHASE_W    = 17;  // phase accumulator width
  localparam int unsigned SC_W       = 12;  // CORDIC sine/cosine width
  localparam int unsigned ADC_W      = 12;  // ADC sample width
  localparam int unsigned PROD_W     = 20;  // MSBs of the I&Q product kept
  localparam int unsigned ACC_W      = 38;  // CIC accumulator width
  localparam int unsigned IQ_W       = 32;  // readout word width of I and Q
  localparam int unsigned SUM_W      = 19;  // comb adder width
  localparam int unsigned DAC_W      = 14;  // DAC sample width
  localparam int unsigned SHIFT_W    = 3;   // attenuator shift control width
  localparam int unsigned LOG2_FRAME = 18;  // 2^18 samples per accumulation frame
  localparam int unsigned FRAME_NO_W = 16;  // frame counter width
  localparam int unsigned OR_CNT_W   = LOG2_FRAME + 1; // over-range count width

  // CORDIC arctangent table: 12 angles, 20-bit binary angle (2^20 = 2*pi).
  localparam int unsigned CORDIC_ITER = 12;
  localparam int unsigned ATAN_W      = 20;
  localparam logic [ATAN_W-1:0] ATAN_LUT [CORDIC_ITER] = '{
    20'd131072, 20'd77376, 20'd40884, 20'd20753, 20'd10417, 20'd5213,
    20'd2607,   20'd1304,  20'd652,   20'd326,   20'd163,   20'd81
  };

  // Readout frame: header, I over-range count, Q over-range count, then I/Q pairs.
  typedef struct packed {
    logic                  overrun;   // one or more frames were dropped before this one
    logic [14:0]           reserved;
    logic [FRAME_NO_W-1:0] frame_no;  // number of frames completed
  } frame_header_t;

  typedef enum logic [0:0] {RO_IDLE, RO_SEND} readout_state_e;

endpackage
