// Low-pass filter and decimator of one I or Q channel.
//
// A first-order CIC with decimation ratio R = frame length, that is an
// accumulate-and-dump: every demodulated sample is added to an ACC_W = 38-bit
// accumulator; on the frame's last sample (dump) the sum including that
// sample is output and the accumulator restarts from zero. 2^18 samples of
// 20 bits fit the 38 bits without overflow. Of the sum, the OUT_W = 32 most
// significant bits are output (which 32 is this design's choice).
// The frame length is set by the common frame timer, not in here.
// Timing: dout and the one-clock dout_valid strobe appear one clock after
// dump; dout holds until the next dump.
module cic_lpf #(
  parameter int unsigned IN_W  = kid_pkg::PROD_W,
  parameter int unsigned ACC_W = kid_pkg::ACC_W,
  parameter int unsigned OUT_W = kid_pkg::IQ_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  din,
  input  logic                    dump,
  output logic signed [OUT_W-1:0] dout,
  output logic                    dout_valid
);

  logic signed [ACC_W-1:0] acc, acc_next;
  assign acc_next = acc + ACC_W'(din);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc        <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= dump;
      if (dump) begin
        dout <= acc_next[ACC_W-1 -: OUT_W];
        acc  <= '0;
      end else begin
        acc  <= acc_next;
      end
    end
  end

endmodule
