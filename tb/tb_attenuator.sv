// Self-checking testbench of attenuator (19-bit comb to 14-bit DAC).
// Random comb samples and shift settings 0..7; each output must be the
// arithmetic right shift (shift clamped to 5), saturated to the 14-bit range,
// with over_range set exactly when saturation happened. The per-frame
// over-range count is checked against the testbench's own count at every
// frame_end, for frames with and without over-range samples.
module tb_attenuator;
  logic clk = 0, rst = 1;
  logic signed [18:0] din = '0;
  logic [2:0] shift = '0;
  logic frame_end = 0;
  logic signed [13:0] dout;
  logic over_range;
  logic [18:0] or_count;
  int checks = 0, failures = 0, n_over = 0;

  attenuator dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, e, sh, cnt, cnt_latched;
    bit ov, latch;
    cnt = 0; cnt_latched = 0; latch = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int f = 0; f < 60; f++) begin
      shift = 3'($urandom);
      for (int n = 0; n < 500; n++) begin
        din = (f % 3 == 0) ? 19'($signed(14'($urandom))) : 19'($urandom);  // every third frame: no over-range
        frame_end = (n == 499);
        sh = (shift > 5) ? 5 : int'(shift);
        v  = int'(din) >>> sh;
        e  = (v > 8191) ? 8191 : (v < -8192) ? -8192 : v;
        ov = (v > 8191) || (v < -8192);
        @(negedge clk);
        checks += 2;
        if (int'(dout) != e || over_range != ov) begin
          failures++; if (failures < 6) $display("din %0d sh %0d: %0d/%0b vs %0d/%0b", din, sh, dout, over_range, e, ov);
        end
        if (ov) n_over++;
        cnt += int'(ov);
        if (frame_end) begin cnt_latched = cnt; cnt = 0; end
        if (int'(or_count) != cnt_latched) begin
          failures++; if (failures < 6) $display("frame %0d: count %0d vs %0d", f, or_count, cnt_latched);
        end
      end
    end
    checks++;
    if (n_over == 0) begin failures++; $display("no over-range ever"); end
    $display("over-range samples: %0d", n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
