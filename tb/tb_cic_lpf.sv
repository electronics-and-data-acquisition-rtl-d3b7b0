// Self-checking testbench of cic_lpf.
// Feeds random 20-bit samples (and runs of full-scale samples, to reach the
// accumulator's range) and dumps at irregular frame lengths. Each output must
// be the 32 MSBs of the 38-bit sum of the frame's samples, with dout_valid
// exactly one clock after dump.
module tb_cic_lpf;
  logic clk = 0, rst = 1;
  logic signed [19:0] din = '0;
  logic dump = 0;
  logic signed [31:0] dout;
  logic dout_valid;
  int checks = 0, failures = 0;
  longint sum = 0, expected = 0;
  bit pending = 0;

  cic_lpf dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int f = 0; f < 40; f++) begin
      len = (f == 5) ? 2**18 : (f == 6) ? 2**18 : $urandom_range(1, 3000);
      sum = 0;
      for (int n = 0; n < len; n++) begin
        din  = (f == 5) ? 20'sh7ffff : (f == 6) ? -20'sh80000 : 20'($urandom);
        dump = (n == len - 1);
        sum += longint'(din);
        @(negedge clk);
        // dout_valid must only come one clock after dump
        pending = dump;
        if (dump) expected = sum >>> 6;
        checks++;
        if (dout_valid != pending) begin failures++; $display("dout_valid wrong at frame %0d", f); end
        if (dout_valid && int'(dout) != int'(expected)) begin
          failures++; $display("frame %0d: %0d vs %0d", f, dout, expected);
        end
      end
    end
    dump = 0;
    @(negedge clk);
    checks++;
    if (dout_valid) begin failures++; $display("dout_valid without dump"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
