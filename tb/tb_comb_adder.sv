// Self-checking testbench of comb_adder at its default size (128 inputs of
// 12 bits, 19-bit sum). Every clock a new random input vector is applied
// (including all-maximum and all-minimum vectors, the worst case of all
// tones in phase); the sum must appear exactly log2(128) = 7 clocks later.
module tb_comb_adder;
  localparam int unsigned N = 128, IW = 12, OW = 19, LAT = 7;
  logic clk = 0;
  logic signed [IW-1:0] din [N];
  logic signed [OW-1:0] sum;
  int checks = 0, failures = 0;
  int hist [$];

  comb_adder dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    for (int n = 0; n < 3000; n++) begin
      s = 0;
      for (int j = 0; j < N; j++) begin
        din[j] = (n % 100 == 10) ? 12'sh7ff : (n % 100 == 20) ? 12'sh800 : IW'($urandom);
        s += int'(din[j]);
      end
      hist.push_back(s);
      @(negedge clk);
      if (hist.size() >= LAT) begin
        s = hist.pop_front();
        checks++;
        if (int'(sum) != s) begin failures++; if (failures < 5) $display("sum %0d vs %0d", sum, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
