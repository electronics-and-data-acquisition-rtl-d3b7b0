// Self-checking testbench of cordic.
// Feeds one angle per clock (a full sweep of 17-bit angles in steps of 7,
// then random angles) and compares each sine/cosine, 14 clocks later, with
// round(2047*sin) and round(2047*cos) computed with real arithmetic. The
// error allowed is 2 LSB of 12 bits. The latency is checked too.
module tb_cordic;
  localparam int unsigned PW = 17, OW = 12, LAT = 14;
  logic clk = 0, rst = 1;
  logic [PW-1:0] phase = '0;
  logic signed [OW-1:0] sin_o, cos_o;
  int checks = 0, failures = 0, max_err = 0;
  logic [PW-1:0] hist [$];

  cordic #(.PHASE_W(PW), .OUT_W(OW)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int iabs(int v); return v < 0 ? -v : v; endfunction

  initial begin
    real a;
    int es, ec;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 2**PW/7 + 3000 + LAT; n++) begin
      // compare what leaves now with the angle that entered LAT clocks ago
      if (hist.size() == LAT) begin
        logic [PW-1:0] p;
        p = hist.pop_front();
        a = 2.0 * 3.14159265358979 * real'(p) / real'(2**PW);
        es = iabs(int'(sin_o) - int'($rtoi($floor(2047.0 * $sin(a) + 0.5))));
        ec = iabs(int'(cos_o) - int'($rtoi($floor(2047.0 * $cos(a) + 0.5))));
        checks++;
        if (es > 2 || ec > 2) begin
          failures++;
          if (failures < 6) $display("angle %0d: sin %0d cos %0d (err %0d %0d)", p, sin_o, cos_o, es, ec);
        end
        if (es > max_err) max_err = es;
        if (ec > max_err) max_err = ec;
      end
      phase = (n < 2**PW/7) ? PW'(n * 7) : PW'($urandom);
      hist.push_back(phase);
      @(negedge clk);
    end
    $display("max error %0d LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
