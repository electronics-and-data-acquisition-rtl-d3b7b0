// Self-checking testbench of iq_demod.
// Random ADC samples and sine/cosine values, including the extremes; each
// output must equal floor(adc*cos / 16) and floor(adc*sin / 16), the 20 MSBs
// of the 24-bit product, one clock later.
module tb_iq_demod;
  logic clk = 0;
  logic signed [11:0] adc = '0, sin_i = '0, cos_i = '0;
  logic signed [19:0] i_o, q_o;
  int checks = 0, failures = 0;

  iq_demod dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [11:0] pick();
    case ($urandom_range(0, 5))
      0: return 12'sh7ff;
      1: return 12'sh801;
      2: return 12'sh800;
      default: return 12'($urandom);
    endcase
  endfunction

  initial begin
    int ei, eq;
    @(negedge clk);
    for (int n = 0; n < 5000; n++) begin
      adc = pick(); sin_i = pick(); cos_i = pick();
      ei = int'($floor(real'(int'(adc) * int'(cos_i)) / 16.0));
      eq = int'($floor(real'(int'(adc) * int'(sin_i)) / 16.0));
      @(negedge clk);
      checks += 2;
      if (int'(i_o) != ei) begin failures++; if (failures < 5) $display("I %0d*%0d: %0d vs %0d", adc, cos_i, i_o, ei); end
      if (int'(q_o) != eq) begin failures++; if (failures < 5) $display("Q %0d*%0d: %0d vs %0d", adc, sin_i, q_o, eq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
