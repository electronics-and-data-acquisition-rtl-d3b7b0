// Self-checking testbench of phase_acc.
// Drives random frequency words, changed on the fly, and compares the phase
// with a modulo-2^17 accumulation kept by the testbench, every clock.
module tb_phase_acc;
  localparam int unsigned W = 17;
  logic clk = 0, rst = 1;
  logic [W-1:0] freq_word = '0, phase;
  int checks = 0, failures = 0;
  longint unsigned model = 0;

  phase_acc #(.PHASE_W(W)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (phase !== W'(model)) begin
        failures++;
        if (failures < 5) $display("phase mismatch at %0d: %h vs %h", n, phase, W'(model));
      end
      if (n % 500 == 0) freq_word = W'($urandom);
      model = (model + freq_word) % (1 << W);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
