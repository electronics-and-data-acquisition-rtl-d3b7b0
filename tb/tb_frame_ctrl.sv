// Self-checking testbench of frame_ctrl, with 2^6-sample frames.
// run is dropped at random; frame_end must come on exactly every 64th clock
// with run high, and frame_no must count the frames.
module tb_frame_ctrl;
  localparam int unsigned L = 6;
  logic clk = 0, rst = 1, run = 0;
  logic frame_end;
  logic [15:0] frame_no;
  int checks = 0, failures = 0;

  frame_ctrl #(.LOG2_N(L)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int samples = 0, frames = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int n = 0; n < 20000; n++) begin
      run = ($urandom_range(0, 9) != 0);
      #1;
      checks += 2;
      if (frame_end != (run && (samples % 64 == 63))) begin
        failures++; if (failures < 5) $display("frame_end wrong at sample %0d", samples);
      end
      if (int'(frame_no) != frames % 65536) begin failures++; if (failures < 5) $display("frame_no %0d vs %0d", frame_no, frames); end
      if (run) begin
        if (samples % 64 == 63) frames++;
        samples++;
      end
      @(negedge clk);
    end
    checks++;
    if (frames < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
